// Testbench of collective_router at (5,1) with both parallel and wide
// reductions enabled (64-bit data, behavioural one-lane FP64 offload unit).
//  1. Random unicast packets from all five inputs and random multicast
//     packets from the local input, with random output back-pressure. A
//     reference XY(-tree) model gives the set of outputs of every packet;
//     each output must deliver, per input, exactly the expected flits in
//     order and must never interleave two packets.
//  2. An LsbAnd reduction (sources x = 4..7 in row 1, destination (4,1)):
//     Local and East take part here, one merged flit must leave West.
//  3. An FAdd reduction (sources x = 4..5 in row 1, destination (5,1)):
//     West and Local are diverted to the reduction controller; one AW and
//     the element-wise sums must leave on Local.
module tb_collective_router;
  import noc_pkg::*;
  localparam int DW = 64;
  localparam int LX = 5, LY = 1;

  logic clk = 0, rst_n = 0;
  logic [4:0] iv, ir, ov;
  logic [4:0] orr = '1;
  hdr_t ih [5], oh [5];
  logic [DW-1:0] id [5], od [5];
  logic oq_v, oq_r, os_v, os_r;
  logic [DW-1:0] op1, op2, res;
  coll_op_e oop;
  int checks = 0, failures = 0;

  collective_router #(.DATA_W(DW), .EN_PAR_RED(1'b1), .EN_WIDE_RED(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .local_x_i(3'(LX)), .local_y_i(2'(LY)),
    .in_valid_i(iv), .in_ready_o(ir), .in_hdr_i(ih), .in_data_i(id),
    .out_valid_o(ov), .out_ready_i(orr), .out_hdr_o(oh), .out_data_o(od),
    .offload_req_valid_o(oq_v), .offload_req_ready_i(oq_r),
    .offload_req_op1_o(op1), .offload_req_op2_o(op2), .offload_req_op_o(oop),
    .offload_rsp_valid_i(os_v), .offload_rsp_ready_o(os_r), .offload_rsp_result_i(res));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // behavioural offload unit, latency 3
  logic [DW-1:0] pq [$];
  int            pt [$];
  assign oq_r = pq.size() < 8;
  assign os_v = pq.size() > 0 && pt[0] <= cyc;
  assign res  = pq.size() > 0 ? pq[0] : '0;
  always @(posedge clk) if (rst_n) begin
    if (os_v && os_r) begin void'(pq.pop_front()); void'(pt.pop_front()); end
    if (oq_v && oq_r) begin
      pq.push_back($realtobits($bitstoreal(op1) + $bitstoreal(op2)));
      pt.push_back(cyc + 3);
    end
  end

  // sources
  hdr_t          qh [5][$];
  logic [DW-1:0] qd [5][$];
  always_comb for (int j = 0; j < 5; j++) begin
    iv[j] = rst_n && qh[j].size() > 0;
    ih[j] = qh[j].size() > 0 ? qh[j][0] : '0;
    id[j] = qd[j].size() > 0 ? qd[j][0] : '0;
  end
  always @(posedge clk) for (int j = 0; j < 5; j++)
    if (iv[j] && ir[j]) begin void'(qh[j].pop_front()); void'(qd[j].pop_front()); end

  logic stall = 0;
  always @(posedge clk) for (int o = 0; o < 5; o++)
    orr[o] <= stall ? ($urandom_range(0, 2) != 0) : 1'b1;

  function automatic int hop(int dx, int dy);
    if (dx > LX) return 1;
    if (dx < LX) return 3;
    if (dy > LY) return 0;
    if (dy < LY) return 2;
    return 4;
  endfunction

  // expected flits per output per input
  logic [DW-1:0] eq [5][5][$];
  int            cur [5];
  int            n_flits = 0, n_exp = 0;
  // phase 2/3 expectations
  int            red_w = 0, aw_l = 0, sum_l = 0;
  logic [DW-1:0] sums [$];
  bit            lsb_exp;

  always @(posedge clk) if (rst_n) for (int o = 0; o < 5; o++) if (ov[o] && orr[o]) begin
    if (oh[o].op == OpLsbAnd) begin
      checks++;
      if (o != 3 || od[o][0] !== lsb_exp) begin failures++; $display("LsbAnd out %0d wrong got %h exp %0d red_w %0d", o, od[o], lsb_exp, red_w); end
      red_w++;
    end else if (oh[o].op == OpSelectAw) begin
      checks++;
      if (o != 4) begin failures++; $display("AW of reduction on port %0d", o); end
      aw_l++;
    end else if (oh[o].op == OpFAdd) begin
      checks++;
      if (o != 4 || sums.size() == 0 || od[o] !== sums[0]) begin
        failures++; $display("FAdd result on port %0d wrong", o);
      end
      if (sums.size() > 0) void'(sums.pop_front());
      sum_l++;
    end else begin
      int src;
      src = int'(od[o][63:60]);
      checks++;
      if (cur[o] != -1 && cur[o] != src) begin
        failures++; $display("output %0d: packet from %0d interleaved by %0d", o, cur[o], src);
      end
      if (src > 4 || eq[o][src].size() == 0 || od[o] !== eq[o][src][0]) begin
        failures++; $display("output %0d: unexpected flit %h", o, od[o]);
      end else void'(eq[o][src].pop_front());
      cur[o] = oh[o].last ? -1 : src;
      n_flits++;
    end
  end

  int seq = 0;
  task automatic push_rand(int j);
    hdr_t h;
    int len;
    logic [4:0] outs;
    h = '0;
    len = $urandom_range(1, 3);
    if (j == 4 && $urandom_range(0, 1)) begin
      h.op = OpMulticast;
      h.dst_x = 3'($urandom_range(4, 7)); h.dst_y = 2'($urandom);
      h.x_mask = 3'($urandom & 3); h.y_mask = 2'($urandom & 3);
    end else begin
      h.op = OpUnicast;
      h.dst_x = 3'($urandom_range(0, 7)); h.dst_y = 2'($urandom);
    end
    outs = '0;
    if (h.op == OpUnicast) outs[hop(h.dst_x, h.dst_y)] = 1'b1;
    else for (int x = 0; x < 8; x++) for (int y = 0; y < 4; y++)
      if ((((x ^ h.dst_x) & ~h.x_mask & 7) == 0) && (((y ^ h.dst_y) & ~h.y_mask & 3) == 0))
        outs[hop(x, y)] = 1'b1;
    for (int k = 0; k < len; k++) begin
      logic [DW-1:0] d;
      d = {4'(j), 60'(seq++)};
      h.ch = ChW; h.last = (k == len - 1);
      qh[j].push_back(h); qd[j].push_back(d);
      for (int o = 0; o < 5; o++) if (outs[o]) begin eq[o][j].push_back(d); n_exp++; end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hdr_t h;
    for (int o = 0; o < 5; o++) cur[o] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    stall = 1;
    for (int n = 0; n < 150; n++) for (int j = 0; j < 5; j++) push_rand(j);
    while (n_flits != n_exp && cyc < 20000) @(posedge clk);
    checks++;
    if (n_flits != n_exp) begin failures++; $display("phase 1: %0d/%0d flits", n_flits, n_exp); end
    stall = 0;
    // phase 2: LsbAnd, sources x 4..7 in row 1, dst (4,1)
    for (int r = 0; r < 4; r++) begin
      bit a, b;
      a = (r != 1); b = (r != 2);
      lsb_exp = a & b;
      h = '0; h.dst_x = 3'd4; h.dst_y = 2'd1; h.src_x = 3'd4; h.src_y = 2'd1;
      h.x_mask = 3'd3; h.y_mask = 2'd0; h.op = OpLsbAnd; h.ch = ChW; h.last = 1'b1;
      qh[4].push_back(h); qd[4].push_back(DW'(a));
      repeat ($urandom_range(0, 3)) @(posedge clk);
      qh[1].push_back(h); qd[1].push_back(DW'(b));
      while (red_w != r + 1 && cyc < 30000) @(posedge clk);
    end
    checks++;
    if (red_w != 4) begin failures++; $display("phase 2: %0d reductions", red_w); end
    // phase 3: FAdd, sources x 4..5 in row 1, dst (5,1)
    h = '0; h.dst_x = 3'd5; h.dst_y = 2'd1; h.src_x = 3'd4; h.src_y = 2'd1;
    h.x_mask = 3'd1; h.op = OpSelectAw; h.ch = ChAw; h.last = 1'b0;
    qh[3].push_back(h); qd[3].push_back(64'h1000_0000);
    qh[4].push_back(h); qd[4].push_back(64'h1000_0000);
    for (int b = 0; b < 8; b++) begin
      real x, y;
      x = real'(b) + 0.25; y = real'(b * 3) - 7.5;
      h.op = OpFAdd; h.ch = ChW; h.last = (b == 7);
      qh[3].push_back(h); qd[3].push_back($realtobits(x));
      qh[4].push_back(h); qd[4].push_back($realtobits(y));
      sums.push_back($realtobits(x + y));
    end
    while (sum_l != 8 && cyc < 40000) @(posedge clk);
    checks++;
    if (aw_l != 1 || sum_l != 8) begin failures++; $display("phase 3: %0d AW %0d sums", aw_l, sum_l); end
    $display("unicast/multicast flits %0d, LsbAnd %0d, FAdd beats %0d", n_flits, red_w, sum_l);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
