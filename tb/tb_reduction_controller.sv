// Testbench of reduction_controller with a behavioural offload unit (eight
// FP64 lanes, fixed latency, computed with real arithmetic in the testbench).
// The router under test sits at (4,0) and is the destination.
//  1. Two participants (Local and East): an AW (SelectAW) and 16 W beats.
//     The AW must leave once, every W beat must be the lane-wise sum, and
//     the 16 results must come out at one per cycle after the pipeline fill.
//  2. Three participants (Local, East, North): each beat needs two passes
//     through the arithmetic unit (the partial result is fed back), so the
//     16 sums must come out at one per two cycles.
//  3. Case 2 again with random back-pressure on the output.
module tb_reduction_controller;
  import noc_pkg::*;
  localparam int DW = WideW;
  localparam int LAT = 4;
  localparam int BEATS = 16;

  logic clk = 0, rst_n = 0;
  logic [NumDirs-1:0] valid, ready;
  hdr_t hdr [NumDirs];
  logic [DW-1:0] data [NumDirs];
  logic oq_v, oq_r, os_v, os_r;
  logic [DW-1:0] op1, op2, res;
  coll_op_e oop;
  logic vo;
  logic ro = 1'b1;
  hdr_t ho;
  logic [DW-1:0] dout;
  logic [NumDirs-1:0] osel;
  int checks = 0, failures = 0;

  reduction_controller #(.DATA_W(DW), .HDR_DEPTH(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .local_x_i(3'd4), .local_y_i(2'd0),
    .valid_i(valid), .ready_o(ready), .hdr_i(hdr), .data_i(data),
    .offload_req_valid_o(oq_v), .offload_req_ready_i(oq_r),
    .offload_req_op1_o(op1), .offload_req_op2_o(op2), .offload_req_op_o(oop),
    .offload_rsp_valid_i(os_v), .offload_rsp_ready_o(os_r), .offload_rsp_result_i(res),
    .valid_o(vo), .ready_i(ro), .hdr_o(ho), .data_o(dout), .out_sel_o(osel));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // Behavioural offload unit
  logic [DW-1:0] pq_data [$];
  int            pq_time [$];
  assign oq_r = (pq_data.size() < 7);   // holds 7 items, like the cluster path
  assign os_v = (pq_data.size() > 0) && (pq_time[0] <= cyc);
  assign res  = (pq_data.size() > 0) ? pq_data[0] : '0;
  always @(posedge clk) if (rst_n) begin
    if (os_v && os_r) begin void'(pq_data.pop_front()); void'(pq_time.pop_front()); end
    if (oq_v && oq_r) begin
      logic [DW-1:0] s;
      for (int l = 0; l < 8; l++)
        s[64*l +: 64] = $realtobits($bitstoreal(op1[64*l +: 64]) + $bitstoreal(op2[64*l +: 64]));
      pq_data.push_back(s);
      pq_time.push_back(cyc + LAT);
    end
  end

  // Input sources
  hdr_t          qh [NumDirs][$];
  logic [DW-1:0] qd [NumDirs][$];
  always_comb for (int j = 0; j < NumDirs; j++) begin
    valid[j] = rst_n && qh[j].size() > 0;
    hdr[j]   = (qh[j].size() > 0) ? qh[j][0] : '0;
    data[j]  = (qd[j].size() > 0) ? qd[j][0] : '0;
  end
  always @(posedge clk) for (int j = 0; j < NumDirs; j++)
    if (valid[j] && ready[j]) begin void'(qh[j].pop_front()); void'(qd[j].pop_front()); end

  function automatic logic [63:0] val(int port, int beat, int lane);
    return $realtobits(real'(port * 1000 + beat * 10 + lane) + 0.5);
  endfunction

  // Output monitor
  logic [DW-1:0] exp_q [$];
  int n_out, first_w, last_w, aw_seen;
  logic stall_out = 0;
  always @(posedge clk) ro <= stall_out ? ($urandom_range(0, 3) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && vo && ro) begin
    if (ho.ch == ChAw) aw_seen++;
    else begin
      checks++;
      if (exp_q.size() == 0 || dout !== exp_q[0]) begin
        failures++;
        $display("result %0d wrong: lane0 got %f", n_out, $bitstoreal(dout[63:0]));
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      if (n_out == 0) first_w = cyc;
      last_w = cyc;
      n_out++;
      checks++;
      if (osel !== 5'b10000) begin failures++; $display("output select %b", osel); end
    end
  end

  task automatic run(logic [NumDirs-1:0] ports, hdr_t base);
    hdr_t h;
    n_out = 0; aw_seen = 0;
    for (int j = 0; j < NumDirs; j++) if (ports[j]) begin
      h = base; h.ch = ChAw; h.op = OpSelectAw; h.last = 1'b0;
      qh[j].push_back(h); qd[j].push_back(DW'(32'h1000_0040));
    end
    for (int b = 0; b < BEATS; b++) begin
      logic [DW-1:0] e;
      for (int l = 0; l < 8; l++) begin
        real s;
        s = 0.0;
        for (int j = 0; j < NumDirs; j++) if (ports[j]) s += $bitstoreal(val(j, b, l));
        e[64*l +: 64] = $realtobits(s);
      end
      exp_q.push_back(e);
      for (int j = 0; j < NumDirs; j++) if (ports[j]) begin
        logic [DW-1:0] d;
        for (int l = 0; l < 8; l++) d[64*l +: 64] = val(j, b, l);
        h = base; h.ch = ChW; h.op = OpFAdd; h.last = (b == BEATS - 1);
        qh[j].push_back(h); qd[j].push_back(d);
      end
    end
    fork
      while (n_out != BEATS) @(posedge clk);
      begin repeat (2000) @(posedge clk); end
    join_any
    disable fork;
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != BEATS || aw_seen != 1) begin
      failures++;
      $display("delivered %0d results, %0d AW", n_out, aw_seen);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hdr_t b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. sources x = 4..5 in row 0 -> Local + East
    b = '0; b.dst_x = 3'd4; b.dst_y = 2'd0; b.src_x = 3'd4; b.src_y = 2'd0;
    b.x_mask = 3'd1; b.y_mask = 2'd0;
    run(5'b10010, b);
    $display("two inputs: %0d beats in %0d cycles", BEATS, last_w - first_w + 1);
    checks++;
    if (last_w - first_w + 1 != BEATS) begin
      failures++;
      $display("two-input reduction not at one beat per cycle");
    end
    // 2. sources x = 4..5, y = 0..1 -> Local + East + North
    b.y_mask = 2'd1;
    run(5'b10011, b);
    $display("three inputs: %0d beats in %0d cycles", BEATS, last_w - first_w + 1);
    checks++;
    if (last_w - first_w + 1 < 2 * BEATS - 2 || last_w - first_w + 1 > 2 * BEATS + LAT + 4) begin
      failures++;
      $display("three-input reduction not at one beat per two cycles");
    end
    // 3. same with output back-pressure
    stall_out = 1;
    run(5'b10011, b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
