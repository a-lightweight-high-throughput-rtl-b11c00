// Testbench of output_arbiter (5 inputs, parallel reductions enabled), at
// router (4,0). Inputs South and West send random multi-flit unicast packets
// the whole time. Inputs North, East and Local send random unicast packets
// and, in between, LsbAnd reduction flits of one reduction whose sources are
// x = 4..5, y = 0..1 (so exactly N, E and L take part here). The output is
// stalled at random. Checks: packets are never interleaved on the output;
// every packet arrives complete and in order per input; every reduction
// round gives exactly one output flit whose bit 0 is the AND of the three.
module tb_output_arbiter;
  import noc_pkg::*;
  localparam int DW = 16;
  localparam int ROUNDS = 60;
  localparam int PKTS = 40;   // unicast packets per input

  logic clk = 0, rst_n = 0;
  logic [4:0] valid, ready;
  hdr_t hdr [5];
  logic [DW-1:0] data [5];
  logic vo, ro;
  hdr_t ho;
  logic [DW-1:0] dout;
  int checks = 0, failures = 0;

  output_arbiter #(.DATA_W(DW), .N_IN(5), .EN_PAR_RED(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .local_x_i(3'd4), .local_y_i(2'd0),
    .valid_i(valid), .ready_o(ready), .hdr_i(hdr), .data_i(data),
    .valid_o(vo), .ready_i(ro), .hdr_o(ho), .data_o(dout));

  always #5 clk = ~clk;

  hdr_t          qh [5][$];
  logic [DW-1:0] qd [5][$];
  always_comb for (int j = 0; j < 5; j++) begin
    valid[j] = rst_n && qh[j].size() > 0;
    hdr[j]   = (qh[j].size() > 0) ? qh[j][0] : '0;
    data[j]  = (qd[j].size() > 0) ? qd[j][0] : '0;
  end
  always @(posedge clk) for (int j = 0; j < 5; j++)
    if (valid[j] && ready[j]) begin void'(qh[j].pop_front()); void'(qd[j].pop_front()); end
  always @(posedge clk) ro <= ($urandom_range(0, 3) != 0);

  // expected
  int  exp_seq [5];
  bit  exp_red [$];
  int  cur_in = -1;   // input whose packet is on the output
  int  n_uni = 0, n_red = 0;

  always @(posedge clk) if (rst_n && vo && ro) begin
    if (ho.op == OpLsbAnd) begin
      checks++;
      if (cur_in != -1) begin failures++; $display("reduction inside a packet"); end
      if (exp_red.size() == 0 || dout[0] !== exp_red[0]) begin
        failures++; $display("reduction %0d wrong", n_red);
      end
      if (exp_red.size() > 0) void'(exp_red.pop_front());
      n_red++;
    end else begin
      int src;
      src = int'(dout[15:13]);
      checks++;
      if (cur_in != -1 && src != cur_in) begin
        failures++; $display("packet of input %0d interleaved by input %0d", cur_in, src);
      end
      if (int'(dout[12:0]) != exp_seq[src]) begin
        failures++; $display("input %0d flit %0d, expected %0d", src, dout[12:0], exp_seq[src]);
      end
      exp_seq[src] = int'(dout[12:0]) + 1;
      cur_in = ho.last ? -1 : src;
      n_uni++;
    end
  end

  int total_uni = 0;
  int seq [5];
  task automatic push_pkt(int j);
    int len;
    hdr_t h;
    len = $urandom_range(1, 4);
    for (int k = 0; k < len; k++) begin
      h = '0; h.dst_x = 3'd4; h.op = OpUnicast; h.ch = ChW; h.last = (k == len - 1);
      qh[j].push_back(h); qd[j].push_back({3'(j), 13'(seq[j])});
      seq[j]++; total_uni++;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 5; j++) begin seq[j] = 0; exp_seq[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 2; j <= 3; j++) for (int p = 0; p < PKTS; p++) push_pkt(j);
    for (int r = 0; r < ROUNDS; r++) begin
      bit a;
      hdr_t h;
      a = 1;
      for (int j = 0; j < 5; j++) if (j != 2 && j != 3) begin
        bit b;
        if ($urandom_range(0, 1)) push_pkt(j);
        b = ($urandom_range(0, 5) != 0);
        a &= b;
        h = '0; h.dst_x = 3'd4; h.dst_y = 2'd0; h.src_x = 3'd4; h.src_y = 2'd0;
        h.x_mask = 3'd1; h.y_mask = 2'd1; h.op = OpLsbAnd; h.ch = ChW; h.last = 1'b1;
        qh[j].push_back(h); qd[j].push_back({15'h7abc, b});
      end
      exp_red.push_back(a);
      repeat ($urandom_range(0, 6)) @(posedge clk);
    end
    while ((n_uni != total_uni || n_red != ROUNDS) && $time < 900000) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n_uni != total_uni || n_red != ROUNDS) begin
      failures++;
      $display("delivered %0d/%0d flits, %0d/%0d reductions", n_uni, total_uni, n_red, ROUNDS);
    end
    $display("unicast flits %0d reductions %0d", n_uni, n_red);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
