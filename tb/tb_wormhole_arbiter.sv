// Testbench of wormhole_arbiter: four inputs each send packets of random
// length (the flit carries input id and sequence number). The output must
// show whole packets without interleaving, every flit exactly once in order
// per input, and while all inputs are busy the grants must rotate.
module tb_wormhole_arbiter;
  localparam int N = 4;
  typedef logic [15:0] T;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] v, r, last;
  T d [N];
  logic vo, ro, locked;
  T dout;
  int checks = 0, failures = 0;
  int seq [N], rcv [N], plen [N], pos [N];
  int cur = -1;
  int switches = 0;

  wormhole_arbiter #(.N(N), .T(T)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(v), .ready_o(r),
    .data_i(d), .last_i(last), .valid_o(vo), .ready_i(ro), .data_o(dout), .locked_o(locked));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: always valid, flits numbered per input
  always_comb begin
    for (int i = 0; i < N; i++) begin
      v[i] = rst_n && (seq[i] < 200 || pos[i] != 0);
      d[i] = T'((i << 12) | seq[i]);
      last[i] = (pos[i] == plen[i] - 1);
    end
  end

  int last_src = -1;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (v[i] && r[i]) begin
      seq[i] <= seq[i] + 1;
      if (pos[i] == plen[i] - 1) begin pos[i] <= 0; plen[i] <= $urandom_range(1, 4); end
      else pos[i] <= pos[i] + 1;
    end
    if (vo && ro) begin
      int src, s;
      src = int'(dout >> 12); s = int'(dout & 12'hfff);
      checks++;
      if (cur != -1 && src != cur) begin
        failures++;
        $display("packet interleaved: got input %0d while %0d in progress", src, cur);
      end
      checks++;
      if (s != rcv[src]) begin
        failures++;
        $display("input %0d flit %0d out of order (exp %0d)", src, s, rcv[src]);
      end
      rcv[src] = s + 1;
      if (last[src]) begin
        if (last_src != -1 && src != last_src) switches++;
        last_src = src;
        cur = -1;
      end else cur = src;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin seq[i] = 0; rcv[i] = 0; pos[i] = 0; plen[i] = 1 + i; end
    ro = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      ro = ($urandom_range(0, 3) != 0);
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (rcv[i] != seq[i] || seq[i] < 200) begin
        failures++;
        $display("input %0d delivered %0d of %0d flits", i, rcv[i], seq[i]);
      end
    end
    checks++;
    if (switches < 100) begin
      failures++;
      $display("grants do not rotate: %0d switches", switches);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
