// Testbench of stream_fork: items with random select vectors are offered;
// outputs accept at random. Every selected output must see each item exactly
// once, unselected outputs never, and the input must be acknowledged in the
// cycle the last selected output accepts.
module tb_stream_fork;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic valid, ready;
  logic [N-1:0] sel, vo, ri;
  int checks = 0, failures = 0;
  int got [N];
  logic [N-1:0] taken;

  stream_fork #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .ready_o(ready),
                            .select_i(sel), .valid_o(vo), .ready_i(ri));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; sel = '0; ri = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int cycles;
      @(negedge clk);
      valid = 1;
      sel = N'($urandom) | N'(1 << $urandom_range(0, N - 1));
      taken = '0;
      cycles = 0;
      forever begin
        ri = N'($urandom);
        #1;
        // outputs not selected or already served must not be valid
        checks++;
        if ((vo & ~sel) != '0 || (vo & taken) != '0) begin
          failures++;
          $display("valid on wrong output: vo=%b sel=%b taken=%b", vo, sel, taken);
        end
        checks++;
        if (ready !== ((taken | (vo & ri) | ~sel) == '1)) begin
          failures++;
          $display("ready wrong: ready=%b taken=%b vo=%b ri=%b sel=%b", ready, taken, vo, ri, sel);
        end
        @(posedge clk);
        taken |= vo & ri;
        if (ready) break;
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (taken !== sel) begin
        failures++;
        $display("item not delivered to all: taken=%b sel=%b", taken, sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
