// spill_reg: pipeline register ("cut") on a valid/ready stream.
//
// Two entries: the output register and a spill register that catches the
// item arriving in the cycle the output stalls. Valid, data and also ready
// are registered, so the cut breaks every combinational path between its two
// sides (forward and backward). It sustains one item per cycle, adds one
// cycle of latency and holds up to two items.
module spill_reg #(
  parameter type T = logic [7:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  output logic valid_o,
  input  logic ready_i,
  output T     data_o
);

  logic a_full_q, b_full_q;
  T     a_q, b_q;

  assign ready_o = !b_full_q;
  assign valid_o = a_full_q;
  assign data_o  = a_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
    end else if (a_full_q && ready_i) begin
      // output leaves: refill from the spill register or the input
      if (b_full_q) b_full_q <= 1'b0;
      else          a_full_q <= valid_i;
    end else if (!a_full_q) begin
      a_full_q <= valid_i;
    end else if (valid_i) begin
      b_full_q <= 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (a_full_q && ready_i) begin
      if (b_full_q)     a_q <= b_q;
      else if (valid_i) a_q <= data_i;
    end else if (!a_full_q) begin
      if (valid_i) a_q <= data_i;
    end else if (valid_i && !b_full_q) begin
      b_q <= data_i;
    end
  end

endmodule
