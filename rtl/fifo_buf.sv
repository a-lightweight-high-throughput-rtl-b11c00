// fifo_buf: first-in first-out buffer with valid/ready on both sides.
//
// DEPTH entries of type T in a circular array. Push is refused only when the
// buffer is full and no pop happens in the same cycle; the output is the
// head entry, valid while the buffer is not empty (no fall-through).
module fifo_buf #(
  parameter int unsigned DEPTH = 2,
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

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem_q [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [PW:0]   cnt_q;
  logic          push, pop;

  assign valid_o = (cnt_q != '0);
  assign data_o  = mem_q[rd_q];
  assign pop     = valid_o && ready_i;
  assign ready_o = (cnt_q != (PW+1)'(DEPTH)) || pop;
  assign push    = valid_i && ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == PW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      if (pop)  rd_q <= (rd_q == PW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= data_i;
  end

endmodule
