// stream_fork: forks one valid/ready stream to the outputs named by a
// select vector.
//
// Each selected output sees valid as soon as the input is valid and may
// accept in any cycle; a per-output "done" bit remembers which outputs have
// already taken the current item. The input is acknowledged in the cycle in
// which the last selected output accepts, so it is consumed only once every
// selected output has received it. The select vector must stay stable while
// the input waits. An item with an empty select vector is consumed at once.
module stream_fork #(
  parameter int unsigned N = 5
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         valid_i,
  output logic         ready_o,
  input  logic [N-1:0] select_i,
  output logic [N-1:0] valid_o,
  input  logic [N-1:0] ready_i
);

  logic [N-1:0] done_q;
  logic         all_done;

  assign valid_o  = valid_i ? (select_i & ~done_q) : '0;
  assign all_done = &(~select_i | done_q | (valid_o & ready_i));
  assign ready_o  = valid_i && all_done;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)            done_q <= '0;
    else if (valid_i) begin
      if (all_done)         done_q <= '0;
      else                  done_q <= done_q | (valid_o & ready_i);
    end
  end

endmodule
