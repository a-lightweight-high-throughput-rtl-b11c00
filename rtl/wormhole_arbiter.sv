// wormhole_arbiter: round-robin arbiter that holds its grant for a whole
// packet.
//
// When unlocked it grants the first valid input after the one served last.
// A granted flit with last = 0 locks the arbiter on that input until the
// flit with last = 1 has passed, so the flits of one packet leave the output
// back to back. Combinational from valid to the output; the lock and the
// round-robin pointer are registered.
module wormhole_arbiter #(
  parameter int unsigned N = 5,
  parameter type T = logic [7:0]
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] valid_i,
  output logic [N-1:0] ready_o,
  input  T             data_i [N],
  input  logic [N-1:0] last_i,
  output logic         valid_o,
  input  logic         ready_i,
  output T             data_o,
  output logic         locked_o          // a packet is in progress
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked_q;
  logic [IW-1:0] idx_q, rr_q, pick, idx;
  logic          found;

  always_comb begin
    pick  = '0;
    found = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(rr_q) + k) % N;
      if (!found && valid_i[c]) begin
        pick  = IW'(c);
        found = 1'b1;
      end
    end
    idx     = locked_q ? idx_q : pick;
    valid_o = valid_i[idx];
    data_o  = data_i[idx];
    ready_o = '0;
    ready_o[idx] = ready_i;
  end

  assign locked_o = locked_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      locked_q <= 1'b0;
      idx_q    <= '0;
      rr_q     <= IW'(N - 1);
    end else if (valid_o && ready_i) begin
      idx_q    <= idx;
      locked_q <= !last_i[idx];
      if (last_i[idx]) rr_q <= idx;
    end
  end

endmodule
