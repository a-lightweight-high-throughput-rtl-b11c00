// reduction_sync: synchronization module of the reduction logic.
//
// One input is taken as the reference. From the reference flit's header
// (destination, source coordinates and X/Y masks) and the router's own
// coordinates it derives which input directions take part in the reduction
// at this router (noc_pkg::red_inputs), and reports `ready` only when every
// one of them holds a flit of the same reduction. Nothing is consumed here:
// the caller forwards the flits downstream once `ready` is high, so a
// reduction is started only when it can complete. Combinational.
module reduction_sync
  import noc_pkg::*;
(
  input  logic [2:0]          ref_i,       // index of the reference input
  input  logic [NumDirs-1:0]  valid_i,     // input holds a reduction flit
  input  hdr_t                hdr_i [NumDirs],
  input  logic [XW-1:0]       local_x_i,
  input  logic [YW-1:0]       local_y_i,
  output logic [NumDirs-1:0]  expected_o,
  output logic                ready_o
);

  hdr_t ref_hdr;

  always_comb begin
    ref_hdr    = hdr_i[ref_i];
    expected_o = red_inputs(ref_hdr, local_x_i, local_y_i);
    ready_o    = valid_i[ref_i] && expected_o[ref_i];
    for (int j = 0; j < NumDirs; j++) begin
      if (expected_o[j] && !(valid_i[j] && same_reduction(ref_hdr, hdr_i[j])))
        ready_o = 1'b0;
    end
  end

endmodule
