// reduction_arbiter: lightweight parallel reduction of one router output.
//
// Every input direction has its own reduction_sync, which uses that input as
// the reference and raises `ready` once all inputs taking part in its
// reduction hold their flits. A leading-zero counter picks the lowest ready
// input, so several reductions can wait side by side and only a reduction
// that can complete is ever started; this is what keeps crossing reductions
// free of deadlock. The selected reduction is computed over all its inputs
// in one cycle and all of them are consumed together. The opcode of the
// header picks the operator:
//   CollectB  - B responses of a multicast: the 2-bit response codes are
//               ORed, so any error response survives (this design's choice;
//               the paper only says the responses are reduced);
//   LsbAnd    - AND of bit 0 of the data, other bits from the reference;
//   SelectAW  - the AW requests of a reduction: the reference flit is sent.
// The output carries the reference header. Combinational from inputs to the
// output; no state.
module reduction_arbiter
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = 64
) (
  input  logic [NumDirs-1:0]  valid_i,
  output logic [NumDirs-1:0]  ready_o,
  input  hdr_t                hdr_i  [NumDirs],
  input  logic [DATA_W-1:0]   data_i [NumDirs],
  input  logic [XW-1:0]       local_x_i,
  input  logic [YW-1:0]       local_y_i,
  output logic                valid_o,
  input  logic                ready_i,
  output hdr_t                hdr_o,
  output logic [DATA_W-1:0]   data_o
);

  logic [NumDirs-1:0] sync_ready;
  logic [NumDirs-1:0] expected [NumDirs];
  logic [2:0]         sel;
  logic [NumDirs-1:0] exp_sel;

  for (genvar i = 0; i < NumDirs; i++) begin : g_sync
    reduction_sync i_sync (
      .ref_i      (3'(i)),
      .valid_i    (valid_i),
      .hdr_i      (hdr_i),
      .local_x_i  (local_x_i),
      .local_y_i  (local_y_i),
      .expected_o (expected[i]),
      .ready_o    (sync_ready[i])
    );
  end

  // Leading-zero count: lowest-index ready input wins.
  always_comb begin
    sel = '0;
    for (int i = NumDirs - 1; i >= 0; i--) begin
      if (sync_ready[i]) sel = 3'(i);
    end
  end

  assign exp_sel = expected[sel];
  assign valid_o = |sync_ready;

  always_comb begin
    logic       lsb;
    logic [1:0] resp;
    hdr_o   = hdr_i[sel];
    lsb     = 1'b1;
    resp    = '0;
    for (int j = 0; j < NumDirs; j++) begin
      if (exp_sel[j]) begin
        lsb  = lsb & data_i[j][0];
        resp = resp | data_i[j][1:0];
      end
    end
    data_o = data_i[sel];
    unique case (hdr_i[sel].op)
      OpLsbAnd:   data_o[0] = lsb;
      OpCollectB: data_o[1:0] = resp;
      default:    ;  // OpSelectAw: reference flit as is
    endcase
  end

  assign ready_o = (valid_o && ready_i) ? exp_sel : '0;

endmodule
