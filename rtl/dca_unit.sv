// dca_unit: Direct Compute Access port of the compute cluster.
//
// The router's offload interface reaches the cluster as three 512-bit
// streams: two operands (request) and one result (response), plus the
// operation code. Each 512-bit operand is cut into eight 64-bit slices; slice
// i goes to the FPU of core i (dca_slice), where it competes with that
// core's own FPU requests. Because each slice is accepted independently, a
// stream fork hands out the slices and remembers which FPUs already took
// theirs; the request is acknowledged when all eight have. On the way back
// the eight partial results are joined: the response is valid when every
// slice holds its result, and all eight are released together. Only the
// FAdd operation (eight FP64 additions) is implemented.
module dca_unit
  import noc_pkg::*;
#(
  parameter int unsigned NUM_CORES = 8,
  parameter int unsigned FPU_LAT = 3
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // DCA request from the router offload port
  input  logic                req_valid_i,
  output logic                req_ready_o,
  input  logic [64*NUM_CORES-1:0] req_op1_i,
  input  logic [64*NUM_CORES-1:0] req_op2_i,
  input  coll_op_e            req_op_i,
  // DCA response to the router
  output logic                rsp_valid_o,
  input  logic                rsp_ready_i,
  output logic [64*NUM_CORES-1:0] rsp_result_o,
  // FPU requests of the cores
  input  logic [NUM_CORES-1:0] core_req_valid_i,
  output logic [NUM_CORES-1:0] core_req_ready_o,
  input  logic [63:0]          core_req_a_i [NUM_CORES],
  input  logic [63:0]          core_req_b_i [NUM_CORES],
  output logic [NUM_CORES-1:0] core_rsp_valid_o,
  input  logic [NUM_CORES-1:0] core_rsp_ready_i,
  output logic [63:0]          core_rsp_result_o [NUM_CORES]
);

  logic [NUM_CORES-1:0] s_req_valid, s_req_ready, s_rsp_valid;
  logic                 join_fire;

  stream_fork #(.N(NUM_CORES)) i_fork (
    .clk_i, .rst_ni,
    .valid_i  (req_valid_i),
    .ready_o  (req_ready_o),
    .select_i ({NUM_CORES{1'b1}}),
    .valid_o  (s_req_valid),
    .ready_i  (s_req_ready)
  );

  assign rsp_valid_o = &s_rsp_valid;
  assign join_fire   = rsp_valid_o && rsp_ready_i;

  for (genvar i = 0; i < NUM_CORES; i++) begin : g_slice
    dca_slice #(.FPU_LAT(FPU_LAT)) i_slice (
      .clk_i, .rst_ni,
      .core_req_valid_i  (core_req_valid_i[i]),
      .core_req_ready_o  (core_req_ready_o[i]),
      .core_req_a_i      (core_req_a_i[i]),
      .core_req_b_i      (core_req_b_i[i]),
      .core_rsp_valid_o  (core_rsp_valid_o[i]),
      .core_rsp_ready_i  (core_rsp_ready_i[i]),
      .core_rsp_result_o (core_rsp_result_o[i]),
      .dca_req_valid_i   (s_req_valid[i]),
      .dca_req_ready_o   (s_req_ready[i]),
      .dca_req_a_i       (req_op1_i[64*i +: 64]),
      .dca_req_b_i       (req_op2_i[64*i +: 64]),
      .dca_rsp_valid_o   (s_rsp_valid[i]),
      .dca_rsp_ready_i   (join_fire),
      .dca_rsp_result_o  (rsp_result_o[64*i +: 64])
    );
  end

  // The offload carries only wide reductions with the FAdd opcode.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   req_valid_i |-> (req_op_i == OpFAdd));

endmodule
