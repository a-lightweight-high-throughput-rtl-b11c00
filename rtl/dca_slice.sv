// dca_slice: one core's FPU shared between the core and Direct Compute
// Access (DCA).
//
// Two requesters compete for the FPU: the core that owns it and the DCA
// port, which carries one 64-bit slice of a 512-bit offloaded operation. A
// two-way round-robin arbiter picks one request per cycle. The winner's tag
// (core or DCA) travels with the operation through the FPU_LAT pipeline
// stages, and at the end selects which response port receives the result.
// Every stage has its own valid/ready handshake, so a result that its
// requester does not take stalls only the stages behind it.
//
// The arithmetic is fp64_adder (FP64 add); it is evaluated when an operation
// enters the pipeline and the result then moves through FPU_LAT registers,
// so latency is FPU_LAT cycles and throughput one operation per cycle.
module dca_slice #(
  parameter int unsigned FPU_LAT = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // Core FPU port
  input  logic        core_req_valid_i,
  output logic        core_req_ready_o,
  input  logic [63:0] core_req_a_i,
  input  logic [63:0] core_req_b_i,
  output logic        core_rsp_valid_o,
  input  logic        core_rsp_ready_i,
  output logic [63:0] core_rsp_result_o,
  // DCA port
  input  logic        dca_req_valid_i,
  output logic        dca_req_ready_o,
  input  logic [63:0] dca_req_a_i,
  input  logic [63:0] dca_req_b_i,
  output logic        dca_rsp_valid_o,
  input  logic        dca_rsp_ready_i,
  output logic [63:0] dca_rsp_result_o
);

  typedef struct packed {
    logic        tag_dca;
    logic [63:0] result;
  } stage_t;

  logic              prio_dca_q, grant_dca, in_valid, in_ready;
  logic [63:0]       op_a, op_b, sum;
  logic [FPU_LAT:0]  rdy;     // rdy[k]: stage k can take a new item
  stage_t            st_in;
  logic              out_ready;

  // Arbitration
  always_comb begin
    if (core_req_valid_i && dca_req_valid_i) grant_dca = prio_dca_q;
    else                                     grant_dca = dca_req_valid_i;
    in_valid = core_req_valid_i || dca_req_valid_i;
    op_a = grant_dca ? dca_req_a_i : core_req_a_i;
    op_b = grant_dca ? dca_req_b_i : core_req_b_i;
    core_req_ready_o = in_ready && !grant_dca;
    dca_req_ready_o  = in_ready && grant_dca;
  end

  fp64_adder i_add (.a_i(op_a), .b_i(op_b), .sum_o(sum));

  // Elastic pipeline: v_q[k]/st_q[k] is stage k; stage 1 takes the arbiter
  // output, stage FPU_LAT drives the response ports.
  logic [FPU_LAT:1] v_q;
  stage_t           st_q [1:FPU_LAT];

  assign st_in     = '{tag_dca: grant_dca, result: sum};
  assign out_ready = st_q[FPU_LAT].tag_dca ? dca_rsp_ready_i : core_rsp_ready_i;
  assign rdy[FPU_LAT] = !v_q[FPU_LAT] || out_ready;
  for (genvar k = FPU_LAT - 1; k >= 1; k--) begin : g_rdy
    assign rdy[k] = !v_q[k] || rdy[k+1];
  end
  assign rdy[0]   = rdy[1];
  assign in_ready = rdy[1];

  for (genvar k = 1; k <= FPU_LAT; k++) begin : g_stage
    logic   v_prev;
    stage_t st_prev;
    if (k == 1) begin : g_first
      assign v_prev  = in_valid;
      assign st_prev = st_in;
    end else begin : g_next
      assign v_prev  = v_q[k-1];
      assign st_prev = st_q[k-1];
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)     v_q[k] <= 1'b0;
      else if (rdy[k]) v_q[k] <= v_prev;
    end
    always_ff @(posedge clk_i) begin
      if (rdy[k] && v_prev) st_q[k] <= st_prev;
    end
  end

  assign core_rsp_valid_o  = v_q[FPU_LAT] && !st_q[FPU_LAT].tag_dca;
  assign dca_rsp_valid_o   = v_q[FPU_LAT] && st_q[FPU_LAT].tag_dca;
  assign core_rsp_result_o = st_q[FPU_LAT].result;
  assign dca_rsp_result_o  = st_q[FPU_LAT].result;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) prio_dca_q <= 1'b0;
    else if (in_valid && in_ready && core_req_valid_i && dca_req_valid_i)
      prio_dca_q <= !grant_dca;
  end

endmodule
