// reduction_controller: centralized wide reduction logic of a router.
//
// One instance serves all outputs. Inputs are the flits that the router's
// input ports divert here (wide reductions with two or more participating
// inputs at this router). A leading-zero counter picks the reference input,
// a single reduction_sync waits until every participating input holds its
// flit, and the controller then stays locked on that reduction until its
// last flit has been issued, so only one wide reduction runs per router.
//
// Data flits (opcode FAdd) are sent to the two-operand offload port: operand
// 1 from the first participating input, operand 2 from the second. Their
// header goes into a header buffer (HDR_DEPTH entries) together with the set
// of participating inputs not yet combined. Results come back in order on
// the offload response port. If inputs remain (three or more participants),
// the result is fed back as operand 1 together with the next remaining
// input, which costs one more pass through the arithmetic unit; feedback has
// priority over new issues. Otherwise the result is joined with its header
// and sent to the output selected by XY routing of the destination. AW flits
// of a reduction (SelectAW) need no arithmetic: their header and AW payload
// are pushed into the same buffer and leave in order without offloading.
//
// A feedback takes one result and issues one request in the same cycle, so
// it needs the offload path to accept a request while its own output is
// stalled. New issues are therefore limited to CREDITS computations in
// flight, fewer than the offload path can hold (this design's choice; the
// paper does not describe flow control of the offload port). With HDR_DEPTH
// and CREDITS at least the round-trip latency of the offload path, one
// two-input reduction is issued per cycle. Interfaces are valid/ready;
// the output is the head of the header buffer, so all outputs are
// registered except the result data, which passes straight from the
// offload response.
module reduction_controller
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = WideW,
  parameter int unsigned HDR_DEPTH = 8,
  // Offload computations in flight (issued, result not yet taken). Must be
  // below the number of items the offload path can hold, see above.
  parameter int unsigned CREDITS = 6
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [XW-1:0]      local_x_i,
  input  logic [YW-1:0]      local_y_i,
  // Diverted input flits
  input  logic [NumDirs-1:0] valid_i,
  output logic [NumDirs-1:0] ready_o,
  input  hdr_t               hdr_i  [NumDirs],
  input  logic [DATA_W-1:0]  data_i [NumDirs],
  // Offload request: two operands and the operation
  output logic               offload_req_valid_o,
  input  logic               offload_req_ready_i,
  output logic [DATA_W-1:0]  offload_req_op1_o,
  output logic [DATA_W-1:0]  offload_req_op2_o,
  output coll_op_e           offload_req_op_o,
  // Offload response: the result
  input  logic               offload_rsp_valid_i,
  output logic               offload_rsp_ready_o,
  input  logic [DATA_W-1:0]  offload_rsp_result_i,
  // Reduced flit towards the output arbiters
  output logic               valid_o,
  input  logic               ready_i,
  output hdr_t               hdr_o,
  output logic [DATA_W-1:0]  data_o,
  output logic [NumDirs-1:0] out_sel_o
);

  typedef struct packed {
    hdr_t               hdr;
    logic               compute;    // result comes from the offload port
    logic [NumDirs-1:0] remaining;  // inputs still to be combined
    aw_payload_t        aw;         // payload of an AW flit
  } entry_t;

  logic               locked_q;
  logic [2:0]         lock_ref_q, lzc_ref, ref_idx;
  logic [NumDirs-1:0] expected;
  logic               sync_ready;
  logic [2:0]         op_a, op_b, op_c;
  logic [NumDirs-1:0] rest;

  entry_t             push_e, head;
  logic               push_valid, push_ready, head_valid, pop;

  logic               fb_fire, fb_want, fb_wire_sel, issue_w, issue_aw;
  logic               credit_ok, rsp_take;
  logic [$clog2(CREDITS+1)-1:0] inflight_q;
  hdr_t               ref_hdr;

  // Reference input: locked one, or the lowest valid input.
  always_comb begin
    lzc_ref = '0;
    for (int i = NumDirs - 1; i >= 0; i--) if (valid_i[i]) lzc_ref = 3'(i);
  end
  assign ref_idx = locked_q ? lock_ref_q : lzc_ref;
  assign ref_hdr = hdr_i[ref_idx];

  reduction_sync i_sync (
    .ref_i      (ref_idx),
    .valid_i    (valid_i),
    .hdr_i      (hdr_i),
    .local_x_i  (local_x_i),
    .local_y_i  (local_y_i),
    .expected_o (expected),
    .ready_o    (sync_ready)
  );

  // First two participants become the operands; the rest is fed back later.
  always_comb begin
    logic fa, fb;
    op_a = '0;
    op_b = '0;
    fa   = 1'b0;
    fb   = 1'b0;
    for (int i = 0; i < NumDirs; i++) begin
      if (expected[i]) begin
        if (!fa)      begin op_a = 3'(i); fa = 1'b1; end
        else if (!fb) begin op_b = 3'(i); fb = 1'b1; end
      end
    end
    rest = expected;
    rest[op_a] = 1'b0;
    rest[op_b] = 1'b0;
    op_c = '0;
    for (int i = NumDirs - 1; i >= 0; i--) if (head.remaining[i]) op_c = 3'(i);
  end

  fifo_buf #(.DEPTH(HDR_DEPTH), .T(entry_t)) i_hdr_buf (
    .clk_i, .rst_ni,
    .valid_i (push_valid),
    .ready_o (push_ready),
    .data_i  (push_e),
    .valid_o (head_valid),
    .ready_i (pop),
    .data_o  (head)
  );

  // Feedback of a partial result with the next remaining input; new issues
  // are blocked while a feedback is pending.
  assign fb_want  = head_valid && head.compute && (head.remaining != '0) &&
                    offload_rsp_valid_i;
  assign fb_fire  = fb_want && valid_i[op_c] && offload_req_ready_i;
  assign credit_ok = (inflight_q < CREDITS);
  assign issue_w  = !fb_want && sync_ready && (ref_hdr.ch != ChAw) &&
                    push_ready && credit_ok && offload_req_ready_i;
  assign issue_aw = !fb_want && sync_ready && (ref_hdr.ch == ChAw) && push_ready;

  assign offload_req_valid_o = fb_want ? valid_i[op_c]
                             : (sync_ready && (ref_hdr.ch != ChAw) && push_ready && credit_ok);
  assign offload_req_op1_o   = fb_want ? offload_rsp_result_i : data_i[op_a];
  assign offload_req_op2_o   = fb_want ? data_i[op_c] : data_i[op_b];
  assign offload_req_op_o    = fb_want ? head.hdr.op : ref_hdr.op;

  always_comb begin
    ready_o = '0;
    if (fb_fire)  ready_o[op_c] = 1'b1;
    if (issue_w)  begin ready_o[op_a] = 1'b1; ready_o[op_b] = 1'b1; end
    if (issue_aw) ready_o = expected;
  end

  assign push_valid = fb_fire || issue_w || issue_aw;
  always_comb begin
    push_e = '0;
    if (fb_wire_sel) begin
      push_e           = head;
      push_e.remaining = head.remaining & ~(NumDirs'(1) << op_c);
    end else begin
      push_e.hdr       = ref_hdr;
      push_e.compute   = (ref_hdr.ch != ChAw);
      push_e.remaining = rest;
      push_e.aw        = aw_payload_t'(data_i[ref_idx][AwPayloadW-1:0]);
    end
  end
  assign fb_wire_sel = fb_want;

  // Output: final results and AW flits.
  assign valid_o   = head_valid && (!head.compute ||
                                    (head.remaining == '0 && offload_rsp_valid_i));
  assign hdr_o     = head.hdr;
  assign data_o    = head.compute ? offload_rsp_result_i : DATA_W'(head.aw);
  assign out_sel_o = xy_unicast(head.hdr.dst_x, head.hdr.dst_y, local_x_i, local_y_i);

  assign pop = fb_fire || (valid_o && ready_i);
  assign offload_rsp_ready_o = fb_fire ||
      (head_valid && head.compute && head.remaining == '0 && ready_i);

  // Computations in flight; a feedback returns one and issues one.
  assign rsp_take = offload_rsp_valid_i && offload_rsp_ready_o && !fb_fire;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) inflight_q <= '0;
    else inflight_q <= inflight_q + $bits(inflight_q)'(issue_w) - $bits(inflight_q)'(rsp_take);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      locked_q   <= 1'b0;
      lock_ref_q <= '0;
    end else if (issue_w || issue_aw) begin
      locked_q   <= !ref_hdr.last;
      lock_ref_q <= ref_idx;
    end
  end

  // The router diverts only reductions with two or more participants here.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   sync_ready |-> ($countones(expected) >= 2));

endmodule
