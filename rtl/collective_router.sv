// collective_router: five-port router of one physical link (req, rsp or
// wide) with the collective extensions.
//
// Ports are North, East, South, West and Local (noc_pkg::dir_e). Each input
// has an IN_DEPTH flit buffer. Behind it, a flit is either diverted to the
// centralized reduction controller (EN_WIDE_RED, wide reductions and their
// AW flits, when at least two inputs of this router take part) or goes
// through xy_route_fork, which selects one or several outputs, and a
// stream_fork, which hands the flit to all of them and releases it once all
// have taken it. Every output has an output_arbiter: a wormhole arbiter for
// unicast and multicast flits (plus the controller's results when
// EN_WIDE_RED) and, when EN_PAR_RED, the parallel reduction arbiter for
// CollectB / LsbAnd / SelectAW flits.
//
// The offload ports of the controller leave the router; they connect to the
// cluster's DCA port. With EN_WIDE_RED = 0 they are unused and idle.
// Latency: a flit leaves at the earliest one cycle after it enters (input
// buffer), outputs are not registered.
//
// The Verilator lint reports UNOPTFLAT on fork_r and on the per-output a_ready
// vectors: fork_r[i] holds the readies of all outputs for input i, and
// a_ready of output o is built from the valids of all inputs, so the
// vectors feed each other as a whole. Each ready bit depends only on
// valids, headers, buffer state and downstream readies, never on itself;
// a bit-level loop check of the flattened tile finds no loop.
module collective_router
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = NarrowW,
  parameter bit EN_PAR_RED = 1'b1,
  parameter bit EN_WIDE_RED = 1'b0,
  parameter int unsigned IN_DEPTH = 2,
  parameter int unsigned HDR_DEPTH = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [XW-1:0]      local_x_i,
  input  logic [YW-1:0]      local_y_i,
  input  logic [NumDirs-1:0] in_valid_i,
  output logic [NumDirs-1:0] in_ready_o,
  input  hdr_t               in_hdr_i  [NumDirs],
  input  logic [DATA_W-1:0]  in_data_i [NumDirs],
  output logic [NumDirs-1:0] out_valid_o,
  input  logic [NumDirs-1:0] out_ready_i,
  output hdr_t               out_hdr_o  [NumDirs],
  output logic [DATA_W-1:0]  out_data_o [NumDirs],
  // Offload interface of the wide reduction controller
  output logic               offload_req_valid_o,
  input  logic               offload_req_ready_i,
  output logic [DATA_W-1:0]  offload_req_op1_o,
  output logic [DATA_W-1:0]  offload_req_op2_o,
  output coll_op_e           offload_req_op_o,
  input  logic               offload_rsp_valid_i,
  output logic               offload_rsp_ready_o,
  input  logic [DATA_W-1:0]  offload_rsp_result_i
);

  localparam int unsigned N_IN = EN_WIDE_RED ? NumDirs + 1 : NumDirs;
  localparam int unsigned FW = $bits(hdr_t) + DATA_W;
  typedef logic [FW-1:0] flit_t;

  logic [NumDirs-1:0] b_valid, b_ready, divert;
  hdr_t               b_hdr  [NumDirs];
  logic [DATA_W-1:0]  b_data [NumDirs];
  flit_t              b_flit [NumDirs];
  logic [NumDirs-1:0] f_valid, f_ready;
  logic [NumDirs-1:0] sel     [NumDirs];   // sel[i][o]
  logic [NumDirs-1:0] fork_v  [NumDirs];   // fork_v[i][o]
  logic [NumDirs-1:0] fork_r  [NumDirs];
  logic [NumDirs-1:0] c_valid, c_ready;

  // Controller output
  logic               rc_valid, rc_ready;
  hdr_t               rc_hdr;
  logic [DATA_W-1:0]  rc_data;
  logic [NumDirs-1:0] rc_sel, rc_ready_o;

  for (genvar i = 0; i < NumDirs; i++) begin : g_in
    fifo_buf #(.DEPTH(IN_DEPTH), .T(flit_t)) i_buf (
      .clk_i, .rst_ni,
      .valid_i (in_valid_i[i]),
      .ready_o (in_ready_o[i]),
      .data_i  ({in_hdr_i[i], in_data_i[i]}),
      .valid_o (b_valid[i]),
      .ready_i (b_ready[i]),
      .data_o  (b_flit[i])
    );
    assign b_hdr[i]  = hdr_t'(b_flit[i][FW-1 -: $bits(hdr_t)]);
    assign b_data[i] = b_flit[i][DATA_W-1:0];

    // "Wide reduction?" decision at the input.
    assign divert[i] = EN_WIDE_RED && (b_hdr[i].op inside {OpFAdd, OpSelectAw}) &&
        ($countones(red_inputs(b_hdr[i], local_x_i, local_y_i)) >= 2);
    assign c_valid[i] = b_valid[i] && divert[i];
    assign f_valid[i] = b_valid[i] && !divert[i];
    assign b_ready[i] = divert[i] ? c_ready[i] : f_ready[i];

    xy_route_fork #(.IN_PORT(dir_e'(i))) i_route (
      .hdr_i     (b_hdr[i]),
      .local_x_i (local_x_i),
      .local_y_i (local_y_i),
      .select_o  (sel[i])
    );

    stream_fork #(.N(NumDirs)) i_fork (
      .clk_i, .rst_ni,
      .valid_i  (f_valid[i]),
      .ready_o  (f_ready[i]),
      .select_i (sel[i]),
      .valid_o  (fork_v[i]),
      .ready_i  (fork_r[i])
    );
  end

  if (EN_WIDE_RED) begin : g_ctrl
    reduction_controller #(.DATA_W(DATA_W), .HDR_DEPTH(HDR_DEPTH)) i_ctrl (
      .clk_i, .rst_ni,
      .local_x_i, .local_y_i,
      .valid_i              (c_valid),
      .ready_o              (c_ready),
      .hdr_i                (b_hdr),
      .data_i               (b_data),
      .offload_req_valid_o,
      .offload_req_ready_i,
      .offload_req_op1_o,
      .offload_req_op2_o,
      .offload_req_op_o,
      .offload_rsp_valid_i,
      .offload_rsp_ready_o,
      .offload_rsp_result_i,
      .valid_o              (rc_valid),
      .ready_i              (rc_ready),
      .hdr_o                (rc_hdr),
      .data_o               (rc_data),
      .out_sel_o            (rc_sel)
    );
    assign rc_ready = |(rc_sel & rc_ready_o);
  end else begin : g_no_ctrl
    assign c_ready             = '0;
    assign rc_valid            = 1'b0;
    assign rc_hdr              = '0;
    assign rc_data             = '0;
    assign rc_sel              = '0;
    assign offload_req_valid_o = 1'b0;
    assign offload_req_op1_o   = '0;
    assign offload_req_op2_o   = '0;
    assign offload_req_op_o    = OpUnicast;
    assign offload_rsp_ready_o = 1'b0;
  end

  for (genvar o = 0; o < NumDirs; o++) begin : g_out
    logic [N_IN-1:0]   a_valid, a_ready;
    hdr_t              a_hdr  [N_IN];
    logic [DATA_W-1:0] a_data [N_IN];

    for (genvar j = 0; j < N_IN; j++) begin : g_map
      if (j < NumDirs) begin : g_port
        assign a_valid[j] = fork_v[j][o];
        assign a_hdr[j]   = b_hdr[j];
        assign a_data[j]  = b_data[j];
        assign fork_r[j][o] = a_ready[j];
      end else begin : g_rc
        assign a_valid[j] = rc_valid && rc_sel[o];
        assign a_hdr[j]   = rc_hdr;
        assign a_data[j]  = rc_data;
        assign rc_ready_o[o] = a_ready[j];
      end
    end
    if (!EN_WIDE_RED) begin : g_no_rc
      assign rc_ready_o[o] = 1'b0;
    end

    output_arbiter #(
      .DATA_W(DATA_W), .N_IN(N_IN), .EN_PAR_RED(EN_PAR_RED)
    ) i_arb (
      .clk_i, .rst_ni,
      .local_x_i, .local_y_i,
      .valid_i (a_valid),
      .ready_o (a_ready),
      .hdr_i   (a_hdr),
      .data_i  (a_data),
      .valid_o (out_valid_o[o]),
      .ready_i (out_ready_i[o]),
      .hdr_o   (out_hdr_o[o]),
      .data_o  (out_data_o[o])
    );
  end

endmodule
