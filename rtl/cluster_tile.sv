// cluster_tile: one tile of the mesh.
//
// A tile holds the multi-link router, made of three collective_router
// instances, one per physical link:
//   req  (64-bit payload): narrow AW/W; multicast and parallel reductions
//                          (SelectAW, LsbAnd);
//   rsp  (2-bit payload):  B responses; multicast and CollectB;
//   wide (512-bit payload): wide AW/W; multicast and the centralized wide
//                          reduction controller.
// The network interface connects the local port of all three routers to
// the tile's AXI write ports. In a compute tile (HAS_DCA = 1) the wide
// router's offload port reaches the cluster's DCA unit through a cut
// register in each direction, and the eight cores' FPU ports are the tile's
// core ports. In a memory tile (HAS_DCA = 0) there is no cluster: the wide
// router is built without the controller and the core ports are unused.
// Neighbour links are arrays indexed N, E, S, W (0..3).
//
// The Verilator lint reports UNOPTFLAT (circular combinational logic) inside this
// module once the routers, NI and DCA cut registers are inlined. The cycle
// exists only at the granularity of whole packed valid/ready vectors: the
// ready of one port depends on the valid of other ports of the same vector.
// Bit by bit there is no loop; all paths between the routers and the DCA go
// through spill registers, and a flattened bit-level loop check of the tile
// finds none. The warning only costs simulation speed.
module cluster_tile
  import noc_pkg::*;
#(
  parameter bit HAS_DCA = 1'b1,
  parameter int unsigned NUM_CORES = 8,
  parameter int unsigned FPU_LAT = 3,
  parameter int unsigned HDR_DEPTH = 8,
  parameter int unsigned RSP_W = 2
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [XW-1:0]      x_i,
  input  logic [YW-1:0]      y_i,
  // Neighbour links, req
  input  logic [3:0]         req_in_valid_i,
  output logic [3:0]         req_in_ready_o,
  input  hdr_t               req_in_hdr_i  [4],
  input  logic [NarrowW-1:0] req_in_data_i [4],
  output logic [3:0]         req_out_valid_o,
  input  logic [3:0]         req_out_ready_i,
  output hdr_t               req_out_hdr_o  [4],
  output logic [NarrowW-1:0] req_out_data_o [4],
  // Neighbour links, rsp
  input  logic [3:0]         rsp_in_valid_i,
  output logic [3:0]         rsp_in_ready_o,
  input  hdr_t               rsp_in_hdr_i  [4],
  input  logic [RSP_W-1:0]   rsp_in_data_i [4],
  output logic [3:0]         rsp_out_valid_o,
  input  logic [3:0]         rsp_out_ready_i,
  output hdr_t               rsp_out_hdr_o  [4],
  output logic [RSP_W-1:0]   rsp_out_data_o [4],
  // Neighbour links, wide
  input  logic [3:0]         wide_in_valid_i,
  output logic [3:0]         wide_in_ready_o,
  input  hdr_t               wide_in_hdr_i  [4],
  input  logic [WideW-1:0]   wide_in_data_i [4],
  output logic [3:0]         wide_out_valid_o,
  input  logic [3:0]         wide_out_ready_i,
  output hdr_t               wide_out_hdr_o  [4],
  output logic [WideW-1:0]   wide_out_data_o [4],
  // AXI write manager port (DMA / cores)
  input  logic               mst_aw_valid_i,
  output logic               mst_aw_ready_o,
  input  logic [AddrW-1:0]   mst_aw_addr_i,
  input  logic [LenW-1:0]    mst_aw_len_i,
  input  logic               mst_aw_narrow_i,
  input  logic [AddrW-1:0]   mst_aw_user_mask_i,
  input  coll_op_e           mst_aw_user_op_i,
  input  logic               mst_w_valid_i,
  output logic               mst_w_ready_o,
  input  logic [WideW-1:0]   mst_w_data_i,
  input  logic               mst_w_last_i,
  output logic               mst_b_valid_o,
  input  logic               mst_b_ready_i,
  output logic [1:0]         mst_b_resp_o,
  // AXI write subordinate port (L1 / L2 memory)
  output logic               slv_aw_valid_o,
  input  logic               slv_aw_ready_i,
  output logic [AddrW-1:0]   slv_aw_addr_o,
  output logic [LenW-1:0]    slv_aw_len_o,
  output logic               slv_aw_narrow_o,
  output coll_op_e           slv_aw_op_o,
  output logic               slv_w_valid_o,
  input  logic               slv_w_ready_i,
  output logic [WideW-1:0]   slv_w_data_o,
  output logic               slv_w_last_o,
  input  logic               slv_b_valid_i,
  output logic               slv_b_ready_o,
  input  logic [1:0]         slv_b_resp_i,
  // Core FPU ports (compute tiles)
  input  logic [NUM_CORES-1:0] core_req_valid_i,
  output logic [NUM_CORES-1:0] core_req_ready_o,
  input  logic [63:0]          core_req_a_i [NUM_CORES],
  input  logic [63:0]          core_req_b_i [NUM_CORES],
  output logic [NUM_CORES-1:0] core_rsp_valid_o,
  input  logic [NUM_CORES-1:0] core_rsp_ready_i,
  output logic [63:0]          core_rsp_result_o [NUM_CORES]
);

  // Router port arrays: 0..3 neighbours, 4 local (NI).
  logic [NumDirs-1:0] rq_iv, rq_ir, rq_ov, rq_or;
  hdr_t               rq_ih [NumDirs], rq_oh [NumDirs];
  logic [NarrowW-1:0] rq_id [NumDirs], rq_od [NumDirs];
  logic [NumDirs-1:0] rs_iv, rs_ir, rs_ov, rs_or;
  hdr_t               rs_ih [NumDirs], rs_oh [NumDirs];
  logic [RSP_W-1:0]   rs_id [NumDirs], rs_od [NumDirs];
  logic [NumDirs-1:0] wd_iv, wd_ir, wd_ov, wd_or;
  hdr_t               wd_ih [NumDirs], wd_oh [NumDirs];
  logic [WideW-1:0]   wd_id [NumDirs], wd_od [NumDirs];

  for (genvar d = 0; d < 4; d++) begin : g_nb
    assign rq_iv[d] = req_in_valid_i[d];
    assign rq_ih[d] = req_in_hdr_i[d];
    assign rq_id[d] = req_in_data_i[d];
    assign req_in_ready_o[d] = rq_ir[d];
    assign req_out_valid_o[d] = rq_ov[d];
    assign req_out_hdr_o[d] = rq_oh[d];
    assign req_out_data_o[d] = rq_od[d];
    assign rq_or[d] = req_out_ready_i[d];

    assign rs_iv[d] = rsp_in_valid_i[d];
    assign rs_ih[d] = rsp_in_hdr_i[d];
    assign rs_id[d] = rsp_in_data_i[d];
    assign rsp_in_ready_o[d] = rs_ir[d];
    assign rsp_out_valid_o[d] = rs_ov[d];
    assign rsp_out_hdr_o[d] = rs_oh[d];
    assign rsp_out_data_o[d] = rs_od[d];
    assign rs_or[d] = rsp_out_ready_i[d];

    assign wd_iv[d] = wide_in_valid_i[d];
    assign wd_ih[d] = wide_in_hdr_i[d];
    assign wd_id[d] = wide_in_data_i[d];
    assign wide_in_ready_o[d] = wd_ir[d];
    assign wide_out_valid_o[d] = wd_ov[d];
    assign wide_out_hdr_o[d] = wd_oh[d];
    assign wide_out_data_o[d] = wd_od[d];
    assign wd_or[d] = wide_out_ready_i[d];
  end

  // Offload path of the wide router
  logic               oreq_valid, oreq_ready, orsp_valid, orsp_ready;
  logic [WideW-1:0]   oreq_op1, oreq_op2, orsp_result;
  coll_op_e           oreq_op;
  // Unused offload ports of the req and rsp routers
  logic               rq_oreq_valid, rs_oreq_valid, rq_orsp_ready, rs_orsp_ready;
  logic [NarrowW-1:0] rq_oreq_op1, rq_oreq_op2;
  logic [RSP_W-1:0]   rs_oreq_op1, rs_oreq_op2;
  coll_op_e           rq_oreq_op, rs_oreq_op;

  collective_router #(
    .DATA_W(NarrowW), .EN_PAR_RED(1'b1), .EN_WIDE_RED(1'b0)
  ) i_req_router (
    .clk_i, .rst_ni, .local_x_i(x_i), .local_y_i(y_i),
    .in_valid_i(rq_iv), .in_ready_o(rq_ir), .in_hdr_i(rq_ih), .in_data_i(rq_id),
    .out_valid_o(rq_ov), .out_ready_i(rq_or), .out_hdr_o(rq_oh), .out_data_o(rq_od),
    .offload_req_valid_o(rq_oreq_valid), .offload_req_ready_i(1'b0),
    .offload_req_op1_o(rq_oreq_op1), .offload_req_op2_o(rq_oreq_op2),
    .offload_req_op_o(rq_oreq_op),
    .offload_rsp_valid_i(1'b0), .offload_rsp_ready_o(rq_orsp_ready),
    .offload_rsp_result_i('0)
  );

  collective_router #(
    .DATA_W(RSP_W), .EN_PAR_RED(1'b1), .EN_WIDE_RED(1'b0)
  ) i_rsp_router (
    .clk_i, .rst_ni, .local_x_i(x_i), .local_y_i(y_i),
    .in_valid_i(rs_iv), .in_ready_o(rs_ir), .in_hdr_i(rs_ih), .in_data_i(rs_id),
    .out_valid_o(rs_ov), .out_ready_i(rs_or), .out_hdr_o(rs_oh), .out_data_o(rs_od),
    .offload_req_valid_o(rs_oreq_valid), .offload_req_ready_i(1'b0),
    .offload_req_op1_o(rs_oreq_op1), .offload_req_op2_o(rs_oreq_op2),
    .offload_req_op_o(rs_oreq_op),
    .offload_rsp_valid_i(1'b0), .offload_rsp_ready_o(rs_orsp_ready),
    .offload_rsp_result_i('0)
  );

  collective_router #(
    .DATA_W(WideW), .EN_PAR_RED(1'b0), .EN_WIDE_RED(HAS_DCA), .HDR_DEPTH(HDR_DEPTH)
  ) i_wide_router (
    .clk_i, .rst_ni, .local_x_i(x_i), .local_y_i(y_i),
    .in_valid_i(wd_iv), .in_ready_o(wd_ir), .in_hdr_i(wd_ih), .in_data_i(wd_id),
    .out_valid_o(wd_ov), .out_ready_i(wd_or), .out_hdr_o(wd_oh), .out_data_o(wd_od),
    .offload_req_valid_o(oreq_valid), .offload_req_ready_i(oreq_ready),
    .offload_req_op1_o(oreq_op1), .offload_req_op2_o(oreq_op2),
    .offload_req_op_o(oreq_op),
    .offload_rsp_valid_i(orsp_valid), .offload_rsp_ready_o(orsp_ready),
    .offload_rsp_result_i(orsp_result)
  );

  network_interface #(.RSP_W(RSP_W)) i_ni (
    .clk_i, .rst_ni, .local_x_i(x_i), .local_y_i(y_i),
    .mst_aw_valid_i, .mst_aw_ready_o, .mst_aw_addr_i, .mst_aw_len_i,
    .mst_aw_narrow_i, .mst_aw_user_mask_i, .mst_aw_user_op_i,
    .mst_w_valid_i, .mst_w_ready_o, .mst_w_data_i, .mst_w_last_i,
    .mst_b_valid_o, .mst_b_ready_i, .mst_b_resp_o,
    .slv_aw_valid_o, .slv_aw_ready_i, .slv_aw_addr_o, .slv_aw_len_o,
    .slv_aw_narrow_o, .slv_aw_op_o,
    .slv_w_valid_o, .slv_w_ready_i, .slv_w_data_o, .slv_w_last_o,
    .slv_b_valid_i, .slv_b_ready_o, .slv_b_resp_i,
    .req_out_valid_o(rq_iv[DirL]), .req_out_ready_i(rq_ir[DirL]),
    .req_out_hdr_o(rq_ih[DirL]), .req_out_data_o(rq_id[DirL]),
    .req_in_valid_i(rq_ov[DirL]), .req_in_ready_o(rq_or[DirL]),
    .req_in_hdr_i(rq_oh[DirL]), .req_in_data_i(rq_od[DirL]),
    .rsp_out_valid_o(rs_iv[DirL]), .rsp_out_ready_i(rs_ir[DirL]),
    .rsp_out_hdr_o(rs_ih[DirL]), .rsp_out_data_o(rs_id[DirL]),
    .rsp_in_valid_i(rs_ov[DirL]), .rsp_in_ready_o(rs_or[DirL]),
    .rsp_in_hdr_i(rs_oh[DirL]), .rsp_in_data_i(rs_od[DirL]),
    .wide_out_valid_o(wd_iv[DirL]), .wide_out_ready_i(wd_ir[DirL]),
    .wide_out_hdr_o(wd_ih[DirL]), .wide_out_data_o(wd_id[DirL]),
    .wide_in_valid_i(wd_ov[DirL]), .wide_in_ready_o(wd_or[DirL]),
    .wide_in_hdr_i(wd_oh[DirL]), .wide_in_data_i(wd_od[DirL])
  );

  if (HAS_DCA) begin : g_dca
    typedef struct packed {
      coll_op_e         op;
      logic [WideW-1:0] op1;
      logic [WideW-1:0] op2;
    } oreq_t;
    oreq_t            c_req;
    logic             c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready;
    logic [WideW-1:0] c_rsp;

    spill_reg #(.T(oreq_t)) i_cut_req (
      .clk_i, .rst_ni,
      .valid_i (oreq_valid), .ready_o (oreq_ready),
      .data_i  ('{op: oreq_op, op1: oreq_op1, op2: oreq_op2}),
      .valid_o (c_req_valid), .ready_i (c_req_ready), .data_o (c_req)
    );

    dca_unit #(.NUM_CORES(NUM_CORES), .FPU_LAT(FPU_LAT)) i_dca (
      .clk_i, .rst_ni,
      .req_valid_i (c_req_valid), .req_ready_o (c_req_ready),
      .req_op1_i (c_req.op1[64*NUM_CORES-1:0]),
      .req_op2_i (c_req.op2[64*NUM_CORES-1:0]),
      .req_op_i (c_req.op),
      .rsp_valid_o (c_rsp_valid), .rsp_ready_i (c_rsp_ready),
      .rsp_result_o (c_rsp[64*NUM_CORES-1:0]),
      .core_req_valid_i, .core_req_ready_o, .core_req_a_i, .core_req_b_i,
      .core_rsp_valid_o, .core_rsp_ready_i, .core_rsp_result_o
    );
    if (64 * NUM_CORES < WideW) begin : g_pad
      assign c_rsp[WideW-1:64*NUM_CORES] = '0;
    end

    spill_reg #(.T(logic [WideW-1:0])) i_cut_rsp (
      .clk_i, .rst_ni,
      .valid_i (c_rsp_valid), .ready_o (c_rsp_ready), .data_i (c_rsp),
      .valid_o (orsp_valid), .ready_i (orsp_ready), .data_o (orsp_result)
    );
  end else begin : g_no_dca
    assign oreq_ready       = 1'b0;
    assign orsp_valid       = 1'b0;
    assign orsp_result      = '0;
    assign core_req_ready_o = '0;
    assign core_rsp_valid_o = '0;
    for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
      assign core_rsp_result_o[c] = '0;
    end
  end

endmodule
