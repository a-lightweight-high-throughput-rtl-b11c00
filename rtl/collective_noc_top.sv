// collective_noc_top: the collective-capable mesh NoC system.
//
// A NUM_COLS x NUM_ROWS mesh of tiles (default 5 x 4). Column 0 holds the
// memory tiles m0..m3 at x = 0; columns 1..4 hold the compute tiles at
// x = 4..7, so that the 4 x 4 compute block is a collective-targetable
// submesh aligned to its own size (the padding of the X coordinate). The
// y coordinate is the row. Every tile has req, rsp and wide links to its
// four neighbours; links leaving the mesh are tied off.
//
// The L2 memories of the memory tiles, the L1 memories and DMA engines of
// the clusters and the cluster cores are not part of this RTL: each tile's
// AXI write manager port (what a DMA engine or core drives), AXI write
// subordinate port (what a memory answers) and, for compute tiles, the
// eight core FPU ports are top-level ports, as arrays indexed by tile
// number t = column * NUM_ROWS + row (core ports by t * NUM_CORES + core).
module collective_noc_top
  import noc_pkg::*;
#(
  parameter int unsigned NUM_COLS = 5,     // 1 memory column + 4 compute
  parameter int unsigned NUM_ROWS = 4,
  parameter int unsigned X_OFFSET = 4,     // x of the first compute column
  parameter int unsigned NUM_CORES = 8,
  parameter int unsigned FPU_LAT = 3,
  parameter int unsigned HDR_DEPTH = 8,
  localparam int unsigned NT = NUM_COLS * NUM_ROWS,
  localparam int unsigned NC = NT * NUM_CORES
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // AXI write manager ports
  input  logic [NT-1:0]    mst_aw_valid_i,
  output logic [NT-1:0]    mst_aw_ready_o,
  input  logic [AddrW-1:0] mst_aw_addr_i [NT],
  input  logic [LenW-1:0]  mst_aw_len_i [NT],
  input  logic [NT-1:0]    mst_aw_narrow_i,
  input  logic [AddrW-1:0] mst_aw_user_mask_i [NT],
  input  coll_op_e         mst_aw_user_op_i [NT],
  input  logic [NT-1:0]    mst_w_valid_i,
  output logic [NT-1:0]    mst_w_ready_o,
  input  logic [WideW-1:0] mst_w_data_i [NT],
  input  logic [NT-1:0]    mst_w_last_i,
  output logic [NT-1:0]    mst_b_valid_o,
  input  logic [NT-1:0]    mst_b_ready_i,
  output logic [1:0]       mst_b_resp_o [NT],
  // AXI write subordinate ports
  output logic [NT-1:0]    slv_aw_valid_o,
  input  logic [NT-1:0]    slv_aw_ready_i,
  output logic [AddrW-1:0] slv_aw_addr_o [NT],
  output logic [LenW-1:0]  slv_aw_len_o [NT],
  output logic [NT-1:0]    slv_aw_narrow_o,
  output coll_op_e         slv_aw_op_o [NT],
  output logic [NT-1:0]    slv_w_valid_o,
  input  logic [NT-1:0]    slv_w_ready_i,
  output logic [WideW-1:0] slv_w_data_o [NT],
  output logic [NT-1:0]    slv_w_last_o,
  input  logic [NT-1:0]    slv_b_valid_i,
  output logic [NT-1:0]    slv_b_ready_o,
  input  logic [1:0]       slv_b_resp_i [NT],
  // Core FPU ports
  input  logic [NC-1:0]    core_req_valid_i,
  output logic [NC-1:0]    core_req_ready_o,
  input  logic [63:0]      core_req_a_i [NC],
  input  logic [63:0]      core_req_b_i [NC],
  output logic [NC-1:0]    core_rsp_valid_o,
  input  logic [NC-1:0]    core_rsp_ready_i,
  output logic [63:0]      core_rsp_result_o [NC]
);

  localparam int unsigned RSP_W = 2;

  logic [3:0]         rq_iv [NT], rq_ir [NT], rq_ov [NT], rq_or [NT];
  hdr_t               rq_ih [NT][4], rq_oh [NT][4];
  logic [NarrowW-1:0] rq_id [NT][4], rq_od [NT][4];
  logic [3:0]         rs_iv [NT], rs_ir [NT], rs_ov [NT], rs_or [NT];
  hdr_t               rs_ih [NT][4], rs_oh [NT][4];
  logic [RSP_W-1:0]   rs_id [NT][4], rs_od [NT][4];
  logic [3:0]         wd_iv [NT], wd_ir [NT], wd_ov [NT], wd_or [NT];
  hdr_t               wd_ih [NT][4], wd_oh [NT][4];
  logic [WideW-1:0]   wd_id [NT][4], wd_od [NT][4];

  for (genvar c = 0; c < NUM_COLS; c++) begin : g_col
    for (genvar r = 0; r < NUM_ROWS; r++) begin : g_row
      localparam int unsigned T = c * NUM_ROWS + r;
      localparam logic [XW-1:0] XC = (c == 0) ? XW'(0) : XW'(X_OFFSET + c - 1);

      // Neighbour wiring: d = N, E, S, W; opposite port is (d + 2) % 4.
      for (genvar d = 0; d < 4; d++) begin : g_dir
        localparam int NCOL = (d == 1) ? c + 1 : (d == 3) ? c - 1 : c;
        localparam int NROW = (d == 0) ? r + 1 : (d == 2) ? r - 1 : r;
        localparam bit HAS_NB = (NCOL >= 0) && (NCOL < NUM_COLS) &&
                                (NROW >= 0) && (NROW < NUM_ROWS);
        localparam int unsigned NB = HAS_NB ? NCOL * NUM_ROWS + NROW : 0;
        localparam int unsigned OD = (d + 2) % 4;
        if (HAS_NB) begin : g_link
          assign rq_iv[T][d] = rq_ov[NB][OD];
          assign rq_ih[T][d] = rq_oh[NB][OD];
          assign rq_id[T][d] = rq_od[NB][OD];
          assign rq_or[T][d] = rq_ir[NB][OD];
          assign rs_iv[T][d] = rs_ov[NB][OD];
          assign rs_ih[T][d] = rs_oh[NB][OD];
          assign rs_id[T][d] = rs_od[NB][OD];
          assign rs_or[T][d] = rs_ir[NB][OD];
          assign wd_iv[T][d] = wd_ov[NB][OD];
          assign wd_ih[T][d] = wd_oh[NB][OD];
          assign wd_id[T][d] = wd_od[NB][OD];
          assign wd_or[T][d] = wd_ir[NB][OD];
        end else begin : g_edge
          assign rq_iv[T][d] = 1'b0;
          assign rq_ih[T][d] = '0;
          assign rq_id[T][d] = '0;
          assign rq_or[T][d] = 1'b1;
          assign rs_iv[T][d] = 1'b0;
          assign rs_ih[T][d] = '0;
          assign rs_id[T][d] = '0;
          assign rs_or[T][d] = 1'b1;
          assign wd_iv[T][d] = 1'b0;
          assign wd_ih[T][d] = '0;
          assign wd_id[T][d] = '0;
          assign wd_or[T][d] = 1'b1;
        end
      end

      cluster_tile #(
        .HAS_DCA(c != 0), .NUM_CORES(NUM_CORES), .FPU_LAT(FPU_LAT),
        .HDR_DEPTH(HDR_DEPTH), .RSP_W(RSP_W)
      ) i_tile (
        .clk_i, .rst_ni,
        .x_i (XC),
        .y_i (YW'(r)),
        .req_in_valid_i (rq_iv[T]), .req_in_ready_o (rq_ir[T]),
        .req_in_hdr_i (rq_ih[T]), .req_in_data_i (rq_id[T]),
        .req_out_valid_o (rq_ov[T]), .req_out_ready_i (rq_or[T]),
        .req_out_hdr_o (rq_oh[T]), .req_out_data_o (rq_od[T]),
        .rsp_in_valid_i (rs_iv[T]), .rsp_in_ready_o (rs_ir[T]),
        .rsp_in_hdr_i (rs_ih[T]), .rsp_in_data_i (rs_id[T]),
        .rsp_out_valid_o (rs_ov[T]), .rsp_out_ready_i (rs_or[T]),
        .rsp_out_hdr_o (rs_oh[T]), .rsp_out_data_o (rs_od[T]),
        .wide_in_valid_i (wd_iv[T]), .wide_in_ready_o (wd_ir[T]),
        .wide_in_hdr_i (wd_ih[T]), .wide_in_data_i (wd_id[T]),
        .wide_out_valid_o (wd_ov[T]), .wide_out_ready_i (wd_or[T]),
        .wide_out_hdr_o (wd_oh[T]), .wide_out_data_o (wd_od[T]),
        .mst_aw_valid_i (mst_aw_valid_i[T]), .mst_aw_ready_o (mst_aw_ready_o[T]),
        .mst_aw_addr_i (mst_aw_addr_i[T]), .mst_aw_len_i (mst_aw_len_i[T]),
        .mst_aw_narrow_i (mst_aw_narrow_i[T]),
        .mst_aw_user_mask_i (mst_aw_user_mask_i[T]),
        .mst_aw_user_op_i (mst_aw_user_op_i[T]),
        .mst_w_valid_i (mst_w_valid_i[T]), .mst_w_ready_o (mst_w_ready_o[T]),
        .mst_w_data_i (mst_w_data_i[T]), .mst_w_last_i (mst_w_last_i[T]),
        .mst_b_valid_o (mst_b_valid_o[T]), .mst_b_ready_i (mst_b_ready_i[T]),
        .mst_b_resp_o (mst_b_resp_o[T]),
        .slv_aw_valid_o (slv_aw_valid_o[T]), .slv_aw_ready_i (slv_aw_ready_i[T]),
        .slv_aw_addr_o (slv_aw_addr_o[T]), .slv_aw_len_o (slv_aw_len_o[T]),
        .slv_aw_narrow_o (slv_aw_narrow_o[T]), .slv_aw_op_o (slv_aw_op_o[T]),
        .slv_w_valid_o (slv_w_valid_o[T]), .slv_w_ready_i (slv_w_ready_i[T]),
        .slv_w_data_o (slv_w_data_o[T]), .slv_w_last_o (slv_w_last_o[T]),
        .slv_b_valid_i (slv_b_valid_i[T]), .slv_b_ready_o (slv_b_ready_o[T]),
        .slv_b_resp_i (slv_b_resp_i[T]),
        .core_req_valid_i (core_req_valid_i[T*NUM_CORES +: NUM_CORES]),
        .core_req_ready_o (core_req_ready_o[T*NUM_CORES +: NUM_CORES]),
        .core_req_a_i (core_req_a_i[T*NUM_CORES +: NUM_CORES]),
        .core_req_b_i (core_req_b_i[T*NUM_CORES +: NUM_CORES]),
        .core_rsp_valid_o (core_rsp_valid_o[T*NUM_CORES +: NUM_CORES]),
        .core_rsp_ready_i (core_rsp_ready_i[T*NUM_CORES +: NUM_CORES]),
        .core_rsp_result_o (core_rsp_result_o[T*NUM_CORES +: NUM_CORES])
      );
    end
  end

endmodule
