// network_interface: write path of the collective-capable network interface.
//
// Outgoing (local manager -> NoC). An AW request carries in AWUSER an
// address mask and a collective opcode (unicast, multicast, LsbAnd or FAdd
// reduction). mask_translator turns the address into destination
// coordinates and the mask into X/Y masks, and the AW leaves as one flit:
// on the req link for narrow bursts, on the wide link for wide bursts. The
// header fields are kept in a register and reused for the W beats that
// follow, each one a flit of its own; the last W beat closes the packet.
// For a reduction the AW flit gets the SelectAW opcode and the W flits the
// reduction opcode; the masks then name the set of sources, with this
// node's coordinates as `src`.
//
// Incoming (NoC -> local subordinate). AW/W packets from the req and wide
// links are taken one whole packet at a time. The AW address of a multicast
// is resolved into the local window (addr_resolver). The header of every
// accepted AW is pushed into the collective response buffer, and when the
// local subordinate answers with B, the buffer entry decides the response
// flit: a multicast request answers with a CollectB reduction towards the
// initiator (sources = the multicast destination set), a reduction request
// answers with a multicast B to all initiators, a unicast request with a
// unicast B. B flits arriving from the NoC go to the local manager.
//
// Simplifications of this design: only the write channels (AW, W, B) are
// built, one burst is sent at a time, B responses are returned in arrival
// order without transaction IDs, and a narrow burst moves its data in bits
// [63:0] of the 512-bit W data.
//
// The Verilator lint reports UNOPTFLAT on in_ready once a tile is inlined. in_ready
// is one bit, but it sits between the routers' local-port ready and valid
// vectors, which Verilator treats as whole signals, and across those it
// sees a cycle. No bit depends on itself: a bit-level loop check of the
// flattened tile finds none.
module network_interface
  import noc_pkg::*;
#(
  parameter int unsigned RSP_W = 2,
  parameter int unsigned RSP_BUF_DEPTH = 4,
  parameter int unsigned NODE_BITS = 18
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [XW-1:0]      local_x_i,
  input  logic [YW-1:0]      local_y_i,
  // AXI write manager port (local DMA / core issues writes)
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
  // AXI write subordinate port (writes into the local memory)
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
  // req link
  output logic               req_out_valid_o,
  input  logic               req_out_ready_i,
  output hdr_t               req_out_hdr_o,
  output logic [NarrowW-1:0] req_out_data_o,
  input  logic               req_in_valid_i,
  output logic               req_in_ready_o,
  input  hdr_t               req_in_hdr_i,
  input  logic [NarrowW-1:0] req_in_data_i,
  // rsp link
  output logic               rsp_out_valid_o,
  input  logic               rsp_out_ready_i,
  output hdr_t               rsp_out_hdr_o,
  output logic [RSP_W-1:0]   rsp_out_data_o,
  input  logic               rsp_in_valid_i,
  output logic               rsp_in_ready_o,
  input  hdr_t               rsp_in_hdr_i,
  input  logic [RSP_W-1:0]   rsp_in_data_i,
  // wide link
  output logic               wide_out_valid_o,
  input  logic               wide_out_ready_i,
  output hdr_t               wide_out_hdr_o,
  output logic [WideW-1:0]   wide_out_data_o,
  input  logic               wide_in_valid_i,
  output logic               wide_in_ready_o,
  input  hdr_t               wide_in_hdr_i,
  input  logic [WideW-1:0]   wide_in_data_i
);

  // ---------------------------------------------------------------------
  // Outgoing: AW header generation, mask register, W injection
  // ---------------------------------------------------------------------
  logic [XW-1:0] t_dst_x, t_x_mask;
  logic [YW-1:0] t_dst_y, t_y_mask;
  hdr_t          aw_hdr, w_hdr_q, w_hdr;
  logic          tx_data_q, tx_narrow_q;   // sending W beats; on req link
  logic          aw_link_ready, w_link_ready, aw_fire, w_fire;
  aw_payload_t   aw_pl;

  mask_translator #(.NODE_BITS(NODE_BITS)) i_mask_transl (
    .addr_i   (mst_aw_addr_i),
    .mask_i   (mst_aw_user_mask_i),
    .dst_x_o  (t_dst_x),
    .dst_y_o  (t_dst_y),
    .x_mask_o (t_x_mask),
    .y_mask_o (t_y_mask)
  );

  always_comb begin
    aw_hdr        = '0;
    aw_hdr.dst_x  = t_dst_x;
    aw_hdr.dst_y  = t_dst_y;
    aw_hdr.src_x  = local_x_i;
    aw_hdr.src_y  = local_y_i;
    aw_hdr.x_mask = t_x_mask;
    aw_hdr.y_mask = t_y_mask;
    aw_hdr.op     = (mst_aw_user_op_i inside {OpLsbAnd, OpFAdd}) ? OpSelectAw
                                                                  : mst_aw_user_op_i;
    aw_hdr.ch     = ChAw;
    aw_hdr.last   = 1'b0;
    aw_pl.addr    = mst_aw_addr_i;
    aw_pl.len     = mst_aw_len_i;
    aw_pl.narrow  = mst_aw_narrow_i;
    w_hdr         = w_hdr_q;
    w_hdr.last    = mst_w_last_i;
  end

  assign aw_link_ready  = mst_aw_narrow_i ? req_out_ready_i : wide_out_ready_i;
  assign w_link_ready   = tx_narrow_q ? req_out_ready_i : wide_out_ready_i;
  assign mst_aw_ready_o = !tx_data_q && aw_link_ready;
  assign mst_w_ready_o  = tx_data_q && w_link_ready;
  assign aw_fire        = mst_aw_valid_i && mst_aw_ready_o;
  assign w_fire         = mst_w_valid_i && mst_w_ready_o;

  always_comb begin
    req_out_valid_o  = 1'b0;
    req_out_hdr_o    = aw_hdr;
    req_out_data_o   = NarrowW'(aw_pl);
    wide_out_valid_o = 1'b0;
    wide_out_hdr_o   = aw_hdr;
    wide_out_data_o  = WideW'(aw_pl);
    if (!tx_data_q) begin
      req_out_valid_o  = mst_aw_valid_i && mst_aw_narrow_i;
      wide_out_valid_o = mst_aw_valid_i && !mst_aw_narrow_i;
    end else begin
      req_out_valid_o  = mst_w_valid_i && tx_narrow_q;
      wide_out_valid_o = mst_w_valid_i && !tx_narrow_q;
      req_out_hdr_o    = w_hdr;
      wide_out_hdr_o   = w_hdr;
      req_out_data_o   = mst_w_data_i[NarrowW-1:0];
      wide_out_data_o  = mst_w_data_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tx_data_q   <= 1'b0;
      tx_narrow_q <= 1'b0;
      w_hdr_q     <= '0;
    end else if (aw_fire) begin
      tx_data_q   <= 1'b1;
      tx_narrow_q <= mst_aw_narrow_i;
      w_hdr_q     <= aw_hdr;
      w_hdr_q.op  <= mst_aw_user_op_i;
      w_hdr_q.ch  <= ChW;
    end else if (w_fire && mst_w_last_i) begin
      tx_data_q   <= 1'b0;
    end
  end

  // B flits from the NoC go to the local manager.
  assign mst_b_valid_o  = rsp_in_valid_i;
  assign mst_b_resp_o   = rsp_in_data_i[1:0];
  assign rsp_in_ready_o = mst_b_ready_i;

  // ---------------------------------------------------------------------
  // Incoming: packet selection, address resolution, response buffer
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic [XW-1:0] src_x;
    logic [YW-1:0] src_y;
    logic [XW-1:0] x_mask;
    logic [YW-1:0] y_mask;
    coll_op_e      op;
  } rsp_info_t;

  logic        rx_busy_q, rx_wide_q, rx_wide;
  logic        in_valid, in_ready;
  hdr_t        in_hdr;
  logic [WideW-1:0] in_data;
  aw_payload_t in_aw;
  logic        info_valid, info_ready, info_out_valid, info_out_ready;
  rsp_info_t   info_in, info_out;
  logic [AddrW-1:0] res_addr;

  // A new packet starts with an AW flit; req link first.
  assign rx_wide  = rx_busy_q ? rx_wide_q : !req_in_valid_i;
  assign in_valid = rx_wide ? wide_in_valid_i : req_in_valid_i;
  assign in_hdr   = rx_wide ? wide_in_hdr_i : req_in_hdr_i;
  assign in_data  = rx_wide ? wide_in_data_i : WideW'(req_in_data_i);
  assign in_aw    = aw_payload_t'(in_data[AwPayloadW-1:0]);
  assign req_in_ready_o  = !rx_wide && in_ready;
  assign wide_in_ready_o = rx_wide && in_ready;

  addr_resolver #(.NODE_BITS(NODE_BITS)) i_addr_resol (
    .addr_i    (in_aw.addr),
    .x_mask_i  ((in_hdr.op == OpMulticast) ? in_hdr.x_mask : '0),
    .y_mask_i  ((in_hdr.op == OpMulticast) ? in_hdr.y_mask : '0),
    .local_x_i (local_x_i),
    .local_y_i (local_y_i),
    .addr_o    (res_addr)
  );

  always_comb begin
    slv_aw_valid_o  = in_valid && (in_hdr.ch == ChAw) && info_ready;
    slv_aw_addr_o   = res_addr;
    slv_aw_len_o    = in_aw.len;
    slv_aw_narrow_o = in_aw.narrow;
    slv_aw_op_o     = in_hdr.op;
    slv_w_valid_o   = in_valid && (in_hdr.ch == ChW);
    slv_w_data_o    = in_data;
    slv_w_last_o    = in_hdr.last;
    if (in_hdr.ch == ChAw) in_ready = slv_aw_ready_i && info_ready;
    else                   in_ready = slv_w_ready_i;
    info_valid = in_valid && (in_hdr.ch == ChAw) && slv_aw_ready_i;
    info_in    = '{src_x: in_hdr.src_x, src_y: in_hdr.src_y,
                   x_mask: in_hdr.x_mask, y_mask: in_hdr.y_mask, op: in_hdr.op};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_busy_q    <= 1'b0;
      rx_wide_q    <= 1'b0;
    end else if (in_valid && in_ready) begin
      if (in_hdr.last) begin
        rx_busy_q <= 1'b0;
      end else begin
        rx_busy_q <= 1'b1;
        rx_wide_q <= rx_wide;
      end
    end
  end

  fifo_buf #(.DEPTH(RSP_BUF_DEPTH), .T(rsp_info_t)) i_rsp_buf (
    .clk_i, .rst_ni,
    .valid_i (info_valid),
    .ready_o (info_ready),
    .data_i  (info_in),
    .valid_o (info_out_valid),
    .ready_i (info_out_ready),
    .data_o  (info_out)
  );

  // Collective response generation.
  always_comb begin
    rsp_out_hdr_o       = '0;
    rsp_out_hdr_o.dst_x = info_out.src_x;
    rsp_out_hdr_o.dst_y = info_out.src_y;
    rsp_out_hdr_o.src_x = local_x_i;
    rsp_out_hdr_o.src_y = local_y_i;
    rsp_out_hdr_o.ch    = ChB;
    rsp_out_hdr_o.last  = 1'b1;
    unique case (info_out.op)
      OpMulticast: begin
        rsp_out_hdr_o.op     = OpCollectB;
        rsp_out_hdr_o.x_mask = info_out.x_mask;
        rsp_out_hdr_o.y_mask = info_out.y_mask;
      end
      OpSelectAw: begin
        rsp_out_hdr_o.op     = OpMulticast;
        rsp_out_hdr_o.x_mask = info_out.x_mask;
        rsp_out_hdr_o.y_mask = info_out.y_mask;
      end
      default: rsp_out_hdr_o.op = OpUnicast;
    endcase
    rsp_out_data_o  = RSP_W'(slv_b_resp_i);
    rsp_out_valid_o = slv_b_valid_i && info_out_valid;
    slv_b_ready_o   = rsp_out_ready_i && info_out_valid;
    info_out_ready  = slv_b_valid_i && rsp_out_ready_i;
  end

endmodule
