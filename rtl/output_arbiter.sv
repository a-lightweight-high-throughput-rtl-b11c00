// output_arbiter: arbitration of one router output port.
//
// Flits routed to this output arrive from the five input ports (and, in a
// router with wide reductions, from the reduction controller as a sixth
// input). Unicast and multicast flits go to a wormhole arbiter; flits of a
// lightweight (parallel) reduction go to the reduction arbiter, which merges
// the flits of all participating inputs into one. The two streams are then
// merged onto the output: a packet in progress on either side keeps the
// output until its last flit, otherwise a ready reduction goes first. With
// EN_PAR_RED = 0 every flit takes the wormhole path.
//
// The Verilator lint reports UNOPTFLAT on wh_ready_i and use_red once the router is
// inlined. They are single bits, but they connect the router's per-port
// ready and valid vectors, which Verilator treats as whole signals, and
// across those it sees a cycle. Per bit, a ready depends only on valids,
// the lock state and the output ready; a bit-level loop check of the
// flattened tile finds no loop.
module output_arbiter
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned N_IN = 5,        // 5, or 6 with the controller
  parameter bit EN_PAR_RED = 1'b1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [XW-1:0]     local_x_i,
  input  logic [YW-1:0]     local_y_i,
  input  logic [N_IN-1:0]   valid_i,
  output logic [N_IN-1:0]   ready_o,
  input  hdr_t              hdr_i  [N_IN],
  input  logic [DATA_W-1:0] data_i [N_IN],
  output logic              valid_o,
  input  logic              ready_i,
  output hdr_t              hdr_o,
  output logic [DATA_W-1:0] data_o
);

  localparam int unsigned FW = $bits(hdr_t) + DATA_W;
  typedef logic [FW-1:0] flit_t;

  logic [N_IN-1:0]    is_red;
  logic [N_IN-1:0]    wh_valid, wh_ready;
  flit_t              wh_data [N_IN];
  logic [N_IN-1:0]    wh_last;
  logic               wh_valid_o, wh_ready_i, wh_locked;
  flit_t              wh_data_o;

  logic [NumDirs-1:0] rd_valid, rd_ready;
  hdr_t               rd_hdr [NumDirs];
  logic [DATA_W-1:0]  rd_data [NumDirs];
  logic               rd_valid_o, rd_ready_i;
  hdr_t               rd_hdr_o;
  logic [DATA_W-1:0]  rd_data_o;
  logic               red_lock_q, use_red;

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      is_red[i]   = EN_PAR_RED && (i < NumDirs) && is_par_reduction(hdr_i[i].op);
      wh_valid[i] = valid_i[i] && !is_red[i];
      wh_data[i]  = {hdr_i[i], data_i[i]};
      wh_last[i]  = hdr_i[i].last;
    end
    for (int i = 0; i < NumDirs; i++) begin
      rd_valid[i] = valid_i[i] && is_red[i];
      rd_hdr[i]   = hdr_i[i];
      rd_data[i]  = data_i[i];
    end
  end

  wormhole_arbiter #(.N(N_IN), .T(flit_t)) i_wormhole (
    .clk_i, .rst_ni,
    .valid_i (wh_valid),
    .ready_o (wh_ready),
    .data_i  (wh_data),
    .last_i  (wh_last),
    .valid_o (wh_valid_o),
    .ready_i (wh_ready_i),
    .data_o  (wh_data_o),
    .locked_o(wh_locked)
  );

  if (EN_PAR_RED) begin : g_red
    reduction_arbiter #(.DATA_W(DATA_W)) i_red (
      .valid_i   (rd_valid),
      .ready_o   (rd_ready),
      .hdr_i     (rd_hdr),
      .data_i    (rd_data),
      .local_x_i, .local_y_i,
      .valid_o   (rd_valid_o),
      .ready_i   (rd_ready_i),
      .hdr_o     (rd_hdr_o),
      .data_o    (rd_data_o)
    );
  end else begin : g_no_red
    assign rd_ready   = '0;
    assign rd_valid_o = 1'b0;
    assign rd_hdr_o   = '0;
    assign rd_data_o  = '0;
  end

  assign use_red    = red_lock_q || (!wh_locked && rd_valid_o);
  assign rd_ready_i = use_red && ready_i;
  assign wh_ready_i = !use_red && ready_i;
  assign valid_o    = use_red ? rd_valid_o : wh_valid_o;
  assign hdr_o      = use_red ? rd_hdr_o : hdr_t'(wh_data_o[FW-1 -: $bits(hdr_t)]);
  assign data_o     = use_red ? rd_data_o : wh_data_o[DATA_W-1:0];

  always_comb begin
    ready_o = wh_ready & wh_valid;
    for (int i = 0; i < NumDirs; i++) begin
      if (rd_ready[i]) ready_o[i] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) red_lock_q <= 1'b0;
    else if (use_red && rd_valid_o && ready_i) red_lock_q <= !rd_hdr_o.last;
  end

endmodule
