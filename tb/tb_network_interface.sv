// Testbench of network_interface: two NIs wired back to back, A at (4,0)
// and B at (5,1), each one's req/rsp/wide outputs driving the other's inputs
// (the network is a wire; the testbench checks every flit header on it).
// A's manager port is driven by the testbench, B's subordinate port is a
// memory model that answers every burst with one B (and B's manager port
// and A's subordinate port sit idle). Per transaction type:
//   unicast wide / narrow - AW+W on the wide / req link, destination from the
//       address map, memory written, unicast B back to A;
//   multicast - masks from AWUSER, address resolved into B's own window,
//       B answered as a CollectB reduction towards A with the same masks;
//   FAdd / LsbAnd reduction - AW flit as SelectAW with A as source, W flits
//       with the reduction opcode, B answered as a multicast to the sources.
// Random back-pressure on all link inputs and on the memory.
module tb_network_interface;
  import noc_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // A manager port
  logic aw_v = 0, aw_r, aw_n = 0, w_v = 0, w_r, w_l = 0, b_v, b_r = 1;
  logic [AddrW-1:0] aw_a = '0, aw_m = '0;
  logic [LenW-1:0] aw_len = '0;
  coll_op_e aw_op = OpUnicast;
  logic [WideW-1:0] w_d = '0;
  logic [1:0] b_resp;
  // B subordinate port
  logic s_aw_v, s_aw_r, s_aw_n, s_w_v, s_w_r, s_w_l, s_b_v, s_b_r;
  logic [AddrW-1:0] s_aw_a;
  logic [LenW-1:0] s_aw_len;
  coll_op_e s_aw_op;
  logic [WideW-1:0] s_w_d;
  // links A->B and B->A
  logic ab_rq_v, ab_rq_r, ab_rs_v, ab_rs_r, ab_wd_v, ab_wd_r;
  logic ba_rq_v, ba_rq_r, ba_rs_v, ba_rs_r, ba_wd_v, ba_wd_r;
  hdr_t ab_rq_h, ab_rs_h, ab_wd_h, ba_rq_h, ba_rs_h, ba_wd_h;
  logic [NarrowW-1:0] ab_rq_d, ba_rq_d;
  logic [1:0] ab_rs_d, ba_rs_d;
  logic [WideW-1:0] ab_wd_d, ba_wd_d;
  // random stalls applied to the links (registered)
  logic st_ab_rq = 1, st_ab_wd = 1, st_ba_rs = 1;
  logic ab_rq_rdy, ab_wd_rdy, ba_rs_rdy;

  // unused ports
  logic u_aw_r, u_w_r, u_b_v, u_s_aw_v, u_s_aw_n, u_s_w_v, u_s_w_l, u_s_b_r;
  logic [1:0] u_b_resp;
  logic [AddrW-1:0] u_s_aw_a;
  logic [LenW-1:0] u_s_aw_len;
  coll_op_e u_s_aw_op;
  logic [WideW-1:0] u_s_w_d;

  network_interface i_a (
    .clk_i(clk), .rst_ni(rst_n), .local_x_i(3'd4), .local_y_i(2'd0),
    .mst_aw_valid_i(aw_v), .mst_aw_ready_o(aw_r), .mst_aw_addr_i(aw_a), .mst_aw_len_i(aw_len),
    .mst_aw_narrow_i(aw_n), .mst_aw_user_mask_i(aw_m), .mst_aw_user_op_i(aw_op),
    .mst_w_valid_i(w_v), .mst_w_ready_o(w_r), .mst_w_data_i(w_d), .mst_w_last_i(w_l),
    .mst_b_valid_o(b_v), .mst_b_ready_i(b_r), .mst_b_resp_o(b_resp),
    .slv_aw_valid_o(u_s_aw_v), .slv_aw_ready_i(1'b1), .slv_aw_addr_o(u_s_aw_a),
    .slv_aw_len_o(u_s_aw_len), .slv_aw_narrow_o(u_s_aw_n), .slv_aw_op_o(u_s_aw_op),
    .slv_w_valid_o(u_s_w_v), .slv_w_ready_i(1'b1), .slv_w_data_o(u_s_w_d), .slv_w_last_o(u_s_w_l),
    .slv_b_valid_i(1'b0), .slv_b_ready_o(u_s_b_r), .slv_b_resp_i(2'b00),
    .req_out_valid_o(ab_rq_v), .req_out_ready_i(ab_rq_rdy), .req_out_hdr_o(ab_rq_h), .req_out_data_o(ab_rq_d),
    .req_in_valid_i(ba_rq_v), .req_in_ready_o(ba_rq_r), .req_in_hdr_i(ba_rq_h), .req_in_data_i(ba_rq_d),
    .rsp_out_valid_o(ab_rs_v), .rsp_out_ready_i(ab_rs_r), .rsp_out_hdr_o(ab_rs_h), .rsp_out_data_o(ab_rs_d),
    .rsp_in_valid_i(ba_rs_v && st_ba_rs), .rsp_in_ready_o(ba_rs_r), .rsp_in_hdr_i(ba_rs_h), .rsp_in_data_i(ba_rs_d),
    .wide_out_valid_o(ab_wd_v), .wide_out_ready_i(ab_wd_rdy), .wide_out_hdr_o(ab_wd_h), .wide_out_data_o(ab_wd_d),
    .wide_in_valid_i(ba_wd_v), .wide_in_ready_o(ba_wd_r), .wide_in_hdr_i(ba_wd_h), .wide_in_data_i(ba_wd_d));

  network_interface i_b (
    .clk_i(clk), .rst_ni(rst_n), .local_x_i(3'd5), .local_y_i(2'd1),
    .mst_aw_valid_i(1'b0), .mst_aw_ready_o(u_aw_r), .mst_aw_addr_i('0), .mst_aw_len_i('0),
    .mst_aw_narrow_i(1'b0), .mst_aw_user_mask_i('0), .mst_aw_user_op_i(OpUnicast),
    .mst_w_valid_i(1'b0), .mst_w_ready_o(u_w_r), .mst_w_data_i('0), .mst_w_last_i(1'b0),
    .mst_b_valid_o(u_b_v), .mst_b_ready_i(1'b1), .mst_b_resp_o(u_b_resp),
    .slv_aw_valid_o(s_aw_v), .slv_aw_ready_i(s_aw_r), .slv_aw_addr_o(s_aw_a),
    .slv_aw_len_o(s_aw_len), .slv_aw_narrow_o(s_aw_n), .slv_aw_op_o(s_aw_op),
    .slv_w_valid_o(s_w_v), .slv_w_ready_i(s_w_r), .slv_w_data_o(s_w_d), .slv_w_last_o(s_w_l),
    .slv_b_valid_i(s_b_v), .slv_b_ready_o(s_b_r), .slv_b_resp_i(2'b00),
    .req_out_valid_o(ba_rq_v), .req_out_ready_i(ba_rq_r), .req_out_hdr_o(ba_rq_h), .req_out_data_o(ba_rq_d),
    .req_in_valid_i(ab_rq_v && st_ab_rq), .req_in_ready_o(ab_rq_r), .req_in_hdr_i(ab_rq_h), .req_in_data_i(ab_rq_d),
    .rsp_out_valid_o(ba_rs_v), .rsp_out_ready_i(ba_rs_rdy), .rsp_out_hdr_o(ba_rs_h), .rsp_out_data_o(ba_rs_d),
    .rsp_in_valid_i(ab_rs_v), .rsp_in_ready_o(ab_rs_r), .rsp_in_hdr_i(ab_rs_h), .rsp_in_data_i(ab_rs_d),
    .wide_out_valid_o(ba_wd_v), .wide_out_ready_i(ba_wd_r), .wide_out_hdr_o(ba_wd_h), .wide_out_data_o(ba_wd_d),
    .wide_in_valid_i(ab_wd_v && st_ab_wd), .wide_in_ready_o(ab_wd_r), .wide_in_hdr_i(ab_wd_h), .wide_in_data_i(ab_wd_d));

  assign ab_rq_rdy = ab_rq_r && st_ab_rq;
  assign ab_wd_rdy = ab_wd_r && st_ab_wd;
  assign ba_rs_rdy = ba_rs_r && st_ba_rs;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    st_ab_rq <= $urandom_range(0, 3) != 0;
    st_ab_wd <= $urandom_range(0, 3) != 0;
    st_ba_rs <= $urandom_range(0, 3) != 0;
  end

  // memory model of B
  logic [WideW-1:0] mem [int];
  int m_beat = 0, m_base = 0, n_bursts = 0;
  bit m_nar = 0;
  logic [AddrW-1:0] last_addr;
  coll_op_e last_op;
  typedef enum int {MIdle, MData, MResp} mst_e;
  mst_e ms = MIdle;
  assign s_aw_r = (ms == MIdle);
  assign s_w_r  = (ms == MData);
  assign s_b_v  = (ms == MResp);
  always @(posedge clk) if (rst_n) case (ms)
    MIdle: if (s_aw_v) begin
      m_base <= int'(s_aw_a[17:0]); m_nar <= s_aw_n; m_beat <= 0;
      last_addr <= s_aw_a; last_op <= s_aw_op; ms <= MData;
    end
    MData: if (s_w_v) begin
      mem[m_base + m_beat * (m_nar ? 8 : 64)] = s_w_d;
      m_beat <= m_beat + 1;
      if (s_w_l) begin ms <= MResp; n_bursts++; end
    end
    MResp: if (s_b_r) ms <= MIdle;
    default: ;
  endcase

  // link monitors
  hdr_t aw_seen [$];
  hdr_t w_seen [$];
  hdr_t rsp_seen [$];
  always @(posedge clk) if (rst_n) begin
    if (ab_rq_v && ab_rq_rdy) begin
      if (ab_rq_h.ch == ChAw) aw_seen.push_back(ab_rq_h); else w_seen.push_back(ab_rq_h);
    end
    if (ab_wd_v && ab_wd_rdy) begin
      if (ab_wd_h.ch == ChAw) aw_seen.push_back(ab_wd_h); else w_seen.push_back(ab_wd_h);
    end
    if (ba_rs_v && ba_rs_rdy) rsp_seen.push_back(ba_rs_h);
  end
  int n_b = 0;
  always @(posedge clk) if (rst_n && b_v && b_r) n_b++;

  task automatic send(logic [AddrW-1:0] addr, logic [AddrW-1:0] mask, coll_op_e op,
                      bit narrow, int beats);
    @(posedge clk);
    aw_v <= 1; aw_a <= addr; aw_m <= mask; aw_op <= op; aw_n <= narrow;
    aw_len <= LenW'(beats - 1);
    do @(posedge clk); while (!aw_r);
    aw_v <= 0;
    for (int b = 0; b < beats; b++) begin
      w_v <= 1; w_d <= {16{32'(b * 7 + 3)}}; w_l <= (b == beats - 1);
      do @(posedge clk); while (!w_r);
    end
    w_v <= 0;
  endtask

  function automatic void chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endfunction

  task automatic run(string name, logic [AddrW-1:0] addr, logic [AddrW-1:0] mask,
                     coll_op_e op, bit narrow, int beats);
    int nb;
    hdr_t h;
    aw_seen.delete(); w_seen.delete(); rsp_seen.delete();
    nb = n_b;
    send(addr, mask, op, narrow, beats);
    for (int i = 0; i < 200 && n_b == nb; i++) @(posedge clk);
    repeat (3) @(posedge clk);
    chk(n_b == nb + 1, {name, ": one B at the manager"});
    chk(aw_seen.size() == 1 && w_seen.size() == beats, {name, ": flit count"});
    if (aw_seen.size() == 1) begin
      h = aw_seen[0];
      chk(h.src_x == 3'd4 && h.src_y == 2'd0, {name, ": AW src"});
      chk(((h.dst_x ^ 3'd5) & ~h.x_mask) == 0 && h.dst_y == 2'd1, {name, ": AW dst covers B"});
      chk(h.x_mask == XW'(mask[21:20]) && h.y_mask == YW'(mask[19:18]), {name, ": AW masks"});
      chk(h.op == ((op inside {OpFAdd, OpLsbAnd}) ? OpSelectAw : op), {name, ": AW opcode"});
    end
    for (int i = 0; i < w_seen.size(); i++)
      chk(w_seen[i].op == op && w_seen[i].last == (i == beats - 1) &&
          ((w_seen[i].dst_x ^ 3'd5) & ~w_seen[i].x_mask) == 0,
          {name, ": W header"});
    for (int b = 0; b < beats; b++)
      chk(mem.exists('h100 + b * (narrow ? 8 : 64)) &&
          mem['h100 + b * (narrow ? 8 : 64)][31:0] == 32'(b * 7 + 3), {name, ": memory"});
    chk(last_addr[21:18] == 4'b0101, {name, ": address in own window"});
    chk(rsp_seen.size() == 1, {name, ": one B flit"});
    if (rsp_seen.size() == 1) begin
      h = rsp_seen[0];
      case (op)
        OpUnicast: chk(h.op == OpUnicast && h.dst_x == 3'd4 && h.dst_y == 2'd0, {name, ": B unicast to A"});
        OpMulticast: chk(h.op == OpCollectB && h.dst_x == 3'd4 && h.dst_y == 2'd0 &&
                         h.x_mask == XW'(mask[21:20]) && h.y_mask == YW'(mask[19:18]),
                         {name, ": B as CollectB to A"});
        default: chk(h.op == OpMulticast && h.x_mask == XW'(mask[21:20]) &&
                     h.y_mask == YW'(mask[19:18]) &&
                     ((h.dst_x ^ 3'd4) & ~h.x_mask) == 0 && ((h.dst_y ^ 2'd0) & ~h.y_mask) == 0,
                     {name, ": B multicast to the sources"});
      endcase
    end
    mem.delete();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [AddrW-1:0] B_ADDR = 32'h1000_0000 | (32'd1 << 20) | (32'd1 << 18) | 32'h100;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 5; k++) begin
      run("unicast wide", B_ADDR, '0, OpUnicast, 0, 4);
      run("unicast narrow", B_ADDR, '0, OpUnicast, 1, 3);
      run("multicast", B_ADDR, (32'd3 << 20) | (32'd1 << 18), OpMulticast, 0, 2);
      // multicast address with the masked bits not pointing at B
      run("multicast other base", B_ADDR & ~32'h0030_0000, (32'd3 << 20), OpMulticast, 0, 2);
      run("FAdd reduction", B_ADDR, (32'd1 << 20) | (32'd1 << 18), OpFAdd, 0, 4);
      run("LsbAnd reduction", B_ADDR, (32'd3 << 20) | (32'd3 << 18), OpLsbAnd, 1, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
