// Testbench of one compute cluster_tile at (4,0) with its neighbour links
// driven and observed by the testbench, a memory model on the AXI
// subordinate port and the eight cores issuing FPU additions throughout.
//   1. loopback: the local manager writes to its own window (wide router
//      Local -> Local, B through the rsp router Local -> Local);
//   2. a wide AW+W packet from the East neighbour (source (5,0)) is written
//      to memory and its B leaves on the East rsp link towards (5,0);
//   3. a narrow flit from East addressed to (4,1) passes through to North;
//   4. a 2-participant FAdd reduction into (4,0): the local manager and the
//      East neighbour (as source (5,0)) send AW + 4 W beats; the wide router
//      diverts both to the reduction controller, the DCA unit adds them on
//      the cores' FPUs, the memory receives the sums, and the B is sent as a
//      multicast to both sources (local manager and East rsp link).
// Core FPU results are checked against `real` additions all the time.
module tb_cluster_tile;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic [3:0] rq_iv = '0, rq_ir, rq_ov, rs_iv = '0, rs_ir, rs_ov, wd_iv = '0, wd_ir, wd_ov;
  logic [3:0] rq_or = '1, rs_or = '1, wd_or = '1;
  hdr_t rq_ih [4], rq_oh [4], rs_ih [4], rs_oh [4], wd_ih [4], wd_oh [4];
  logic [NarrowW-1:0] rq_id [4], rq_od [4];
  logic [1:0] rs_id [4], rs_od [4];
  logic [WideW-1:0] wd_id [4], wd_od [4];
  logic aw_v = 0, aw_r, aw_n = 0, w_v = 0, w_r, w_l = 0, b_v;
  logic [AddrW-1:0] aw_a = '0, aw_m = '0;
  logic [LenW-1:0] aw_len = '0;
  coll_op_e aw_op = OpUnicast;
  logic [WideW-1:0] w_d = '0;
  logic [1:0] b_resp;
  logic s_aw_v, s_aw_r, s_aw_n, s_w_v, s_w_r, s_w_l, s_b_v, s_b_r;
  logic [AddrW-1:0] s_aw_a;
  logic [LenW-1:0] s_aw_len;
  coll_op_e s_aw_op;
  logic [WideW-1:0] s_w_d;
  logic [7:0] c_v, c_r, cr_v, cr_r;
  logic [63:0] c_a [8], c_b [8], c_res [8];

  cluster_tile dut (
    .clk_i(clk), .rst_ni(rst_n), .x_i(3'd4), .y_i(2'd0),
    .req_in_valid_i(rq_iv), .req_in_ready_o(rq_ir), .req_in_hdr_i(rq_ih), .req_in_data_i(rq_id),
    .req_out_valid_o(rq_ov), .req_out_ready_i(rq_or), .req_out_hdr_o(rq_oh), .req_out_data_o(rq_od),
    .rsp_in_valid_i(rs_iv), .rsp_in_ready_o(rs_ir), .rsp_in_hdr_i(rs_ih), .rsp_in_data_i(rs_id),
    .rsp_out_valid_o(rs_ov), .rsp_out_ready_i(rs_or), .rsp_out_hdr_o(rs_oh), .rsp_out_data_o(rs_od),
    .wide_in_valid_i(wd_iv), .wide_in_ready_o(wd_ir), .wide_in_hdr_i(wd_ih), .wide_in_data_i(wd_id),
    .wide_out_valid_o(wd_ov), .wide_out_ready_i(wd_or), .wide_out_hdr_o(wd_oh), .wide_out_data_o(wd_od),
    .mst_aw_valid_i(aw_v), .mst_aw_ready_o(aw_r), .mst_aw_addr_i(aw_a), .mst_aw_len_i(aw_len),
    .mst_aw_narrow_i(aw_n), .mst_aw_user_mask_i(aw_m), .mst_aw_user_op_i(aw_op),
    .mst_w_valid_i(w_v), .mst_w_ready_o(w_r), .mst_w_data_i(w_d), .mst_w_last_i(w_l),
    .mst_b_valid_o(b_v), .mst_b_ready_i(1'b1), .mst_b_resp_o(b_resp),
    .slv_aw_valid_o(s_aw_v), .slv_aw_ready_i(s_aw_r), .slv_aw_addr_o(s_aw_a),
    .slv_aw_len_o(s_aw_len), .slv_aw_narrow_o(s_aw_n), .slv_aw_op_o(s_aw_op),
    .slv_w_valid_o(s_w_v), .slv_w_ready_i(s_w_r), .slv_w_data_o(s_w_d), .slv_w_last_o(s_w_l),
    .slv_b_valid_i(s_b_v), .slv_b_ready_o(s_b_r), .slv_b_resp_i(2'b00),
    .core_req_valid_i(c_v), .core_req_ready_o(c_r), .core_req_a_i(c_a), .core_req_b_i(c_b),
    .core_rsp_valid_o(cr_v), .core_rsp_ready_i(cr_r), .core_rsp_result_o(c_res));

  always #5 clk = ~clk;

  function automatic void chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endfunction

  // memory model
  logic [WideW-1:0] mem [int];
  int m_beat = 0, m_base = 0;
  bit m_nar = 0;
  int ms = 0;
  assign s_aw_r = (ms == 0);
  assign s_w_r  = (ms == 1);
  assign s_b_v  = (ms == 2);
  always @(posedge clk) if (rst_n) case (ms)
    0: if (s_aw_v) begin m_base <= int'(s_aw_a[17:0]); m_nar <= s_aw_n; m_beat <= 0; ms <= 1; end
    1: if (s_w_v) begin
         mem[m_base + m_beat * (m_nar ? 8 : 64)] = s_w_d;
         m_beat <= m_beat + 1;
         if (s_w_l) ms <= 2;
       end
    2: if (s_b_r) ms <= 0;
    default: ;
  endcase

  // cores
  logic [63:0] cexp [8][$];
  int core_ops = 0;
  always @(posedge clk) for (int k = 0; k < 8; k++) begin
    if (!rst_n) begin c_v[k] <= 0; cr_r[k] <= 1; c_a[k] <= 0; c_b[k] <= 0; end
    else begin
      if (c_v[k] && c_r[k]) begin
        cexp[k].push_back($realtobits($bitstoreal(c_a[k]) + $bitstoreal(c_b[k])));
        c_v[k] <= 0;
      end
      if ((!c_v[k] || c_r[k]) && $urandom_range(0, 2) == 0) begin
        c_v[k] <= 1;
        c_a[k] <= $realtobits(real'($urandom_range(0, 999)));
        c_b[k] <= $realtobits(real'($urandom_range(0, 999)) + 0.5);
      end
      cr_r[k] <= $urandom_range(0, 3) != 0;
      if (cr_v[k] && cr_r[k]) begin
        chk(cexp[k].size() > 0 && c_res[k] === cexp[k][0], "core FPU result");
        if (cexp[k].size() > 0) void'(cexp[k].pop_front());
        core_ops++;
      end
    end
  end

  // observed outputs
  int n_b = 0;
  hdr_t rs_e [$];
  hdr_t rq_n [$];
  always @(posedge clk) if (rst_n) begin
    if (b_v) n_b++;
    if (rs_ov[DirE]) rs_e.push_back(rs_oh[DirE]);
    if (rq_ov[DirN]) rq_n.push_back(rq_oh[DirN]);
    for (int d = 0; d < 4; d++) if (wd_ov[d]) chk(0, "unexpected wide output flit");
  end

  function automatic logic [WideW-1:0] fpv(int base, int b);
    logic [WideW-1:0] d;
    for (int l = 0; l < 8; l++) d[64*l +: 64] = $realtobits(real'(base + b * 8 + l));
    return d;
  endfunction

  task automatic local_write(logic [AddrW-1:0] a, logic [AddrW-1:0] m, coll_op_e op, int beats, int base);
    @(posedge clk);
    aw_v <= 1; aw_a <= a; aw_m <= m; aw_op <= op; aw_n <= 0; aw_len <= LenW'(beats - 1);
    do @(posedge clk); while (!aw_r);
    aw_v <= 0;
    for (int b = 0; b < beats; b++) begin
      w_v <= 1; w_d <= fpv(base, b); w_l <= (b == beats - 1);
      do @(posedge clk); while (!w_r);
    end
    w_v <= 0;
  endtask

  task automatic east_wide(hdr_t h, logic [AddrW-1:0] a, int beats, int base, coll_op_e wop);
    aw_payload_t p;
    p.addr = a; p.len = LenW'(beats - 1); p.narrow = 1'b0;
    @(posedge clk);
    wd_iv[DirE] <= 1; wd_ih[DirE] <= h; wd_id[DirE] <= WideW'(p);
    do @(posedge clk); while (!wd_ir[DirE]);
    for (int b = 0; b < beats; b++) begin
      h.ch = ChW; h.op = wop; h.last = (b == beats - 1);
      wd_ih[DirE] <= h; wd_id[DirE] <= fpv(base, b);
      do @(posedge clk); while (!wd_ir[DirE]);
    end
    wd_iv[DirE] <= 0;
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hdr_t h;
    int nb;
    for (int d = 0; d < 4; d++) begin
      rq_ih[d] = '0; rq_id[d] = '0; rs_ih[d] = '0; rs_id[d] = '0; wd_ih[d] = '0; wd_id[d] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;

    // 1. loopback
    nb = n_b;
    local_write(32'h1000_0100, '0, OpUnicast, 3, 100);
    repeat (40) @(posedge clk);
    for (int b = 0; b < 3; b++) chk(mem.exists('h100 + 64 * b) && mem['h100 + 64 * b] == fpv(100, b), "loopback memory");
    chk(n_b == nb + 1, "loopback B");

    // 2. wide packet from East, B back to East
    rs_e.delete();
    h = '0; h.dst_x = 3'd4; h.src_x = 3'd5; h.op = OpUnicast; h.ch = ChAw;
    east_wide(h, 32'h1000_0200, 2, 200, OpUnicast);
    repeat (40) @(posedge clk);
    for (int b = 0; b < 2; b++) chk(mem.exists('h200 + 64 * b) && mem['h200 + 64 * b] == fpv(200, b), "East packet memory");
    chk(rs_e.size() == 1 && rs_e[0].dst_x == 3'd5 && rs_e[0].dst_y == 2'd0 && rs_e[0].op == OpUnicast, "East packet B");

    // 3. narrow pass-through East -> North
    rq_n.delete();
    h = '0; h.dst_x = 3'd4; h.dst_y = 2'd1; h.src_x = 3'd6; h.op = OpUnicast; h.ch = ChW; h.last = 1'b1;
    @(posedge clk);
    rq_iv[DirE] <= 1; rq_ih[DirE] <= h; rq_id[DirE] <= 64'hCAFE;
    do @(posedge clk); while (!rq_ir[DirE]);
    rq_iv[DirE] <= 0;
    repeat (10) @(posedge clk);
    chk(rq_n.size() == 1 && rq_n[0].dst_y == 2'd1, "pass-through to North");

    // 4. FAdd reduction of (4,0) and (5,0) into (4,0)
    rs_e.delete();
    nb = n_b;
    h = '0; h.dst_x = 3'd4; h.dst_y = 2'd0; h.src_x = 3'd5; h.src_y = 2'd0;
    h.x_mask = 3'd1; h.op = OpSelectAw; h.ch = ChAw;
    fork
      local_write(32'h1000_0400, 32'h0010_0000, OpFAdd, 4, 1000);
      east_wide(h, 32'h1000_0400, 4, 2000, OpFAdd);
    join
    repeat (60) @(posedge clk);
    for (int b = 0; b < 4; b++) begin
      logic [WideW-1:0] e, x, y;
      x = fpv(1000, b); y = fpv(2000, b);
      for (int l = 0; l < 8; l++)
        e[64*l +: 64] = $realtobits($bitstoreal(x[64*l +: 64]) + $bitstoreal(y[64*l +: 64]));
      chk(mem.exists('h400 + 64 * b) && mem['h400 + 64 * b] == e, "FAdd reduction sum");
    end
    chk(n_b == nb + 1, "reduction B to the local manager");
    chk(rs_e.size() == 1 && rs_e[0].op == OpMulticast && rs_e[0].x_mask == 3'd1, "reduction B multicast to East");
    chk(core_ops > 100, "core FPU traffic");
    $display("core FPU ops %0d", core_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
