// End-to-end testbench of collective_noc_top at its default parameters
// (5 x 4 mesh: memory tiles m0..m3 at x = 0, 4 x 4 compute tiles at
// x = 4..7, 512-bit wide links, eight cores per cluster).
//
// The testbench plays the DMA engines (AXI write managers of every tile),
// the memories (AXI write subordinates: an associative array per tile that
// answers every burst with one B) and, on one cluster, the cores using their
// FPUs while the DCA port is in use. Each scenario checks memory contents
// and the B responses that reach the initiators:
//   1. unicast wide write, compute tile -> compute tile
//   2. unicast narrow write, compute tile -> L2 memory tile
//   3. 2D wide multicast m0 -> all 16 clusters; one cluster answers SLVERR,
//      m0 must get exactly one B and it must carry the error (CollectB)
//   4. 1D wide multicast along row 1 from a cluster of that row (self incl.)
//   5. two barriers (LsbAnd reduction, narrow) of all 16 clusters; the
//      destination receives one write whose bit 0 is the AND, every
//      participant receives one B (multicast B)
//   6. 1D FAdd reduction of row 2 into (4,2)
//   7. 2D FAdd reduction of all 16 clusters into (5,1): five inputs meet at
//      the destination router, so the reduction controller feeds partial
//      results back; the cores of that cluster load their FPUs meanwhile.
//   8. scenarios 3, 4 and 1 at the same time (traffic crossing).
// At the end the number of times every mechanism was exercised is printed.
module tb_collective_noc_top;
  import noc_pkg::*;
  localparam int NT = 20;
  localparam int NCORE = 8;
  localparam int NC = NT * NCORE;

  logic clk = 0, rst_n = 0;
  logic [NT-1:0] aw_v, aw_r, aw_n, w_v, w_r, w_l, b_v, b_r;
  logic [AddrW-1:0] aw_a [NT], aw_m [NT];
  logic [LenW-1:0] aw_len [NT];
  coll_op_e aw_op [NT];
  logic [WideW-1:0] w_d [NT];
  logic [1:0] b_resp [NT];
  logic [NT-1:0] s_aw_v, s_aw_r, s_aw_n, s_w_v, s_w_r, s_w_l, s_b_v, s_b_r;
  logic [AddrW-1:0] s_aw_a [NT];
  logic [LenW-1:0] s_aw_len [NT];
  coll_op_e s_aw_op [NT];
  logic [WideW-1:0] s_w_d [NT];
  logic [1:0] s_b_resp [NT];
  logic [NC-1:0] c_v, c_r, cr_v, cr_r;
  logic [63:0] c_a [NC], c_b [NC], c_res [NC];
  int checks = 0, failures = 0;

  collective_noc_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mst_aw_valid_i(aw_v), .mst_aw_ready_o(aw_r), .mst_aw_addr_i(aw_a), .mst_aw_len_i(aw_len),
    .mst_aw_narrow_i(aw_n), .mst_aw_user_mask_i(aw_m), .mst_aw_user_op_i(aw_op),
    .mst_w_valid_i(w_v), .mst_w_ready_o(w_r), .mst_w_data_i(w_d), .mst_w_last_i(w_l),
    .mst_b_valid_o(b_v), .mst_b_ready_i(b_r), .mst_b_resp_o(b_resp),
    .slv_aw_valid_o(s_aw_v), .slv_aw_ready_i(s_aw_r), .slv_aw_addr_o(s_aw_a),
    .slv_aw_len_o(s_aw_len), .slv_aw_narrow_o(s_aw_n), .slv_aw_op_o(s_aw_op),
    .slv_w_valid_o(s_w_v), .slv_w_ready_i(s_w_r), .slv_w_data_o(s_w_d), .slv_w_last_o(s_w_l),
    .slv_b_valid_i(s_b_v), .slv_b_ready_o(s_b_r), .slv_b_resp_i(s_b_resp),
    .core_req_valid_i(c_v), .core_req_ready_o(c_r), .core_req_a_i(c_a), .core_req_b_i(c_b),
    .core_rsp_valid_o(cr_v), .core_rsp_ready_i(cr_r), .core_rsp_result_o(c_res));

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int tile(int x, int y);   // tile index of (x, y)
    return (x == 0) ? y : (x - 3) * 4 + y;
  endfunction

  // ------------------------------------------------------------------
  // Managers (DMA engines): one burst at a time per tile
  // ------------------------------------------------------------------
  typedef struct {
    logic [AddrW-1:0] addr, mask;
    coll_op_e op;
    bit narrow;
    int beats;
    int id;
  } txn_t;
  txn_t txq [NT][$];
  int   m_state [NT], m_beat [NT];
  int   b_cnt [NT];
  bit   lsb_val [NT];   // bit 0 a tile contributes to a barrier
  logic [1:0] b_last [NT];

  // W data of transaction `id`, beat b, sent by tile t: eight FP64 lanes with
  // small integer values so that sums in any order are exact.
  function automatic logic [WideW-1:0] wdata(int id, int b, int t);
    logic [WideW-1:0] d;
    for (int l = 0; l < 8; l++)
      d[64*l +: 64] = $realtobits(real'(id * 1000 + t * 37 + b * 8 + l));
    return d;
  endfunction

  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      if (!rst_n) begin
        m_state[t] <= 0; aw_v[t] <= 0; w_v[t] <= 0;
      end else begin
        case (m_state[t])
          0: if (txq[t].size() > 0) begin
               aw_v[t] <= 1; aw_a[t] <= txq[t][0].addr; aw_m[t] <= txq[t][0].mask;
               aw_op[t] <= txq[t][0].op; aw_n[t] <= txq[t][0].narrow;
               aw_len[t] <= LenW'(txq[t][0].beats - 1);
               m_state[t] <= 1; m_beat[t] <= 0;
             end
          1: if (aw_r[t]) begin
               aw_v[t] <= 0;
               w_v[t] <= 1;
               w_d[t] <= (txq[t][0].op == OpLsbAnd) ? WideW'(lsb_val[t]) : wdata(txq[t][0].id, 0, t);
               w_l[t] <= (txq[t][0].beats == 1);
               m_state[t] <= 2;
             end
          2: if (w_r[t]) begin
               if (w_l[t]) begin
                 w_v[t] <= 0; m_state[t] <= 0;
                 void'(txq[t].pop_front());
               end else begin
                 w_d[t] <= wdata(txq[t][0].id, m_beat[t] + 1, t);
                 w_l[t] <= (m_beat[t] + 2 == txq[t][0].beats);
                 m_beat[t] <= m_beat[t] + 1;
               end
             end
          default: ;
        endcase
      end
      b_r[t] <= 1'b1;
      if (rst_n && b_v[t] && b_r[t]) begin
        b_cnt[t]++;
        b_last[t] = b_resp[t];
      end
    end
  end

  // ------------------------------------------------------------------
  // Subordinates (memories)
  // ------------------------------------------------------------------
  logic [WideW-1:0] mem [NT][int];
  int   s_state [NT], s_beat [NT], s_base [NT], wr_cnt [NT];
  bit   s_nar [NT];
  logic [1:0] s_err [NT];

  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      if (!rst_n) begin
        s_state[t] <= 0; s_aw_r[t] <= 1; s_w_r[t] <= 0; s_b_v[t] <= 0; s_b_resp[t] <= 0;
      end else begin
        case (s_state[t])
          0: if (s_aw_v[t] && s_aw_r[t]) begin
               s_base[t] <= int'(s_aw_a[t] & ((t < 4) ? 32'hF_FFFF : 32'h3_FFFF));
               s_nar[t] <= s_aw_n[t]; s_beat[t] <= 0;
               if (t >= 4 && s_aw_a[t][31:28] == 4'h1) begin
                 checks++;
                 if (int'(s_aw_a[t][21:18]) != (((t / 4) - 1) * 4 + t % 4)) begin
                   failures++; $display("tile %0d: AW address %h not in own window", t, s_aw_a[t]);
                 end
               end
               s_aw_r[t] <= 0; s_w_r[t] <= 1; s_state[t] <= 1;
             end
          1: if (s_w_v[t] && s_w_r[t]) begin
               mem[t][s_base[t] + s_beat[t] * (s_nar[t] ? 8 : 64)] =
                   s_nar[t] ? WideW'(s_w_d[t][63:0]) : s_w_d[t];
               s_beat[t] <= s_beat[t] + 1;
               if (s_w_l[t]) begin
                 s_w_r[t] <= 0; s_b_v[t] <= 1; s_b_resp[t] <= s_err[t]; s_state[t] <= 2;
                 wr_cnt[t]++;
               end
             end
          2: if (s_b_r[t]) begin
               s_b_v[t] <= 0; s_aw_r[t] <= 1; s_state[t] <= 0;
             end
          default: ;
        endcase
      end
    end
  end

  // ------------------------------------------------------------------
  // Cores of cluster (5,1): FPU requests next to the DCA traffic
  // ------------------------------------------------------------------
  localparam int CT = 9;       // tile (5,1)
  bit core_on = 0;
  logic [63:0] core_exp [NCORE][$];
  int core_ops = 0, contention = 0, dca_ops = 0;
  always @(posedge clk) begin
    for (int i = 0; i < NC; i++) begin
      if (!rst_n || i / NCORE != CT) begin
        c_v[i] <= 0; c_a[i] <= 0; c_b[i] <= 0; cr_r[i] <= 1;
      end else begin
        int k;
        k = i % NCORE;
        if (c_v[i] && c_r[i]) begin
          core_exp[k].push_back($realtobits($bitstoreal(c_a[i]) + $bitstoreal(c_b[i])));
          c_v[i] <= 0;
        end
        if ((!c_v[i] || c_r[i]) && core_on && $urandom_range(0, 1)) begin
          c_v[i] <= 1;
          c_a[i] <= $realtobits(real'($urandom_range(0, 5000)));
          c_b[i] <= $realtobits(real'($urandom_range(0, 5000)) * 0.5);
        end
        cr_r[i] <= ($urandom_range(0, 3) != 0);
        if (cr_v[i] && cr_r[i]) begin
          checks++;
          if (core_exp[k].size() == 0 || c_res[i] !== core_exp[k][0]) begin
            failures++; $display("core %0d result wrong", k);
          end
          if (core_exp[k].size() > 0) void'(core_exp[k].pop_front());
          core_ops++;
        end
      end
    end
    if (rst_n && dut.g_col[2].g_row[1].i_tile.g_dca.c_req_valid &&
        dut.g_col[2].g_row[1].i_tile.g_dca.c_req_ready) begin
      dca_ops++;
      if (c_v[CT * NCORE]) contention++;
    end
  end

  // ------------------------------------------------------------------
  // Scenario helpers
  // ------------------------------------------------------------------
  int next_id = 1;
  function automatic int issue(int t, logic [AddrW-1:0] addr, logic [AddrW-1:0] mask,
                               coll_op_e op, bit narrow, int beats);
    txn_t x;
    x.addr = addr; x.mask = mask; x.op = op; x.narrow = narrow; x.beats = beats;
    x.id = next_id++;
    txq[t].push_back(x);
    return x.id;
  endfunction

  function automatic logic [AddrW-1:0] caddr(int x, int y, int off);
    return 32'h1000_0000 | (AddrW'(x - 4) << 20) | (AddrW'(y) << 18) | AddrW'(off);
  endfunction

  task automatic settle(int max_cycles);
    int start, idle;
    start = cyc; idle = 0;
    while (idle < 60 && cyc - start < max_cycles) begin
      @(posedge clk);
      idle++;
      for (int t = 0; t < NT; t++)
        if (txq[t].size() > 0 || s_state[t] != 0 || b_v[t] || s_aw_v[t]) idle = 0;
    end
  endtask

  function automatic void expect_b(int t, int b_before, int n, logic [1:0] resp, string what);
    checks++;
    if (b_cnt[t] - b_before != n || b_last[t] !== resp) begin
      failures++;
      $display("%s: tile %0d got %0d B (resp %0d), expected %0d (resp %0d)", what, t,
               b_cnt[t] - b_before, b_last[t], n, resp);
    end
  endfunction

  function automatic void expect_mem(int t, int off, logic [WideW-1:0] d, string what);
    checks++;
    if (!mem[t].exists(off) || mem[t][off] !== d) begin
      failures++;
      $display("%s: tile %0d offset %h wrong", what, t, off);
    end
  endfunction

  int n_uni_wide = 0, n_uni_narrow = 0, n_mc2d = 0, n_mc1d = 0, n_collect_b = 0;
  int n_barrier = 0, n_mc_b = 0, n_fadd1d = 0, n_fadd2d = 0, n_err_merge = 0;
  int b0 [NT];

  task automatic snap();
    for (int t = 0; t < NT; t++) b0[t] = b_cnt[t];
  endtask

  task automatic do_unicast_wide(int src, int dx, int dy, int off);
    int id, d;
    id = issue(src, caddr(dx, dy, off), '0, OpUnicast, 0, 4);
    settle(3000);
    d = tile(dx, dy);
    for (int b = 0; b < 4; b++) expect_mem(d, off + 64 * b, wdata(id, b, src), "unicast wide");
    expect_b(src, b0[src], 1, 2'b00, "unicast wide");
    n_uni_wide++;
  endtask

  // ------------------------------------------------------------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int id, id2, id3;
    for (int t = 0; t < NT; t++) begin b_cnt[t] = 0; wr_cnt[t] = 0; s_err[t] = 0; b_last[t] = 0; end
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // 1. unicast wide (4,0) -> (6,2)
    snap();
    do_unicast_wide(tile(4, 0), 6, 2, 'h100);

    // 2. unicast narrow (7,3) -> L2 memory tile m3
    snap();
    id = issue(tile(7, 3), 32'h8000_0000 | (32'd3 << 20) | 32'h40, '0, OpUnicast, 1, 2);
    settle(3000);
    for (int b = 0; b < 2; b++)
      expect_mem(3, 'h40 + 8 * b, WideW'(wdata(id, b, tile(7, 3))) & WideW'(64'hFFFF_FFFF_FFFF_FFFF), "unicast narrow");
    expect_b(tile(7, 3), b0[tile(7, 3)], 1, 2'b00, "unicast narrow");
    n_uni_narrow++;

    // 3. 2D multicast m0 -> all clusters, one SLVERR
    snap();
    s_err[tile(6, 1)] = 2'b10;
    id = issue(0, caddr(4, 0, 'h200), (32'd3 << 20) | (32'd3 << 18), OpMulticast, 0, 4);
    settle(5000);
    for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++)
      for (int b = 0; b < 4; b++) expect_mem(tile(x, y), 'h200 + 64 * b, wdata(id, b, 0), "2D multicast");
    expect_b(0, b0[0], 1, 2'b10, "2D multicast collected B");
    s_err[tile(6, 1)] = 2'b00;
    n_mc2d++; n_collect_b++; n_err_merge++;

    // 4. 1D multicast along row 1 from (5,1), own node included
    snap();
    id = issue(tile(5, 1), caddr(4, 1, 'h400), (32'd3 << 20), OpMulticast, 0, 3);
    settle(5000);
    for (int x = 4; x < 8; x++)
      for (int b = 0; b < 3; b++) expect_mem(tile(x, 1), 'h400 + 64 * b, wdata(id, b, tile(5, 1)), "1D multicast");
    expect_b(tile(5, 1), b0[tile(5, 1)], 1, 2'b00, "1D multicast collected B");
    n_mc1d++; n_collect_b++;

    // 5. two barriers (LsbAnd) of all clusters into (4,0)
    for (int k = 0; k < 2; k++) begin
      int wr0;
      snap();
      wr0 = wr_cnt[tile(4, 0)];
      for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++)
        id = issue(tile(x, y), caddr(4, 0, 'h800 + 8 * k), (32'd3 << 20) | (32'd3 << 18),
                   OpLsbAnd, 1, 1);
      // barrier 0: every cluster arrives with 1; barrier 1: (6,3) with 0
      for (int t = 0; t < NT; t++) lsb_val[t] = !(k == 1 && t == tile(6, 3));
      settle(5000);
      checks++;
      if (wr_cnt[tile(4, 0)] - wr0 != 1) begin
        failures++; $display("barrier %0d: %0d writes at destination", k, wr_cnt[tile(4, 0)] - wr0);
      end
      checks++;
      if (!mem[tile(4, 0)].exists('h800 + 8 * k) || mem[tile(4, 0)]['h800 + 8 * k][0] !== (k == 0)) begin
        failures++; $display("barrier %0d: wrong AND at destination", k);
      end
      for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++)
        expect_b(tile(x, y), b0[tile(x, y)], 1, 2'b00, "barrier multicast B");
      n_barrier++; n_mc_b += 16;
    end

    // 6. 1D FAdd reduction, row 2 -> (4,2)
    snap();
    id = next_id;
    for (int x = 4; x < 8; x++)
      id2 = issue(tile(x, 2), caddr(4, 2, 'h1000), (32'd3 << 20), OpFAdd, 0, 4);
    settle(5000);
    for (int b = 0; b < 4; b++) begin
      logic [WideW-1:0] e;
      for (int l = 0; l < 8; l++) begin
        real s;
        s = 0.0;
        for (int x = 4; x < 8; x++)
          s += $bitstoreal(wdata(id + x - 4, b, tile(x, 2)) >> (64 * l));
        e[64*l +: 64] = $realtobits(s);
      end
      expect_mem(tile(4, 2), 'h1000 + 64 * b, e, "1D FAdd");
    end
    for (int x = 4; x < 8; x++) expect_b(tile(x, 2), b0[tile(x, 2)], 1, 2'b00, "1D FAdd B");
    n_fadd1d++;

    // 7. 2D FAdd reduction, all clusters -> (5,1), cores busy at (5,1)
    snap();
    core_on = 1;
    id = next_id;
    for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++)
      id2 = issue(tile(x, y), caddr(5, 1, 'h2000), (32'd3 << 20) | (32'd3 << 18), OpFAdd, 0, 8);
    settle(8000);
    core_on = 0;
    for (int b = 0; b < 8; b++) begin
      logic [WideW-1:0] e;
      for (int l = 0; l < 8; l++) begin
        real s;
        int k;
        s = 0.0; k = 0;
        for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++) begin
          s += $bitstoreal(wdata(id + k, b, tile(x, y)) >> (64 * l));
          k++;
        end
        e[64*l +: 64] = $realtobits(s);
      end
      expect_mem(tile(5, 1), 'h2000 + 64 * b, e, "2D FAdd");
    end
    for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++)
      expect_b(tile(x, y), b0[tile(x, y)], 1, 2'b00, "2D FAdd B");
    n_fadd2d++;

    // 8. crossing traffic: 2D multicast, 1D multicast and unicast together
    snap();
    id  = issue(1, caddr(4, 0, 'h3000), (32'd3 << 20) | (32'd3 << 18), OpMulticast, 0, 4);
    id2 = issue(tile(6, 2), caddr(4, 2, 'h3400), (32'd3 << 20), OpMulticast, 0, 4);
    id3 = issue(tile(7, 0), caddr(4, 3, 'h3800), '0, OpUnicast, 0, 4);
    settle(8000);
    for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++)
      for (int b = 0; b < 4; b++) expect_mem(tile(x, y), 'h3000 + 64 * b, wdata(id, b, 1), "crossing 2D multicast");
    for (int x = 4; x < 8; x++)
      for (int b = 0; b < 4; b++) expect_mem(tile(x, 2), 'h3400 + 64 * b, wdata(id2, b, tile(6, 2)), "crossing 1D multicast");
    for (int b = 0; b < 4; b++) expect_mem(tile(4, 3), 'h3800 + 64 * b, wdata(id3, b, tile(7, 0)), "crossing unicast");
    expect_b(1, b0[1], 1, 2'b00, "crossing 2D B");
    expect_b(tile(6, 2), b0[tile(6, 2)], 1, 2'b00, "crossing 1D B");
    expect_b(tile(7, 0), b0[tile(7, 0)], 1, 2'b00, "crossing unicast B");
    n_mc2d++; n_mc1d++; n_uni_wide++; n_collect_b += 2;

    checks++;
    if (core_ops == 0 || dca_ops == 0 || contention == 0) begin
      failures++; $display("FPU sharing not exercised: core %0d dca %0d both %0d", core_ops, dca_ops, contention);
    end

    $display("mechanisms: unicast_wide=%0d unicast_narrow=%0d multicast_2d=%0d multicast_1d=%0d",
             n_uni_wide, n_uni_narrow, n_mc2d, n_mc1d);
    $display("            collected_B=%0d error_merged_B=%0d barrier_lsb_and=%0d multicast_B=%0d",
             n_collect_b, n_err_merge, n_barrier, n_mc_b);
    $display("            fadd_1d=%0d fadd_2d=%0d dca_requests=%0d core_fpu_ops=%0d fpu_contention=%0d",
             n_fadd1d, n_fadd2d, dca_ops, core_ops, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
