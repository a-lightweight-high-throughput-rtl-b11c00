// Workload testbench of collective_noc_top at its default parameters: the
// collective transfers whose runtime is evaluated for the 4 x 4 compute mesh,
// at the smallest and largest sizes of that evaluation (1 KiB and 32 KiB,
// with 8 KiB in between for the multicast), plus a barrier of all clusters.
// A transfer of 32 KiB is 512 beats of 64 B, issued by each DMA engine as two
// back-to-back bursts of 256 beats (the AXI length limit).
//   - 1D multicast from memory tile m0 to the four clusters of row 0
//   - 2D multicast from memory tile m0 to all 16 clusters
//   - 1D FAdd reduction of row 0 into (4,0) (two inputs per router)
//   - 2D FAdd reduction of all 16 clusters into (4,0): the routers of column
//     x = 4 combine three inputs (Local, East, North), two at a time
//   - barrier (LsbAnd reduction and multicast B) of all 16 clusters
// Every destination byte is checked, and every initiator must get one B per
// burst. The runtime T (first AW to last B) is printed with the inverse
// bandwidth (T - T_1KiB) / (n - 16) in cycles per beat, and checked: the
// multicasts and the 1D reduction must stream at one beat per cycle, the 2D
// reduction at one beat every two cycles (the three-input limit).
module tb_collective_workloads;
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
  int   b_time [NT];

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
        b_time[t] = cyc;
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

  // The cores stay idle: only the collectives run.
  always_comb begin
    for (int i = 0; i < NC; i++) begin
      c_v[i] = 1'b0; c_a[i] = '0; c_b[i] = '0; cr_r[i] = 1'b1;
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

  int b0 [NT];

  task automatic snap();
    for (int t = 0; t < NT; t++) b0[t] = b_cnt[t];
  endtask

  // ------------------------------------------------------------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ids [NT][2];

  // Issue a transfer of `kib` KiB from every tile in `srcs` to (dx, dy) with
  // the given mask and opcode, wait for it and return its runtime.
  task automatic transfer(int srcs[$], int dx, int dy, logic [AddrW-1:0] mask, coll_op_e op,
                          int kib, int off, output int t_run);
    int beats, bursts, start, stop;
    beats = kib * 16;
    bursts = (beats + 255) / 256;
    snap();
    start = cyc;
    foreach (srcs[i])
      for (int k = 0; k < bursts; k++)
        ids[srcs[i]][k] = issue(srcs[i], caddr(dx, dy, off + k * 256 * 64), mask, op, 0,
                                (beats > 256) ? 256 : beats);
    settle(20000);
    stop = start;
    foreach (srcs[i]) begin
      expect_b(srcs[i], b0[srcs[i]], bursts, 2'b00, "workload B");
      if (b_time[srcs[i]] > stop) stop = b_time[srcs[i]];
    end
    t_run = stop - start;
  endtask

  // Expected beat `b` of a reduction over `srcs` (burst k, beat j)
  function automatic logic [WideW-1:0] red_beat(int srcs[$], int b);
    logic [WideW-1:0] e;
    for (int l = 0; l < 8; l++) begin
      real s;
      s = 0.0;
      foreach (srcs[i]) s += $bitstoreal(wdata(ids[srcs[i]][b / 256], b % 256, srcs[i]) >> (64 * l));
      e[64*l +: 64] = $realtobits(s);
    end
    return e;
  endfunction

  function automatic void check_rate(string what, int t1, int tn, int n, real lo, real hi);
    real beta;
    beta = real'(tn - t1) / real'(n - 16);
    $display("%s: T(1 KiB) = %0d cycles, T(%0d KiB) = %0d cycles, %0.2f cycles/beat",
             what, t1, n / 16, tn, beta);
    checks++;
    if (beta < lo || beta > hi) begin
      failures++; $display("%s: %0.2f cycles/beat outside [%0.2f, %0.2f]", what, beta, lo, hi);
    end
  endfunction

  initial begin
    int row0 [$], all [$], m0 [$];
    int t1, t8, t32, tb, wr0, off;
    for (int t = 0; t < NT; t++) begin b_cnt[t] = 0; wr_cnt[t] = 0; s_err[t] = 0; b_last[t] = 0; b_time[t] = 0; end
    for (int x = 4; x < 8; x++) row0.push_back(tile(x, 0));
    for (int x = 4; x < 8; x++) for (int y = 0; y < 4; y++) all.push_back(tile(x, y));
    m0.push_back(0);
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // 1D multicast m0 -> row 0
    off = 'h0;
    for (int i = 0; i < 3; i++) begin
      int kib, tr;
      kib = (i == 0) ? 1 : (i == 1) ? 8 : 32;
      transfer(m0, 4, 0, (32'd3 << 20), OpMulticast, kib, off, tr);
      for (int x = 4; x < 8; x++)
        for (int b = 0; b < kib * 16; b++)
          expect_mem(tile(x, 0), off + 64 * b, wdata(ids[0][b / 256], b % 256, 0), "1D multicast");
      if (i == 0) t1 = tr; else if (i == 1) t8 = tr; else t32 = tr;
      off += kib * 1024;
    end
    check_rate("1D multicast", t1, t32, 512, 0.9, 1.1);

    // 2D multicast m0 -> all clusters
    for (int i = 0; i < 2; i++) begin
      int kib, tr;
      kib = (i == 0) ? 1 : 32;
      transfer(m0, 4, 0, (32'd3 << 20) | (32'd3 << 18), OpMulticast, kib, off, tr);
      foreach (all[j])
        for (int b = 0; b < kib * 16; b++)
          expect_mem(all[j], off + 64 * b, wdata(ids[0][b / 256], b % 256, 0), "2D multicast");
      if (i == 0) t1 = tr; else t32 = tr;
      off += kib * 1024;
    end
    check_rate("2D multicast", t1, t32, 512, 0.9, 1.1);

    // 1D FAdd reduction row 0 -> (4,0)
    for (int i = 0; i < 2; i++) begin
      int kib, tr;
      kib = (i == 0) ? 1 : 32;
      transfer(row0, 4, 0, (32'd3 << 20), OpFAdd, kib, off, tr);
      for (int b = 0; b < kib * 16; b++)
        expect_mem(tile(4, 0), off + 64 * b, red_beat(row0, b), "1D reduction");
      if (i == 0) t1 = tr; else t32 = tr;
      off += kib * 1024;
    end
    check_rate("1D reduction", t1, t32, 512, 0.9, 1.2);

    // 2D FAdd reduction all -> (4,0)
    for (int i = 0; i < 2; i++) begin
      int kib, tr;
      kib = (i == 0) ? 1 : 32;
      transfer(all, 4, 0, (32'd3 << 20) | (32'd3 << 18), OpFAdd, kib, off, tr);
      for (int b = 0; b < kib * 16; b++)
        expect_mem(tile(4, 0), off + 64 * b, red_beat(all, b), "2D reduction");
      if (i == 0) t1 = tr; else t32 = tr;
      off += kib * 1024;
    end
    check_rate("2D reduction", t1, t32, 512, 1.8, 2.2);

    // Barrier of all clusters into (4,0)
    snap();
    wr0 = wr_cnt[tile(4, 0)];
    tb = cyc;
    foreach (all[j]) begin
      lsb_val[all[j]] = 1'b1;
      t1 = issue(all[j], caddr(4, 0, off), (32'd3 << 20) | (32'd3 << 18), OpLsbAnd, 1, 1);
    end
    settle(5000);
    t8 = 0;
    foreach (all[j]) begin
      expect_b(all[j], b0[all[j]], 1, 2'b00, "barrier B");
      if (b_time[all[j]] - tb > t8) t8 = b_time[all[j]] - tb;
    end
    checks++;
    if (wr_cnt[tile(4, 0)] - wr0 != 1 || !mem[tile(4, 0)].exists(off) || mem[tile(4, 0)][off][0] !== 1'b1) begin
      failures++; $display("barrier: destination not written once with 1");
    end
    $display("barrier of 16 clusters: %0d cycles", t8);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
