// Testbench of dca_unit (with dca_slice and fp64_adder inside).
// Random 512-bit DCA requests (eight FP64 additions each) are issued while
// all eight cores also issue random FP64 additions to their own FPUs, and both
// response sides apply random back-pressure. Every result is compared with
// the sum computed in `real` arithmetic (operands are normal numbers whose
// sum is normal, so round-to-nearest-even must match exactly). The order of
// results per requester must be kept. The testbench also checks that a core
// and the DCA both make progress while they compete for the same FPU.
module tb_dca_unit;
  import noc_pkg::*;
  localparam int NC = 8;
  localparam int N_DCA = 400;
  localparam int N_CORE = 300;

  logic clk = 0, rst_n = 0;
  logic rq_v, rq_r, rs_v, rs_r;
  logic [64*NC-1:0] op1, op2, res;
  logic [NC-1:0] c_v, c_r, cr_v, cr_r;
  logic [63:0] ca [NC], cb [NC], cres [NC];
  int checks = 0, failures = 0;

  dca_unit #(.NUM_CORES(NC), .FPU_LAT(3)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(rq_v), .req_ready_o(rq_r), .req_op1_i(op1), .req_op2_i(op2),
    .req_op_i(OpFAdd),
    .rsp_valid_o(rs_v), .rsp_ready_i(rs_r), .rsp_result_o(res),
    .core_req_valid_i(c_v), .core_req_ready_o(c_r), .core_req_a_i(ca), .core_req_b_i(cb),
    .core_rsp_valid_o(cr_v), .core_rsp_ready_i(cr_r), .core_rsp_result_o(cres));

  always #5 clk = ~clk;

  function automatic logic [63:0] rnd_fp();
    real r;
    r = real'($urandom_range(1, 1000000)) / real'($urandom_range(1, 1000));
    if ($urandom_range(0, 1)) r = -r;
    return $realtobits(r);
  endfunction
  function automatic logic [63:0] add(logic [63:0] a, logic [63:0] b);
    return $realtobits($bitstoreal(a) + $bitstoreal(b));
  endfunction

  logic [64*NC-1:0] dca_exp [$];
  logic [63:0]      core_exp [NC][$];
  int n_dca_sent = 0, n_dca_got = 0, n_core_sent [NC], n_core_got [NC];
  int both_busy = 0;

  task automatic new_dca();
    for (int l = 0; l < NC; l++) begin
      op1[64*l +: 64] = rnd_fp();
      op2[64*l +: 64] = rnd_fp();
    end
  endtask

  initial begin
    for (int i = 0; i < NC; i++) begin n_core_sent[i] = 0; n_core_got[i] = 0; end
    rq_v = 0; c_v = '0; rs_r = 0; cr_r = '0; op1 = '0; op2 = '0;
    for (int i = 0; i < NC; i++) begin ca[i] = '0; cb[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  always @(posedge clk) if (rst_n) begin
    // DCA request side
    if (rq_v && rq_r) begin
      logic [64*NC-1:0] e;
      for (int l = 0; l < NC; l++) e[64*l +: 64] = add(op1[64*l +: 64], op2[64*l +: 64]);
      dca_exp.push_back(e);
      n_dca_sent++;
      rq_v <= 0;
    end
    if ((!rq_v || rq_r) && n_dca_sent + (rq_v && rq_r) < N_DCA && $urandom_range(0, 3) != 0) begin
      rq_v <= 1;
      for (int l = 0; l < NC; l++) begin
        op1[64*l +: 64] <= rnd_fp();
        op2[64*l +: 64] <= rnd_fp();
      end
    end
    // DCA response side
    if (rs_v && rs_r) begin
      checks++;
      if (dca_exp.size() == 0 || res !== dca_exp[0]) begin
        failures++;
        $display("DCA result %0d wrong: lane0 %h", n_dca_got, res[63:0]);
      end
      if (dca_exp.size() > 0) void'(dca_exp.pop_front());
      n_dca_got++;
    end
    rs_r <= ($urandom_range(0, 4) != 0);
    // cores
    for (int i = 0; i < NC; i++) begin
      if (c_v[i] && c_r[i]) begin
        core_exp[i].push_back(add(ca[i], cb[i]));
        n_core_sent[i]++;
        c_v[i] <= 0;
      end
      if (c_v[i] && rq_v) both_busy++;
      if ((!c_v[i] || c_r[i]) && n_core_sent[i] + (c_v[i] && c_r[i]) < N_CORE
          && $urandom_range(0, 2) != 0) begin
        c_v[i] <= 1;
        ca[i] <= rnd_fp();
        cb[i] <= rnd_fp();
      end
      if (cr_v[i] && cr_r[i]) begin
        checks++;
        if (core_exp[i].size() == 0 || cres[i] !== core_exp[i][0]) begin
          failures++;
          $display("core %0d result %0d wrong: %h", i, n_core_got[i], cres[i]);
        end
        if (core_exp[i].size() > 0) void'(core_exp[i].pop_front());
        n_core_got[i]++;
      end
      cr_r[i] <= ($urandom_range(0, 4) != 0);
    end
  end

  function automatic bit all_done();
    if (n_dca_got != N_DCA) return 0;
    for (int i = 0; i < NC; i++) if (n_core_got[i] != N_CORE) return 0;
    return 1;
  endfunction

  initial begin
    fork
      while (!all_done()) @(posedge clk);
      begin repeat (50000) @(posedge clk); $display("timeout"); end
    join_any
    checks++;
    if (!all_done()) begin
      failures++;
      $display("incomplete: dca %0d/%0d", n_dca_got, N_DCA);
    end
    checks++;
    if (both_busy == 0) begin failures++; $display("no contention exercised"); end
    $display("contention cycles %0d", both_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
