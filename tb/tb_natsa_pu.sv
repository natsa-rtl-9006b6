// tb_natsa_pu: one processing unit on a channel model computes a whole
// matrix profile. The host part (series, statistics, configuration words,
// a diagonal list holding every diagonal outside the exclusion zone in random
// order, PP = +inf) is done here; the PU's private profile is then compared
// with a real-valued reference: each P_i within tolerance of the true
// minimum, and each I_i a window outside the exclusion zone whose distance
// is that minimum. Two runs: m a multiple of VEC and m not.
module tb_natsa_pu;
  import natsa_pkg::*;
  import tb_fp_pkg::*;
  import tb_natsa_host_pkg::*;

  localparam int T_B = 0, MU_B = 1024, SG_B = 2048, DG_B = 3072, PP_B = 4096, II_B = 8192;

  logic clk = 0, rst_n = 0;
  logic spm_we = 0, start = 0, done;
  logic [SPM_AW-1:0] spm_addr = 0;
  word_t spm_wdata = 0;
  logic mem_req_valid, mem_rsp_valid;
  mem_req_t mem_req;
  vec_t mem_rsp_rdata;
  int checks = 0, failures = 0;

  natsa_pu dut (.*);
  hbm_chan_model #(.WORDS(16384), .LAT(1)) u_mem (
    .clk(clk), .req_valid(mem_req_valid), .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input int a, input word_t v);
    @(negedge clk);
    spm_we = 1; spm_addr = SPM_AW'(a); spm_wdata = v;
    @(negedge clk);
    spm_we = 0;
  endtask

  task automatic run(input int n, input int m);
    series_t t, mu, sg;
    int nprof, exc, nd;
    int diags [$];
    gen_series(n, t);
    stats(t, n, m, mu, sg);
    nprof = n - m + 1;
    exc = m / 4;
    for (int k = 0; k < MAXN; k++) begin
      u_mem.mem[T_B + k]  = r2f(t[k]);
      u_mem.mem[MU_B + k] = r2f(mu[k]);
      u_mem.mem[SG_B + k] = r2f(sg[k]);
      u_mem.mem[PP_B + k] = FP_POS_INF;
      u_mem.mem[II_B + k] = '0;
    end
    for (int d = exc + 1; d < nprof; d++) diags.push_back(d);
    diags.shuffle();
    nd = diags.size();
    for (int k = 0; k < nd; k++) u_mem.mem[DG_B + k] = 32'(diags[k]);
    cfg_write(SPM_M, 32'(m));
    cfg_write(SPM_MF, r2f(real'(m)));
    cfg_write(SPM_NPROF, 32'(nprof));
    cfg_write(SPM_T, T_B);
    cfg_write(SPM_MU, MU_B);
    cfg_write(SPM_SG, SG_B);
    cfg_write(SPM_PP, PP_B);
    cfg_write(SPM_II, II_B);
    cfg_write(SPM_DIAG, DG_B);
    cfg_write(SPM_NDIAG, 32'(nd));
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (done) failures++;   // done must drop on start
    wait (done);
    @(negedge clk);
    for (int i = 0; i < nprof; i++) begin
      real best, got, at_idx, tol;
      int  idx;
      best = 1.0e30;
      for (int j = 0; j < nprof; j++)
        if (j > i + exc || j < i - exc) begin
          real dd;
          dd = dist2(t, mu, sg, m, i, j);
          if (dd < best) best = dd;
        end
      got = f2r(u_mem.mem[PP_B + i]);
      idx = int'(u_mem.mem[II_B + i]);
      tol = 2.0e-3 * (m + 1);
      checks++;
      if (fabs(got - best) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL P[%0d] got %g exp %g", i, got, best);
      end
      checks++;
      at_idx = (idx >= 0 && idx < nprof) ? dist2(t, mu, sg, m, i, idx) : 1.0e30;
      if (!(idx > i + exc || idx < i - exc) || fabs(at_idx - best) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL I[%0d] = %0d (d %g, best %g)", i, idx, at_idx, best);
      end
    end
    $display("run n=%0d m=%0d: %0d diagonals, %0d reads, %0d writes", n, m, nd, u_mem.n_rd, u_mem.n_wr);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(48, 8);
    run(61, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
