// tb_natsa_rand_workload: end-to-end run of the accelerator on a uniform random series like the synthetic rand_* inputs,
// scaled down to n=320, m=18, 16 PUs on 8 channels.
// The host part is done here: series, means and standard deviations are
// written to every channel (each PU reads its own channel's copy), the
// diagonals outside the exclusion zone are paired first-with-last and dealt
// round robin to the PUs, each PU's private PP is set to +inf, the
// scratchpads are written through the configuration port, and start is
// pulsed. After done the private profiles are reduced (minimum over PUs) and
// checked against a real-valued reference: P_i within tolerance of the true
// minimum, I_i a window outside the exclusion zone at that distance. Each
// pair of diagonals is also checked to hold nprof-exc cells.
// Mechanisms counted (a failure if one never happens): first cell through
// the DPU path of the multiplexer, batches through the DPUU path, partial
// batches at a diagonal end, masked last DPU beats, row-side and column-side
// profile writes, skipped writes (no lane improved), and requests that wait
// because another PU holds the channel.
module tb_natsa_rand_workload;
  import natsa_pkg::*;
  import tb_fp_pkg::*;
  import tb_natsa_host_pkg::*;

  localparam int NPU = 16, NCH = 8, PPC = NPU / NCH;
  localparam int N = 320, M = 18;
  localparam int T_B = 0, MU_B = 1024, SG_B = 2048, DG_B = 3072, PP_B = 8192, II_B = 16384;
  localparam int WORDS = 24576;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, start = 0, done;
  logic [$clog2(NPU)-1:0] cfg_pu = 0;
  logic [SPM_AW-1:0] cfg_addr = 0;
  word_t cfg_wdata = 0;
  logic [NPU-1:0] pu_done;
  logic     [NCH-1:0] ch_req_valid, ch_rsp_valid;
  mem_req_t [NCH-1:0] ch_req;
  vec_t     [NCH-1:0] ch_rsp_rdata;
  int checks = 0, failures = 0;

  natsa_top #(.NUM_PU(NPU), .NUM_CH(NCH)) dut (.*);
  always #5 clk = ~clk;

  series_t t, mu, sg;
  int nprof, exc;
  int ndiag [NPU];
  int list [NPU][64];
  real p_hw [MAXN];
  int  i_hw [MAXN];
  logic load_go = 0, reduce_go = 0;
  int loaded = 0, reduced = 0;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    hbm_chan_model #(.WORDS(WORDS), .LAT(2)) u_mem (
      .clk(clk), .req_valid(ch_req_valid[c]), .req(ch_req[c]),
      .rsp_valid(ch_rsp_valid[c]), .rsp_rdata(ch_rsp_rdata[c]));
    initial begin
      wait (load_go);
      for (int k = 0; k < MAXN; k++) begin
        u_mem.mem[T_B + k]  = r2f(t[k]);
        u_mem.mem[MU_B + k] = r2f(mu[k]);
        u_mem.mem[SG_B + k] = r2f(sg[k]);
      end
      for (int lp = 0; lp < PPC; lp++) begin
        for (int k = 0; k < 64; k++) u_mem.mem[DG_B + 64 * lp + k] = 32'(list[c * PPC + lp][k]);
        for (int k = 0; k < 1024; k++) begin
          u_mem.mem[PP_B + 1024 * lp + k] = FP_POS_INF;
          u_mem.mem[II_B + 1024 * lp + k] = '0;
        end
      end
      loaded++;
      wait (reduce_go);
      for (int lp = 0; lp < PPC; lp++)
        for (int i = 0; i < nprof; i++) begin
          word_t w;
          w = u_mem.mem[PP_B + 1024 * lp + i];
          if (w != FP_POS_INF && f2r(w) < p_hw[i]) begin
            p_hw[i] = f2r(w);
            i_hw[i] = int'(u_mem.mem[II_B + 1024 * lp + i]);
          end
        end
      reduced++;
    end
  end

  // mechanism counters
  longint n_first = 0, n_dpuu = 0, n_partial = 0, n_dpu_mask = 0;
  longint n_row_wr = 0, n_col_wr = 0, n_skip = 0, n_wait = 0;
  for (genvar p = 0; p < NPU; p++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      int st;
      st = int'(dut.g_pu[p].u_pu.state);
      // state numbers follow the order of natsa_pu's state enum
      if (st == 13 && dut.g_pu[p].u_pu.first)  n_first++;
      if (st == 13 && !dut.g_pu[p].u_pu.first) n_dpuu++;
      if (st == 13 && !dut.g_pu[p].u_pu.first && dut.g_pu[p].u_pu.cnt < VEC) n_partial++;
      if (dut.g_pu[p].u_pu.dp_valid && dut.g_pu[p].u_pu.dp_mask != '1) n_dpu_mask++;
      if (st == 15 && dut.g_pu[p].u_pu.mem_rsp_valid) n_row_wr++;
      if (st == 18 && dut.g_pu[p].u_pu.mem_rsp_valid) n_col_wr++;
      if ((st == 15 || st == 18) && dut.g_pu[p].u_pu.upd == '0) n_skip++;
      if (dut.g_pu[p].u_pu.mem_req_valid && ch_req_valid[p / PPC] &&
          int'(dut.g_ch[p / PPC].u_ctrl.grant) != p % PPC) n_wait++;
    end
  end

  initial begin
    #400000000; failures++;
    $display("watchdog expired at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input int p, input int a, input word_t v);
    @(negedge clk);
    cfg_we = 1; cfg_pu = $bits(cfg_pu)'(p); cfg_addr = SPM_AW'(a); cfg_wdata = v;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic check_mech(input string what, input longint n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    int cycles;
    gen_uniform(N, t);
    stats(t, N, M, mu, sg);
    nprof = N - M + 1;
    exc = M / 4;
    for (int p = 0; p < NPU; p++) ndiag[p] = 0;
    for (int k = 0; k < n_pairs(nprof, exc); k++) begin
      int d0, d1, p;
      pair_diags(nprof, exc, k, d0, d1);
      p = k % NPU;
      checks++;
      if ((nprof - d0) + ((d1 > 0) ? (nprof - d1) : 0) != ((d1 > 0) ? nprof - exc : nprof - d0)) failures++;
      list[p][ndiag[p]++] = d0;
      if (d1 > 0) list[p][ndiag[p]++] = d1;
    end
    for (int i = 0; i < MAXN; i++) begin p_hw[i] = 1.0e30; i_hw[i] = -1; end
    load_go = 1;
    wait (loaded == NCH);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPU; p++) begin
      cfg_write(p, SPM_M, 32'(M));
      cfg_write(p, SPM_MF, r2f(real'(M)));
      cfg_write(p, SPM_NPROF, 32'(nprof));
      cfg_write(p, SPM_T, T_B);
      cfg_write(p, SPM_MU, MU_B);
      cfg_write(p, SPM_SG, SG_B);
      cfg_write(p, SPM_PP, PP_B + 1024 * (p % PPC));
      cfg_write(p, SPM_II, II_B + 1024 * (p % PPC));
      cfg_write(p, SPM_DIAG, DG_B + 64 * (p % PPC));
      cfg_write(p, SPM_NDIAG, 32'(ndiag[p]));
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (done) failures++;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
    reduce_go = 1;
    wait (reduced == NCH);
    for (int i = 0; i < nprof; i++) begin
      real best, at_idx, tol;
      best = 1.0e30;
      for (int j = 0; j < nprof; j++)
        if (j > i + exc || j < i - exc) begin
          real dd;
          dd = dist2(t, mu, sg, M, i, j);
          if (dd < best) best = dd;
        end
      tol = 2.0e-3 * (M + 1);
      checks++;
      if (fabs(p_hw[i] - best) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL P[%0d] got %g exp %g", i, p_hw[i], best);
      end
      checks++;
      at_idx = (i_hw[i] >= 0 && i_hw[i] < nprof) ? dist2(t, mu, sg, M, i, i_hw[i]) : 1.0e30;
      if (!(i_hw[i] > i + exc || i_hw[i] < i - exc) || fabs(at_idx - best) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL I[%0d] = %0d", i, i_hw[i]);
      end
    end
    $display("n=%0d m=%0d nprof=%0d exc=%0d: %0d PUs on %0d channels, %0d cycles", N, M, nprof, exc, NPU, NCH, cycles);
    check_mech("first cell via DPU", n_first);
    check_mech("batches via DPUU", n_dpuu);
    check_mech("partial batches", n_partial);
    check_mech("masked DPU beats", n_dpu_mask);
    check_mech("row-side profile writes", n_row_wr);
    check_mech("column-side profile writes", n_col_wr);
    check_mech("skipped writes", n_skip);
    check_mech("channel wait cycles", n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
