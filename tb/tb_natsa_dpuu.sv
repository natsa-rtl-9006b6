// tb_natsa_dpuu: checks one dot-product-update lane, q_out = q_in -
// t_i*t_j + t_im*t_jm, and that a chain of lanes reproduces the dot
// products of consecutive cells of a diagonal computed directly.
module tb_natsa_dpuu;
  import natsa_pkg::*;
  import tb_fp_pkg::*;
  word_t t_im, t_jm, t_i, t_j, q_in, q_out;
  int checks = 0, failures = 0;

  natsa_dpuu dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ts [64];
    real q_direct, q_hw, e;
    int  m, j;
    // single random evaluations
    for (int t = 0; t < 1000; t++) begin
      t_im = r2f(urand(-3.0, 3.0)); t_jm = r2f(urand(-3.0, 3.0));
      t_i  = r2f(urand(-3.0, 3.0)); t_j  = r2f(urand(-3.0, 3.0));
      q_in = r2f(urand(-50.0, 50.0));
      #1;
      e = f2r(q_in) - f2r(t_i) * f2r(t_j) + f2r(t_im) * f2r(t_jm);
      checks++;
      if (fabs(f2r(q_out) - e) > 1.0e-5 * (fabs(f2r(q_in)) + 20.0)) begin
        failures++;
        if (failures < 10) $display("FAIL got %g exp %g", f2r(q_out), e);
      end
    end
    // walk a diagonal: q_{i,j} from q_{i-1,j-1}
    for (int r = 0; r < 20; r++) begin
      for (int k = 0; k < 64; k++) ts[k] = f2r(r2f(urand(-1.0, 1.0)));
      m = $urandom_range(2, 16);
      j = $urandom_range(m, 63 - m - 20);
      q_hw = 0.0;
      for (int k = 0; k < m; k++) q_hw += ts[k] * ts[j + k];
      q_in = r2f(q_hw);
      for (int i = 1; i + j + m <= 64 && i < 20; i++) begin
        t_i = r2f(ts[i - 1]); t_j = r2f(ts[j + i - 1]);
        t_im = r2f(ts[i + m - 1]); t_jm = r2f(ts[j + i + m - 1]);
        #1;
        q_direct = 0.0;
        for (int k = 0; k < m; k++) q_direct += ts[i + k] * ts[j + i + k];
        checks++;
        if (fabs(f2r(q_out) - q_direct) > 1.0e-4 * m) begin
          failures++;
          if (failures < 10) $display("FAIL walk i=%0d got %g exp %g", i, f2r(q_out), q_direct);
        end
        q_in = q_out;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
