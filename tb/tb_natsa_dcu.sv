// tb_natsa_dcu: checks the distance lane against the squared z-normalised
// distance 2*(m - (q - m*mu_i*mu_j)/(sigma_i*sigma_j)) in real arithmetic.
module tb_natsa_dcu;
  import natsa_pkg::*;
  import tb_fp_pkg::*;
  word_t m_f, q, mu_i, mu_j, sg_i, sg_j, d;
  int checks = 0, failures = 0;

  natsa_dcu dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rm, rq, mi, mj, si, sj, ratio, exp_d;
    for (int t = 0; t < 2000; t++) begin
      rm = real'($urandom_range(4, 1024));
      mi = urand(-1.0, 1.0); mj = urand(-1.0, 1.0);
      si = urand(0.3, 2.0);  sj = urand(0.3, 2.0);
      rq = rm * mi * mj + urand(-1.0, 1.0) * rm * si * sj;
      m_f = r2f(rm); q = r2f(rq);
      mu_i = r2f(mi); mu_j = r2f(mj); sg_i = r2f(si); sg_j = r2f(sj);
      #1;
      ratio = (f2r(q) - rm * f2r(mu_i) * f2r(mu_j)) / (f2r(sg_i) * f2r(sg_j));
      exp_d = 2.0 * (rm - ratio);
      checks++;
      if (fabs(f2r(d) - exp_d) > 2.0e-5 * (rm + fabs(ratio) + fabs(rq))) begin
        failures++;
        if (failures < 10) $display("FAIL m=%g q=%g got %g exp %g", rm, rq, f2r(d), exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
