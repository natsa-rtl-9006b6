// tb_natsa_dpu: feeds window pairs of random length m in beats of VEC
// elements, with the last beat masked, and compares the accumulated dot
// product with the real-valued sum. Also checks that clear restarts the sum
// and that the number of beats is ceil(m/VEC).
module tb_natsa_dpu;
  import natsa_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  lane_mask_t mask;
  vec_t ta, tb;
  word_t q;
  int checks = 0, failures = 0;

  natsa_dpu dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a [256], b [256];
    real exp_q, mag;
    int  m, beats;
    mask = '0; ta = '0; tb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      m = $urandom_range(1, 200);
      exp_q = 0.0; mag = 0.0;
      for (int k = 0; k < m; k++) begin
        a[k] = f2r(r2f(urand(-2.0, 2.0)));
        b[k] = f2r(r2f(urand(-2.0, 2.0)));
        exp_q += a[k] * b[k];
        mag   += fabs(a[k] * b[k]);
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      checks++;
      if (q !== '0) failures++;
      beats = 0;
      for (int kk = 0; kk < m; kk += VEC) begin
        for (int k = 0; k < VEC; k++) begin
          mask[k] = (kk + k < m);
          ta[k] = (kk + k < m) ? r2f(a[kk + k]) : r2f(urand(-9.0, 9.0));
          tb[k] = (kk + k < m) ? r2f(b[kk + k]) : r2f(urand(-9.0, 9.0));
        end
        valid = 1;
        @(negedge clk);
        valid = 0;
        beats++;
      end
      checks++;
      if (fabs(f2r(q) - exp_q) > 1.0e-5 * (mag + 1.0)) begin
        failures++;
        if (failures < 10) $display("FAIL m=%0d got %g exp %g", m, f2r(q), exp_q);
      end
      checks++;
      if (beats != (m + VEC - 1) / VEC) failures++;
      // hold: no valid, value must stay
      @(negedge clk);
      checks++;
      if (fabs(f2r(q) - exp_q) > 1.0e-5 * (mag + 1.0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
