// tb_natsa_puu: checks the profile update lane: update exactly when the new
// distance is strictly lower (ties keep the stored entry), negative values
// ordered correctly, and no update on an invalid lane.
module tb_natsa_puu;
  import natsa_pkg::*;
  import tb_fp_pkg::*;
  logic  valid, upd;
  word_t d, idx, pp_old, ii_old, pp_new, ii_new;
  int checks = 0, failures = 0;

  natsa_puu dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rd, rp;
    logic exp_upd;
    for (int t = 0; t < 2000; t++) begin
      rd = urand(-2.0, 50.0);
      rp = (t % 5 == 0) ? rd : urand(-2.0, 50.0);
      if (t % 13 == 0) rp = 1.0e40;   // +inf after conversion
      valid  = (t % 9 != 0);
      d      = r2f(rd);
      pp_old = r2f(rp);
      idx    = $urandom;
      ii_old = $urandom;
      #1;
      exp_upd = valid && (f2r(d) < ((pp_old == 32'h7f800000) ? 1.0e300 : f2r(pp_old)));
      checks++;
      if (upd !== exp_upd || pp_new !== (exp_upd ? d : pp_old) || ii_new !== (exp_upd ? idx : ii_old)) begin
        failures++;
        if (failures < 10) $display("FAIL d=%g pp=%g v=%0d upd=%0d", rd, rp, valid, upd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
