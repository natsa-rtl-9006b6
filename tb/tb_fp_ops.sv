// tb_fp_ops: self-checking test of the floating-point multiplier, adder /
// subtractor, divider and comparator against real arithmetic. Results must
// lie within a few units in the last place of the exact value (the operators
// truncate); the comparator must be exact.
module tb_fp_ops;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y_mul, y_add, y_sub, y_div;
  logic        lt;
  int checks = 0, failures = 0;

  fp_mul u_mul (.a(a), .b(b), .y(y_mul));
  fp_add u_add (.a(a), .b(b), .sub(1'b0), .y(y_add));
  fp_add u_sub (.a(a), .b(b), .sub(1'b1), .y(y_sub));
  fp_div u_div (.a(a), .b(b), .y(y_div));
  fp_lt  u_lt  (.a(a), .b(b), .lt(lt));

  task automatic chk(input string what, input real got, input real exp, input real scale);
    checks++;
    if (fabs(got - exp) > 4.0e-7 * scale + 1.0e-30) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %g exp %g", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb;
    for (int t = 0; t < 3000; t++) begin
      ra = urand(-100.0, 100.0);
      rb = urand(-100.0, 100.0);
      if (t % 7 == 0) rb = -ra * urand(0.99, 1.01);  // near cancellation
      if (t % 11 == 0) rb = ra;                        // equal operands
      a = r2f(ra); b = r2f(rb);
      #1;
      ra = f2r(a); rb = f2r(b);
      chk("mul", f2r(y_mul), ra * rb, fabs(ra * rb));
      chk("add", f2r(y_add), ra + rb, (fabs(ra) > fabs(rb)) ? fabs(ra) : fabs(rb));
      chk("sub", f2r(y_sub), ra - rb, (fabs(ra) > fabs(rb)) ? fabs(ra) : fabs(rb));
      if (rb != 0.0) chk("div", f2r(y_div), ra / rb, fabs(ra / rb));
      checks++;
      if (lt != (ra < rb)) begin
        failures++;
        $display("FAIL lt %g %g got %0d", ra, rb, lt);
      end
    end
    // special values
    a = r2f(3.0); b = 32'd0; #1;
    checks++; if (y_mul != 32'd0) failures++;
    checks++; if (y_div[30:23] != 8'hff) failures++;
    checks++; if (f2r(y_add) != 3.0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
