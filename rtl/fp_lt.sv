// fp_lt: floating-point less-than, lt = (a < b).
//
// Each sign-magnitude word is mapped to an unsigned key that orders like the
// real numbers (negative values inverted, positive values offset by the sign
// bit), and the keys are compared. -0 orders just below +0. This is the
// comparator of the profile update unit.
module fp_lt #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         lt
);
  logic [W-1:0] ka, kb;
  always_comb begin
    ka = a[W-1] ? ~a : (a | {1'b1, {(W-1){1'b0}}});
    kb = b[W-1] ? ~b : (b | {1'b1, {(W-1){1'b0}}});
    lt = ka < kb;
  end
endmodule
