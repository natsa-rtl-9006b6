// fp_mul: combinational floating-point multiplier, y = a * b.
//
// Format: 1 sign bit, EW exponent bits (bias 2^(EW-1)-1), MW fraction bits;
// the defaults give IEEE-754 binary32. Subnormal inputs are read as zero and
// results that underflow become zero; overflow and infinite inputs give
// infinity. The product is truncated (round toward zero). NaN is not
// produced. These simplifications are this design's own: the paper names
// energy-efficient floating-point units but does not describe them.
module fp_mul #(
  parameter int unsigned EW = 8,
  parameter int unsigned MW = 23
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int unsigned BIAS = (1 << (EW-1)) - 1;
  localparam logic [EW-1:0] EMAX = '1;

  logic            sa, sb, sy;
  logic [EW-1:0]   ea, eb;
  logic            za, zb, ia, ib;
  logic [2*MW+1:0] prod;
  logic [MW-1:0]   frac;
  logic signed [EW+2:0] exp_s;

  always_comb begin
    sa = a[EW+MW];  sb = b[EW+MW];  sy = sa ^ sb;
    ea = a[EW+MW-1:MW];  eb = b[EW+MW-1:MW];
    za = (ea == '0);  zb = (eb == '0);
    ia = (ea == EMAX); ib = (eb == EMAX);
    prod  = {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
    exp_s = $signed({3'b000, ea}) + $signed({3'b000, eb}) - $signed((EW+3)'(BIAS));
    if (prod[2*MW+1]) begin
      frac  = prod[2*MW:MW+1];
      exp_s = exp_s + $signed((EW+3)'(1));
    end else begin
      frac  = prod[2*MW-1:MW];
    end
    if (za || zb)                                   y = {sy, {(EW+MW){1'b0}}};
    else if (ia || ib || exp_s >= $signed({3'b000, EMAX})) y = {sy, EMAX, {MW{1'b0}}};
    else if (exp_s <= 0)                            y = {sy, {(EW+MW){1'b0}}};
    else                                            y = {sy, exp_s[EW-1:0], frac};
  end
endmodule
