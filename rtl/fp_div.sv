// fp_div: combinational floating-point divider, y = a / b.
//
// The quotient of the two significands is formed with MW+2 fraction bits by
// integer division, normalised by at most one position and truncated (round
// toward zero). A zero dividend gives zero, a zero divisor or an infinite
// dividend gives infinity, subnormals are flushed to zero, NaN is not
// produced. Defaults give IEEE-754 binary32. This operator is this design's
// own; the paper only names a divider in the distance compute unit.
module fp_div #(
  parameter int unsigned EW = 8,
  parameter int unsigned MW = 23
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int unsigned BIAS = (1 << (EW-1)) - 1;
  localparam logic [EW-1:0] EMAX = '1;

  logic            sy;
  logic [EW-1:0]   ea, eb;
  logic [2*MW+2:0] num;
  logic [2*MW+2:0] den;
  logic [MW+2:0]   quo;
  logic [MW-1:0]   frac;
  logic signed [EW+2:0] exp_s;

  always_comb begin
    sy = a[EW+MW] ^ b[EW+MW];
    ea = a[EW+MW-1:MW];
    eb = b[EW+MW-1:MW];
    num = {1'b1, a[MW-1:0], {(MW+2){1'b0}}};
    den = {{(MW+2){1'b0}}, 1'b1, b[MW-1:0]};
    quo = (MW+3)'(num / den);   // in [2^(MW+1), 2^(MW+3))
    exp_s = $signed({3'b000, ea}) - $signed({3'b000, eb}) + $signed((EW+3)'(BIAS));
    if (quo[MW+2]) begin
      frac = quo[MW+1:2];
    end else begin
      frac  = quo[MW:1];
      exp_s = exp_s - $signed((EW+3)'(1));
    end
    if (ea == '0)                          y = {sy, {(EW+MW){1'b0}}};
    else if (eb == '0 || ea == EMAX)       y = {sy, EMAX, {MW{1'b0}}};
    else if (eb == EMAX)                   y = {sy, {(EW+MW){1'b0}}};
    else if (exp_s >= $signed({3'b000, EMAX})) y = {sy, EMAX, {MW{1'b0}}};
    else if (exp_s <= 0)                   y = {sy, {(EW+MW){1'b0}}};
    else                                   y = {sy, exp_s[EW-1:0], frac};
  end
endmodule
