// fp_add: combinational floating-point adder/subtractor, y = a + b or
// y = a - b when sub is set.
//
// The smaller operand is aligned to the larger with three extra bits (guard,
// round, sticky), the magnitudes are added or subtracted, the result is
// renormalised with a leading-one search and truncated (round toward zero).
// Subnormals are flushed to zero, infinities propagate, NaN is not produced.
// Exact cancellation gives +0. Defaults give IEEE-754 binary32. The operator
// style is this design's own choice; the paper does not describe its FP units.
module fp_add #(
  parameter int unsigned EW = 8,
  parameter int unsigned MW = 23
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  input  logic           sub,
  output logic [EW+MW:0] y
);
  localparam logic [EW-1:0] EMAX = '1;
  localparam int unsigned   SW   = MW + 5;  // carry + hidden + MW + 3 extra

  logic            sa, sb, sl, ss;
  logic [EW-1:0]   ea, eb, el, es, diff;
  logic [MW:0]     ml, ms;
  logic [SW-1:0]   al, as_, sum;
  logic            sticky;
  logic [$clog2(SW+1)-1:0] lz;
  logic signed [EW+1:0] ey;
  logic [SW-1:0]   norm;

  always_comb begin
    sa = a[EW+MW];
    sb = b[EW+MW] ^ sub;
    ea = a[EW+MW-1:MW];
    eb = b[EW+MW-1:MW];
    // Order operands by magnitude.
    if ({ea, a[MW-1:0]} >= {eb, b[MW-1:0]}) begin
      sl = sa; el = ea; ml = {(ea != '0), a[MW-1:0]};
      ss = sb; es = eb; ms = {(eb != '0), b[MW-1:0]};
    end else begin
      sl = sb; el = eb; ml = {(eb != '0), b[MW-1:0]};
      ss = sa; es = ea; ms = {(ea != '0), a[MW-1:0]};
    end
    if (es == '0) ms = '0;
    diff = el - es;
    al   = {1'b0, ml, 3'b000};
    as_  = {1'b0, ms, 3'b000};
    sticky = 1'b0;
    if (diff >= EW'(SW)) begin
      sticky = (ms != '0);
      as_    = '0;
    end else begin
      for (int unsigned k = 0; k < SW; k++)
        if (k < diff && as_[k]) sticky = 1'b1;
      as_ = as_ >> diff;
    end
    as_[0] = as_[0] | sticky;
    if (sl == ss) sum = al + as_;
    else          sum = al - as_;
    // Leading-one position.
    lz = '0;
    for (int k = 0; k < SW; k++)
      if (sum[k]) lz = ($clog2(SW+1))'(SW - 1 - k);
    norm = sum << lz;
    ey   = $signed({2'b00, el}) + $signed((EW+2)'(1)) - $signed({{(EW+2-$clog2(SW+1)){1'b0}}, lz});
    if (el == EMAX)                y = {sl, EMAX, {MW{1'b0}}};
    else if (sum == '0 || el == '0) y = (el == '0) ? {sl & ss, {(EW+MW){1'b0}}} : '0;
    else if (ey >= $signed({2'b00, EMAX})) y = {sl, EMAX, {MW{1'b0}}};
    else if (ey <= 0)              y = {sl, {(EW+MW){1'b0}}};
    else                           y = {sl, ey[EW-1:0], norm[SW-2 -: MW]};
  end
endmodule
