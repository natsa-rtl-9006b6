// natsa_dcu: Distance Compute Unit, one lane.
//
// Computes the squared z-normalised Euclidean distance of one cell,
//   d = 2 * ( m - (q - m*mu_i*mu_j) / (sigma_i*sigma_j) ),
// which is the square of the paper's distance formula. The operator chain
// follows the paper's drawing, which prints multipliers, two subtractors, a
// divider and a left shift but no square root; the profile therefore holds
// squared distances (the minimum and its index are unchanged). The factor 2
// is the left shift, done by incrementing the exponent. m arrives as a float
// (m_f) from the scratchpad. Purely combinational.
module natsa_dcu
  import natsa_pkg::*;
(
  input  word_t m_f,
  input  word_t q,
  input  word_t mu_i,
  input  word_t mu_j,
  input  word_t sg_i,
  input  word_t sg_j,
  output word_t d
);
  word_t m_mu, m_mu_mu, num, sg_sg, ratio, half;

  fp_mul u_mul_mi  (.a(m_f),  .b(mu_i), .y(m_mu));
  fp_mul u_mul_mj  (.a(m_mu), .b(mu_j), .y(m_mu_mu));
  fp_add u_sub_q   (.a(q),    .b(m_mu_mu), .sub(1'b1), .y(num));
  fp_mul u_mul_sg  (.a(sg_i), .b(sg_j), .y(sg_sg));
  fp_div u_div     (.a(num),  .b(sg_sg), .y(ratio));
  fp_add u_sub_m   (.a(m_f),  .b(ratio), .sub(1'b1), .y(half));

  // << 1: double by exponent increment (zero and infinity stay as they are).
  always_comb begin
    if (half[30:23] == 8'h00 || half[30:23] == 8'hff) d = half;
    else if (half[30:23] == 8'hfe)                    d = {half[31], 8'hff, 23'd0};
    else                                              d = {half[31], half[30:23] + 8'd1, half[22:0]};
  end
endmodule
