// natsa_dpuu: one lane of the Dot Product Update Unit.
//
// Computes the dot product of a diagonal cell from the cell above-left of it,
// q_out = q_in - t_i*t_j + t_im*t_jm, where t_i, t_j are the elements that
// leave the two windows (t_{i-1}, t_{j-1}) and t_im, t_jm those that enter
// (t_{i+m-1}, t_{j+m-1}). Two multipliers, a subtractor and an adder, as in
// the paper's drawing. The PU chains VEC lanes, each taking the q_out of the
// lane before it, which is the sequential prefix update of the optimised
// SCRIMP loop. Purely combinational.
module natsa_dpuu
  import natsa_pkg::*;
(
  input  word_t t_im,
  input  word_t t_jm,
  input  word_t t_i,
  input  word_t t_j,
  input  word_t q_in,
  output word_t q_out
);
  word_t p_new, p_old, delta;
  fp_mul u_mul_new (.a(t_im), .b(t_jm), .y(p_new));
  fp_mul u_mul_old (.a(t_i),  .b(t_j),  .y(p_old));
  fp_add u_sub     (.a(p_new), .b(p_old), .sub(1'b1), .y(delta));
  fp_add u_add     (.a(q_in),  .b(delta), .sub(1'b0), .y(q_out));
endmodule
