// natsa_dpu: Dot Product Unit. Computes the dot product of the first pair of
// windows of a diagonal, q = sum_{k<m} t_{i+k} * t_{j+k}.
//
// Each beat brings VEC elements of each window (ta, tb). The VEC products
// pass through a chain of adders into one accumulator register, the
// "reg"/"+"/"x" loop of the paper's DPU drawing with the multiplier
// replicated per lane. Lanes whose mask bit is clear add nothing, which is
// how the last, partial beat of a window of length m is handled; the control
// unit counts m and builds the mask.
//
// Interface and timing: clear zeroes the accumulator on the next edge;
// valid adds one beat on the next edge; q is the registered sum. A window of
// m elements takes ceil(m/VEC) beats.
module natsa_dpu
  import natsa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       valid,
  input  lane_mask_t mask,
  input  vec_t       ta,
  input  vec_t       tb,
  output word_t      q
);
  word_t prod [VEC];
  word_t chain [VEC+1];

  assign chain[0] = q;
  for (genvar k = 0; k < VEC; k++) begin : g_lane
    word_t term;
    fp_mul u_mul (.a(ta[k]), .b(tb[k]), .y(prod[k]));
    assign term = mask[k] ? prod[k] : '0;
    fp_add u_add (.a(chain[k]), .b(term), .sub(1'b0), .y(chain[k+1]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (clear) q <= '0;
    else if (valid) q <= chain[VEC];
  end
endmodule
