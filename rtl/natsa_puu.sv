// natsa_puu: Profile Update Unit, one lane.
//
// Compares a new distance d with the stored profile value pp_old. The stored
// pair (pp_old, ii_old) is kept when pp_old <= d, otherwise it is replaced by
// (d, idx); upd tells the PU which lanes to write back. Keeping the old entry
// on a tie matches both the "<=" comparator of the paper's drawing and the
// strict "d < P" test of the algorithm. Lanes with valid low never update.
// Purely combinational.
module natsa_puu
  import natsa_pkg::*;
(
  input  logic  valid,
  input  word_t d,
  input  word_t idx,
  input  word_t pp_old,
  input  word_t ii_old,
  output word_t pp_new,
  output word_t ii_new,
  output logic  upd
);
  logic d_lt;
  fp_lt u_lt (.a(d), .b(pp_old), .lt(d_lt));
  assign upd    = valid && d_lt;
  assign pp_new = upd ? d   : pp_old;
  assign ii_new = upd ? idx : ii_old;
endmodule
