// natsa_pkg: types and constants shared by the NATSA processing units.
//
// Data are IEEE-754 single-precision words (the single-precision variant of
// the accelerator). A PU moves VEC consecutive 32-bit words per memory access;
// VEC is also the number of diagonal cells a PU processes per batch. The
// batch width is this design's choice. Addresses are word addresses.
//
// Scratchpad word map (written by the host before start, read by the PU):
//   SPM_M      window length m (integer)
//   SPM_MF     window length m (float)
//   SPM_NPROF  profile length n-m+1
//   SPM_T      base of the time series T
//   SPM_MU     base of the means mu
//   SPM_SG     base of the standard deviations sigma
//   SPM_PP     base of this PU's private profile PP
//   SPM_II     base of this PU's private profile index II
//   SPM_DIAG   base of this PU's list of diagonal start columns
//   SPM_NDIAG  number of diagonals in that list
// The map itself is this design's own; the paper only says the scratchpad
// holds the window size and configuration parameters.
package natsa_pkg;

  localparam int unsigned VEC = 4;     // lanes per PU batch
  localparam int unsigned DW  = 32;    // data word (binary32)
  localparam int unsigned AW  = 32;    // word address width
  localparam int unsigned SPM_AW = 8;  // 256 words = 1 KB scratchpad

  typedef logic [DW-1:0]          word_t;
  typedef logic [AW-1:0]          addr_t;
  typedef logic [VEC-1:0][DW-1:0] vec_t;
  typedef logic [VEC-1:0]         lane_mask_t;

  // One memory access of a PU: a read of VEC words starting at addr, or a
  // write of the lanes selected by mask.
  typedef struct packed {
    logic       we;
    addr_t      addr;
    lane_mask_t mask;
    vec_t       wdata;
  } mem_req_t;

  typedef enum logic [SPM_AW-1:0] {
    SPM_M     = 8'd0,
    SPM_MF    = 8'd1,
    SPM_NPROF = 8'd2,
    SPM_T     = 8'd3,
    SPM_MU    = 8'd4,
    SPM_SG    = 8'd5,
    SPM_PP    = 8'd6,
    SPM_II    = 8'd7,
    SPM_DIAG  = 8'd8,
    SPM_NDIAG = 8'd9
  } spm_word_e;

  localparam int unsigned SPM_NCFG = 10;

  localparam word_t FP_POS_INF = 32'h7f80_0000;

endpackage
