// natsa_top: the NATSA accelerator: NUM_PU processing units on NUM_CH HBM
// channels, NUM_PU/NUM_CH units per channel controller.
//
// Each PU computes the diagonals of the distance matrix that the host has
// listed for it, working on its own copy of the profile (PP) and profile
// index (II) in HBM, so the PUs never synchronise with each other. PU p is
// attached to the controller of channel p / (NUM_PU/NUM_CH).
//
// Host interface: cfg_we with cfg_pu / cfg_addr / cfg_wdata writes one word
// of a PU's scratchpad; start (one cycle) starts every PU; done rises when all
// PUs have finished and stays high until the next start; pu_done shows each
// PU. The host computes mu and sigma, builds the diagonal lists, initialises
// the private profiles and reduces them afterwards; it is not part of this
// module. The HBM itself and its physical interface are outside too: each
// channel is a request/response port (see natsa_chan_ctrl for the handshake).
//
// 48 PUs and 8 channels are the paper's numbers; the host interface is this
// design's own.
module natsa_top
  import natsa_pkg::*;
#(
  parameter int unsigned NUM_PU = 48,
  parameter int unsigned NUM_CH = 8,
  parameter int unsigned PUW    = $clog2(NUM_PU)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host
  input  logic                   cfg_we,
  input  logic [PUW-1:0]         cfg_pu,
  input  logic [SPM_AW-1:0]      cfg_addr,
  input  word_t                  cfg_wdata,
  input  logic                   start,
  output logic                   done,
  output logic [NUM_PU-1:0]      pu_done,
  // HBM channels
  output logic     [NUM_CH-1:0]  ch_req_valid,
  output mem_req_t [NUM_CH-1:0]  ch_req,
  input  logic     [NUM_CH-1:0]  ch_rsp_valid,
  input  vec_t     [NUM_CH-1:0]  ch_rsp_rdata
);
  localparam int unsigned PPC = NUM_PU / NUM_CH;   // PUs per channel

  initial assert (NUM_PU % NUM_CH == 0) else $error("NUM_PU must be a multiple of NUM_CH");

  logic     [NUM_PU-1:0] pu_req_valid, pu_rsp_valid;
  mem_req_t [NUM_PU-1:0] pu_req;
  vec_t     [NUM_CH-1:0] grp_rdata;

  for (genvar p = 0; p < NUM_PU; p++) begin : g_pu
    natsa_pu u_pu (
      .clk           (clk),
      .rst_n         (rst_n),
      .spm_we        (cfg_we && (int'(cfg_pu) == p)),
      .spm_addr      (cfg_addr),
      .spm_wdata     (cfg_wdata),
      .start         (start),
      .done          (pu_done[p]),
      .mem_req_valid (pu_req_valid[p]),
      .mem_req       (pu_req[p]),
      .mem_rsp_valid (pu_rsp_valid[p]),
      .mem_rsp_rdata (grp_rdata[p / PPC])
    );
  end

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    natsa_chan_ctrl #(.NPORT(PPC)) u_ctrl (
      .clk          (clk),
      .rst_n        (rst_n),
      .pu_req_valid (pu_req_valid[c*PPC +: PPC]),
      .pu_req       (pu_req[c*PPC +: PPC]),
      .pu_rsp_valid (pu_rsp_valid[c*PPC +: PPC]),
      .pu_rsp_rdata (grp_rdata[c]),
      .ch_req_valid (ch_req_valid[c]),
      .ch_req       (ch_req[c]),
      .ch_rsp_valid (ch_rsp_valid[c]),
      .ch_rsp_rdata (ch_rsp_rdata[c])
    );
  end

  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              running <= 1'b0;
    else if (start)          running <= 1'b1;
    else if (&pu_done)       running <= 1'b0;
  end
  assign done = !running && !start && (&pu_done);
endmodule
