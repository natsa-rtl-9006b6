// natsa_chan_ctrl: memory controller that shares one HBM channel among the
// NPORT processing units attached to it.
//
// Arbitration is round robin with one access in flight: in its idle cycle the
// controller picks the first requesting port at or after the port behind the
// last winner, then forwards that port's request to the channel until the
// channel answers, and routes the one-cycle response back to that port. The
// read data bus is shared by all ports; only the winner sees rsp_valid.
//
// Handshake (both sides): a requester raises req_valid with a stable request
// and holds both until it sees rsp_valid for one cycle. The paper states only
// that each PU reaches its HBM channel through a controller; the policy, the
// handshake and the single outstanding access are this design's choices.
module natsa_chan_ctrl
  import natsa_pkg::*;
#(
  parameter int unsigned NPORT = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processing-unit side
  input  logic     [NPORT-1:0]  pu_req_valid,
  input  mem_req_t [NPORT-1:0]  pu_req,
  output logic     [NPORT-1:0]  pu_rsp_valid,
  output vec_t                  pu_rsp_rdata,
  // channel side
  output logic                  ch_req_valid,
  output mem_req_t              ch_req,
  input  logic                  ch_rsp_valid,
  input  vec_t                  ch_rsp_rdata
);
  localparam int unsigned PW = (NPORT > 1) ? $clog2(NPORT) : 1;

  logic          busy;
  logic [PW-1:0] grant, rr, pick;
  logic          any;

  // Round-robin choice among the requesting ports, starting at rr.
  always_comb begin
    pick = grant;
    any  = 1'b0;
    for (int unsigned o = 0; o < NPORT; o++) begin
      int unsigned p;
      p = (int'(rr) + o) % NPORT;
      if (!any && pu_req_valid[p]) begin
        any  = 1'b1;
        pick = PW'(p);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      grant <= '0;
      rr    <= '0;
    end else if (!busy) begin
      if (any) begin
        busy  <= 1'b1;
        grant <= pick;
      end
    end else if (ch_rsp_valid) begin
      busy <= 1'b0;
      rr   <= (int'(grant) == NPORT-1) ? '0 : grant + 1'b1;
    end
  end

  assign ch_req_valid = busy;
  assign ch_req       = pu_req[grant];
  assign pu_rsp_rdata = ch_rsp_rdata;

  always_comb begin
    pu_rsp_valid = '0;
    if (busy && ch_rsp_valid) pu_rsp_valid[grant] = 1'b1;
  end

  // The channel answers only an access that is in flight, and the winner
  // keeps its request up until then.
  a_rsp_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    ch_rsp_valid |-> busy);
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> pu_req_valid[grant]);
endmodule
