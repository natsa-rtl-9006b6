// hbm_chan_model: behavioural model of one HBM channel for the testbenches
// (not synthesizable logic and not a model of DRAM timing). A word array of
// WORDS entries answers each request LAT+1 cycles after it is raised: a read
// returns VEC consecutive words (0 beyond the end), a write stores the
// lanes selected by the mask. Testbenches load and inspect mem directly.
module hbm_chan_model
  import natsa_pkg::*;
#(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT   = 3
) (
  input  logic     clk,
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     rsp_valid,
  output vec_t     rsp_rdata
);
  word_t mem [WORDS];
  int unsigned cnt = 0;
  longint unsigned n_rd = 0, n_wr = 0;

  initial begin
    rsp_valid = 1'b0;
    rsp_rdata = '0;
    for (int unsigned a = 0; a < WORDS; a++) mem[a] = '0;
  end

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (req_valid && !rsp_valid) begin
      if (cnt == LAT) begin
        cnt <= 0;
        rsp_valid <= 1'b1;
        for (int unsigned k = 0; k < VEC; k++) begin
          if (req.addr + k < WORDS) begin
            if (req.we && req.mask[k]) mem[req.addr + k] <= req.wdata[k];
            rsp_rdata[k] <= mem[req.addr + k];
          end else begin
            rsp_rdata[k] <= '0;
          end
        end
        if (req.we) n_wr++; else n_rd++;
      end else begin
        cnt <= cnt + 1;
      end
    end
  end
endmodule
