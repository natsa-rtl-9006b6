// natsa_spm: the 1 KB scratchpad of a PU (256 words of 32 bits by default).
//
// One write port for the host, which stores the run configuration (window
// length, base addresses, diagonal count; word map in natsa_pkg), and one
// read port for the PU's control unit with one cycle of latency. The size is
// the paper's; the port arrangement is this design's own.
module natsa_spm #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  logic [31:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
