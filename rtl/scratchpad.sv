// scratchpad: banked on-chip scratchpad memory of the xPU.
//
// NBANK independent single-ported banks, each DEPTH rows of ROW 36-bit
// words. Every bank accepts one read or one write of a whole row per cycle;
// read data appear one cycle after the request (rvalid). The defaults give
// the large-memory configuration: 250 banks x 32 words x 4.5 bytes per cycle
// = 36,000 bytes per cycle, the paper's 36 TB/s at 1 GHz, and
// 250 x 2447 rows x 32 words x 36 bits = 84.0 MiB (the small configuration
// is DEPTH = 1282, 44 MiB). Bank count and row width are this design's own
// choice that meets the stated bandwidth; the SRAM macros themselves are
// represented by plain arrays.
module scratchpad
  import he2_pkg::*;
#(
  parameter int NBANK = 250,
  parameter int DEPTH = 2447,
  parameter int ROW   = 32,
  localparam int AW   = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en    [NBANK],
  input  logic          we    [NBANK],
  input  logic [AW-1:0] addr  [NBANK],
  input  word_t         wdata [NBANK][ROW],
  output logic          rvalid[NBANK],
  output word_t         rdata [NBANK][ROW]
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    word_t mem [DEPTH][ROW];
    always_ff @(posedge clk) begin
      if (en[b] && we[b]) mem[addr[b]] <= wdata[b];
      if (en[b] && !we[b]) rdata[b] <= mem[addr[b]];
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) rvalid[b] <= 1'b0; else rvalid[b] <= en[b] && !we[b];
  end
endmodule
