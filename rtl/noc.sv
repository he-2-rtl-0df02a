// noc: crossbar between xPU clients and the scratchpad banks.
//
// Each of NCLIENT clients may issue one row request per cycle to a global
// row address. The address is interleaved over the banks: bank = addr mod
// NBANK, row = addr / NBANK, so consecutive rows of a polynomial fall into
// consecutive banks. Each bank grants one requester per cycle with a
// rotating priority that starts after the client granted last. A client
// sees `gnt` in the cycle of its request; an ungranted client must hold its
// request. Read data return to the requesting client two cycles after the
// grant (one for the bank, one for the return register) with `rvalid`.
// The paper names the NoC only; the crossbar, the interleaving and the
// arbitration are this design's own.
//
// Lint: the loop variable `c` is an int; only its low bits index the clients.
module noc
  import he2_pkg::*;
#(
  parameter int NCLIENT = 25,
  parameter int NBANK   = 250,
  parameter int DEPTH   = 2447,
  parameter int ROW     = 32,
  parameter int GAW     = 20,              // global row address width
  localparam int AW     = $clog2(DEPTH),
  localparam int BW     = $clog2(NBANK),
  localparam int CW     = (NCLIENT > 1) ? $clog2(NCLIENT) : 1
)(
  input  logic           clk,
  input  logic           rst_n,
  // clients
  input  logic           c_req   [NCLIENT],
  input  logic           c_we    [NCLIENT],
  input  logic [GAW-1:0] c_addr  [NCLIENT],
  input  word_t          c_wdata [NCLIENT][ROW],
  output logic           c_gnt   [NCLIENT],
  output logic           c_rvalid[NCLIENT],
  output word_t          c_rdata [NCLIENT][ROW],
  // banks
  output logic           b_en    [NBANK],
  output logic           b_we    [NBANK],
  output logic [AW-1:0]  b_addr  [NBANK],
  output word_t          b_wdata [NBANK][ROW],
  input  logic           b_rvalid[NBANK],
  input  word_t          b_rdata [NBANK][ROW]
);
  logic [BW-1:0] cbank [NCLIENT];
  logic [AW-1:0] crow  [NCLIENT];
  logic [CW-1:0] last  [NBANK];
  logic [CW-1:0] sel   [NBANK];
  logic          selv  [NBANK];
  logic [CW-1:0] rd_owner [NBANK];     // client of the read in flight

  always_comb
    for (int c = 0; c < NCLIENT; c++) begin
      cbank[c] = BW'(c_addr[c] % GAW'(NBANK));
      crow[c]  = AW'(c_addr[c] / GAW'(NBANK));
    end

  // per-bank rotating-priority arbitration
  always_comb begin
    for (int c = 0; c < NCLIENT; c++) c_gnt[c] = 1'b0;
    for (int b = 0; b < NBANK; b++) begin
      selv[b] = 1'b0;
      sel[b]  = '0;
      for (int k = 1; k <= NCLIENT; k++) begin
        automatic int c = (int'(last[b]) + k) % NCLIENT;
        if (!selv[b] && c_req[c] && cbank[c] == BW'(b)) begin
          selv[b] = 1'b1;
          sel[b]  = CW'(c);
        end
      end
      if (selv[b]) c_gnt[sel[b]] = 1'b1;
      b_en[b]    = selv[b];
      b_we[b]    = c_we[sel[b]];
      b_addr[b]  = crow[sel[b]];
      b_wdata[b] = c_wdata[sel[b]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANK; b++) begin
        last[b] <= CW'(NCLIENT - 1); rd_owner[b] <= '0;
      end
      for (int c = 0; c < NCLIENT; c++) c_rvalid[c] <= 1'b0;
    end else begin
      for (int b = 0; b < NBANK; b++)
        if (selv[b]) begin
          last[b] <= sel[b];
          rd_owner[b] <= sel[b];
        end
      for (int c = 0; c < NCLIENT; c++) c_rvalid[c] <= 1'b0;
      for (int b = 0; b < NBANK; b++)
        if (b_rvalid[b]) begin
          c_rvalid[rd_owner[b]] <= 1'b1;
          c_rdata[rd_owner[b]]  <= b_rdata[b];
        end
    end
  end
endmodule
