// ewe_engine: feeds the element-wise engine from the scratchpad.
//
// Executes y = a op b over nrows rows of the scratchpad, where a, b and y are
// row ranges (a_base+i, b_base+i, y_base+i). It works in chunks of
// R = LANES/ROW rows so that one EWEU operation covers all lanes: read R rows
// of a, read R rows of b (through one NoC client port, request held until
// granted, data two cycles later), one EWEU cycle, write R rows. Supported
// here are the single-polynomial forms of EW_PMUL (b is the plaintext),
// EW_CADD and EW_CSUB; the result is the EWEU's y0 output. `nrows` must be a
// multiple of R. The chunked gathering is this design's own way of driving the
// EWEU; the paper does not describe how the EWEU is fed.
module ewe_engine
  import he2_pkg::*;
#(
  parameter int LANES = 512,
  parameter int ROW   = 32,
  parameter int GAW   = 20
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  ew_op_t         op,
  input  modulus_t       m,
  input  logic [GAW-1:0] a_base, b_base, y_base, nrows,
  output logic           busy,
  output logic           done,
  // NoC client
  output logic           c_req,
  output logic           c_we,
  output logic [GAW-1:0] c_addr,
  output word_t          c_wdata [ROW],
  input  logic           c_gnt,
  input  logic           c_rvalid,
  input  word_t          c_rdata [ROW],
  // EWEU
  output logic           e_valid,
  output ew_op_t         e_op,
  output modulus_t       e_m,
  output word_t          e_a [LANES],
  output word_t          e_b [LANES],
  input  logic           e_ovalid,
  input  word_t          e_y [LANES]
);
  localparam int R  = LANES / ROW;
  localparam int RW = $clog2(R + 1);

  typedef enum logic [2:0] {I_IDLE, I_RDA, I_RDB, I_EXE, I_WAIT, I_WR} st_t;
  st_t st;
  ew_op_t         op_r;
  modulus_t       m_r;
  logic [GAW-1:0] ab, bb, yb, n, chunk;
  logic [RW-1:0]  iss, got;
  word_t          bufa [LANES], bufb [LANES], bufy [LANES];

  always_comb begin
    c_req = 1'b0; c_we = 1'b0; c_addr = '0;
    for (int i = 0; i < ROW; i++) c_wdata[i] = bufy[int'(iss)*ROW + i];
    unique case (st)
      I_RDA: begin c_req = (iss != RW'(R)); c_addr = ab + chunk + GAW'(iss); end
      I_RDB: begin c_req = (iss != RW'(R)); c_addr = bb + chunk + GAW'(iss); end
      I_WR:  begin c_req = 1'b1; c_we = 1'b1; c_addr = yb + chunk + GAW'(iss); end
      default: ;
    endcase
  end

  assign e_valid = (st == I_EXE);
  assign e_op    = op_r;
  assign e_m     = m_r;
  assign e_a     = bufa;
  assign e_b     = bufb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; done <= 1'b0; op_r <= EW_CADD; m_r <= '0;
      ab <= '0; bb <= '0; yb <= '0; n <= '0; chunk <= '0; iss <= '0; got <= '0;
      for (int i = 0; i < LANES; i++) begin bufa[i] <= '0; bufb[i] <= '0; bufy[i] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        I_IDLE: if (start) begin
          op_r <= op; m_r <= m; ab <= a_base; bb <= b_base; yb <= y_base; n <= nrows;
          chunk <= '0; iss <= '0; got <= '0; st <= I_RDA;
        end
        I_RDA, I_RDB: begin
          if (c_req && c_gnt) iss <= iss + 1'b1;
          if (c_rvalid) begin
            for (int i = 0; i < ROW; i++)
              if (st == I_RDA) bufa[int'(got)*ROW + i] <= c_rdata[i];
              else             bufb[int'(got)*ROW + i] <= c_rdata[i];
            got <= got + 1'b1;
            if (got == RW'(R - 1)) begin
              iss <= '0; got <= '0;
              st  <= (st == I_RDA) ? I_RDB : I_EXE;
            end
          end
        end
        I_EXE: st <= I_WAIT;
        I_WAIT: if (e_ovalid) begin bufy <= e_y; st <= I_WR; end
        I_WR: if (c_gnt) begin
          if (iss == RW'(R - 1)) begin
            iss <= '0;
            if (chunk + GAW'(R) >= n) begin st <= I_IDLE; done <= 1'b1; end
            else begin chunk <= chunk + GAW'(R); st <= I_RDA; end
          end else iss <= iss + 1'b1;
        end
        default: st <= I_IDLE;
      endcase
    end
  end
  assign busy = (st != I_IDLE);
endmodule
