// bconvu: tree-based basis-conversion unit.
//
// Computes one output coefficient of a fast basis conversion
//     y = sum_i [x_i]_p * c_i  mod p,      i = 0 .. ALPHA-1
// where x_i is the coefficient of limb i of one decomposed group (already
// multiplied by qhat_i^-1 mod q_i, which the INTT folds into its final
// scaling) and c_i = (Q_group / q_i) mod p is the constant of the target
// modulus p. Every cycle the unit takes one coefficient from all ALPHA limbs
// at once, as the paper's tree-based BConvU does. The BrU in front reduces
// each x_i < 2^36 into [0, p); with 36-bit moduli above 2^35 one conditional
// subtraction suffices. Then ALPHA modular multipliers feed a pipelined
// binary tree of modular adders.
//
// Timing: fully pipelined, one result per cycle, latency 1 + ceil(log2 ALPHA)
// cycles (5 for ALPHA = 12). `in_tag` travels with the data.
// The BrU/multiplier/adder-tree structure follows the paper's figure; the
// register placement and the folding of qhat^-1 into the INTT are this
// design's own choices.
module bconvu
  import he2_pkg::*;
#(
  parameter int ALPHA = 12,
  parameter int TAGW  = 16
)(
  input  logic            clk,
  input  logic            rst_n,
  input  modulus_t        m,            // target modulus p
  input  word_t           c   [ALPHA],  // per-limb constants mod p
  input  logic            in_valid,
  input  word_t           x   [ALPHA],
  input  logic [TAGW-1:0] in_tag,
  output logic            out_valid,
  output word_t           y,
  output logic [TAGW-1:0] out_tag
);
  localparam int LEV = (ALPHA > 1) ? $clog2(ALPHA) : 1;
  localparam int PAD = 2**LEV;

  word_t           t   [LEV+1][PAD];
  logic [LEV:0]    v;
  logic [TAGW-1:0] tg  [LEV+1];

  // stage 0: BrU + constant multiplication
  always_ff @(posedge clk) begin
    for (int i = 0; i < PAD; i++) begin
      if (i < ALPHA) begin
        automatic word_t xr = (x[i] >= m.q) ? x[i] - m.q : x[i];
        t[0][i] <= mod_mul(xr, c[i], m);
      end else t[0][i] <= '0;
    end
    tg[0] <= in_tag;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v[0] <= 1'b0; else v[0] <= in_valid;

  // adder tree
  for (genvar l = 0; l < LEV; l++) begin : g_lev
    always_ff @(posedge clk) begin
      for (int i = 0; i < PAD; i++)
        t[l+1][i] <= (i < (PAD >> (l+1))) ? mod_add(t[l][2*i], t[l][2*i+1], m.q) : '0;
      tg[l+1] <= tg[l];
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) v[l+1] <= 1'b0; else v[l+1] <= v[l];
  end

  assign y         = t[LEV][0];
  assign out_valid = v[LEV];
  assign out_tag   = tg[LEV];
endmodule
