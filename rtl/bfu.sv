// bfu: radix-2 butterfly shared by the forward and inverse NTT.
//
// One modular multiplier, one modular adder and one modular subtractor with
// input and output multiplexers, as in the paper's radix-2 INTT/NTT BFU.
//   NTT  path (Cooley-Tukey):      x = a + w*b,  y = a - w*b
//   INTT path (Gentleman-Sande):   x = a + b,    y = (a - b)*w
// The multiplexer in front of the multiplier selects b (NTT) or a-b (INTT).
// Purely combinational; the radix-16 PE that holds eight of these registers
// each column. The exact multiplexer arrangement in the paper's drawing is
// not reproduced, only the two paths it labels.
module bfu
  import he2_pkg::*;
(
  input  logic     mode,     // 0: NTT, 1: INTT
  input  word_t    a,
  input  word_t    b,
  input  word_t    w,
  input  modulus_t m,
  output word_t    x,
  output word_t    y
);
  word_t diff, mul_in, prod, sum_ab;

  always_comb begin
    diff   = mod_sub(a, b, m.q);
    sum_ab = mod_add(a, b, m.q);
    mul_in = mode ? diff : b;
    prod   = mod_mul(mul_in, w, m);
    if (mode) begin
      x = sum_ab;
      y = prod;
    end else begin
      x = mod_add(a, prod, m.q);
      y = mod_sub(a, prod, m.q);
    end
  end
endmodule
