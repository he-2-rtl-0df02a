// eweu: element-wise engine of the xPU.
//
// LANES identical lanes, each with four modular multipliers and two modular
// adders (the paper's EWEU unit, taken from SHARP at a quarter of its
// parallelism). All lanes execute the same operation on the same RNS limb
// (modulus m). Per lane, with ciphertext words (a0, a1), a second operand
// (b0, b1) and constants / key words (c0, c1):
//   EW_PMUL   : y0 = a0*c0,        y1 = a1*c0
//   EW_CADD   : y0 = a0+b0,        y1 = a1+b1
//   EW_CSUB   : y0 = a0-b0,        y1 = a1-b1
//   EW_IPMAC  : y0 = b0 + a0*c0,   y1 = b1 + a0*c1     (inner-product step)
//   EW_TENSOR : y0 = a0*c0, y1 = a0*c1 + a1*c0, y2 = a1*c1
// The tensor product is the one operation that uses all four multipliers.
// Fully pipelined, one vector per cycle, results one cycle after the inputs.
// The operation set is this design's reading of "element-wise operations";
// the unit's resources (4 multipliers, 2 adders per lane) follow the paper.
module eweu
  import he2_pkg::*;
#(
  parameter int LANES = 512
)(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  ew_op_t   op,
  input  modulus_t m,
  input  word_t    a0 [LANES],
  input  word_t    a1 [LANES],
  input  word_t    b0 [LANES],
  input  word_t    b1 [LANES],
  input  word_t    c0 [LANES],
  input  word_t    c1 [LANES],
  output logic     out_valid,
  output word_t    y0 [LANES],
  output word_t    y1 [LANES],
  output word_t    y2 [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    word_t p0, p1, p2, p3, mx0, mx1;
    always_comb begin
      // multiplier operand selection
      mx0 = a0[l];
      mx1 = (op == EW_PMUL) ? a1[l] : a0[l];
      p0  = mod_mul(mx0, c0[l], m);
      p1  = mod_mul(mx1, (op == EW_PMUL) ? c0[l] : c1[l], m);
      p2  = mod_mul(a1[l], c0[l], m);
      p3  = mod_mul(a1[l], c1[l], m);
    end
    always_ff @(posedge clk) begin
      y2[l] <= '0;
      unique case (op)
        EW_PMUL:   begin y0[l] <= p0; y1[l] <= p1; end
        EW_CADD:   begin y0[l] <= mod_add(a0[l], b0[l], m.q); y1[l] <= mod_add(a1[l], b1[l], m.q); end
        EW_CSUB:   begin y0[l] <= mod_sub(a0[l], b0[l], m.q); y1[l] <= mod_sub(a1[l], b1[l], m.q); end
        EW_IPMAC:  begin y0[l] <= mod_add(b0[l], p0, m.q); y1[l] <= mod_add(b1[l], p1, m.q); end
        EW_TENSOR: begin y0[l] <= p0; y1[l] <= mod_add(p1, p2, m.q); y2[l] <= p3; end
        default:   begin y0[l] <= '0; y1[l] <= '0; end
      endcase
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0; else out_valid <= in_valid;
endmodule
