// xmu_pe: bank-level near-memory processing element of the xMU.
//
// One PE sits at the column decoder of each HBM bank. It takes 256-bit
// fetches from the bank's global row buffer; four 36-bit words of a fetch
// are processed in parallel (four lanes, 144 bits). Per lane a modular
// multiplier (the PMul region) feeds a modular adder (the IP/CAdd region);
// the adder's result is fed back (144 bits) so that an inner product
// accumulates over successive beats, and the accumulated result can be fed
// back once more into the multipliers to multiply it by a plaintext: this is
// the MemOp fusion that turns "Rd Ct, Rd evk, IP, Wr Ct, Rd Ct, Rd Pt, PMul,
// Wr Ct" into "Rd Ct, Rd evk, IP, Rd Pt, PMul, Wr Ct" without writing the
// intermediate back to the bank.
//
// Operations (one beat = operands a and b, four words each):
//   XM_CADD / XM_CSUB / XM_PMUL : y = a op b, every beat
//   XM_IP      : acc = (first ? 0 : acc) + a*b; y = acc on the `last` beat
//   XM_IP_PMUL : like XM_IP on the beats before `last`; on the `last` beat
//                a carries the plaintext and y = acc * a
//   XM_BYPASS  : y = a unchanged (row-buffer data to the bank-group bus,
//                used by inter-bank moves such as automorphism)
// Words sit in the low 144 bits of a 256-bit beat (word k at bits 36k+35..36k).
// One beat per cycle, result registered: out_valid one cycle after a beat
// that produces output.
// From the paper: the 256-bit row-buffer and bus widths, the four 36-bit
// lanes, the 144-bit feedback, the PMul and IP/CAdd regions, the bypass and
// the fused IP+PMul. This design's own: one adder per lane (the drawing has
// three adders), the beat protocol, the packing of words in a beat.
module xmu_pe
  import he2_pkg::*;
#(
  parameter int LN = 4                  // 36-bit lanes per 256-bit beat
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  xm_op_t       op,
  input  modulus_t     m,
  input  logic         first,
  input  logic         last,
  input  logic [255:0] a,
  input  logic [255:0] b,
  output logic         out_valid,
  output logic [255:0] y
);
  word_t av [LN], bv [LN], acc [LN], prod [LN], mul_a [LN], sum [LN];
  logic  fused_tail;

  assign fused_tail = (op == XM_IP_PMUL) && last;

  always_comb begin
    for (int k = 0; k < LN; k++) begin
      av[k]    = a[36*k +: 36];
      bv[k]    = b[36*k +: 36];
      // feedback path: the accumulator replaces operand b on the fused tail
      mul_a[k] = fused_tail ? acc[k] : bv[k];
      prod[k]  = mod_mul(av[k], mul_a[k], m);
      sum[k]   = mod_add(first ? '0 : acc[k], prod[k], m.q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      for (int k = 0; k < LN; k++) acc[k] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        unique case (op)
          XM_CADD, XM_CSUB, XM_PMUL: begin
            out_valid <= 1'b1;
            y <= '0;
            for (int k = 0; k < LN; k++)
              y[36*k +: 36] <= (op == XM_CADD) ? mod_add(av[k], bv[k], m.q) :
                               (op == XM_CSUB) ? mod_sub(av[k], bv[k], m.q) : prod[k];
          end
          XM_IP, XM_IP_PMUL: begin
            if (!fused_tail)
              for (int k = 0; k < LN; k++) acc[k] <= sum[k];
            if (last) begin
              out_valid <= 1'b1;
              y <= '0;
              for (int k = 0; k < LN; k++) y[36*k +: 36] <= fused_tail ? prod[k] : sum[k];
            end
          end
          XM_BYPASS: begin
            out_valid <= 1'b1;
            y <= a;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
