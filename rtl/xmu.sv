// xmu: the near-memory side, one PE per HBM bank driven in SIMD.
//
// The DRAM banks themselves are outside this module (bk_* ports, one set per
// bank: two 256-bit read ports with one cycle of latency and one write port).
// The PEs sit at the banks' column decoders and all execute the same
// command, each on its own bank, because every polynomial is spread row-major
// over all banks: beat (4 words) number j of the HBM address space lives in
// bank j mod NPE at address j / NPE. A limb of N words is N/(4*NPE) beats per
// bank.
//
// Command (cmd_start with the fields below, cmd_done when finished):
//   for k < nbeat:                       (beats per bank)
//     for g < nacc:  a = A[a_base + g*a_stride + k], b = B[b_base + g*b_stride + k]
//     XM_IP_PMUL adds one beat with a = A[p_base + k]      (plaintext)
//     result written to y_base + k
// so XM_IP with nacc = dnum computes the inner product sum_g ct_g * evk_g,
// XM_IP_PMUL fuses the following plaintext multiplication, and the
// element-wise operations use nacc = 1.
//
// Host-side HBM port: the xPU writes and reads rows of 32 words (8 beats,
// which land in 8 consecutive banks). While a command runs the banks are
// owned by the PEs and hbm_ready is low: MemOps in the xMU and xPU transfers
// do not overlap, as in the paper.
// Paper: bank-level PEs, SIMD operation, row-major layout over all banks,
// MemOp fusion. This design's own: the command format, the two read ports
// per bank (standing for the PE's local buffer that holds one operand while
// the other is fetched), the host-port mapping. PEs run at 450 MHz in the
// paper; here they share the one clock of the module.
//
// Lint: `pi` (the bank that holds a host-read beat) is an int index; only its
// low log2(NPE) bits are used.
module xmu
  import he2_pkg::*;
#(
  parameter int NPE = 512,
  parameter int BAW = 20,       // bank address width (256-bit beats)
  parameter int HAW = 26,       // host row address width (32-word rows)
  localparam int ROW = 32
)(
  input  logic           clk,
  input  logic           rst_n,
  // command
  input  logic           cmd_start,
  input  xm_op_t         cmd_op,
  input  modulus_t       cmd_m,
  input  logic [BAW-1:0] a_base, b_base, p_base, y_base, a_stride, b_stride,
  input  logic [7:0]     nacc,
  input  logic [BAW-1:0] nbeat,
  output logic           busy,
  output logic           cmd_done,
  // host (xPU) side
  output logic           hbm_ready,
  input  logic           hbm_wvalid,
  input  logic [HAW-1:0] hbm_waddr,
  input  word_t          hbm_wdata [ROW],
  input  logic           hbm_rreq,
  input  logic [HAW-1:0] hbm_raddr,
  output logic           hbm_rvalid,
  output word_t          hbm_rdata [ROW],
  // banks
  output logic           bk_re    [NPE],
  output logic [BAW-1:0] bk_raddr_a [NPE],
  output logic [BAW-1:0] bk_raddr_b [NPE],
  input  logic [255:0]   bk_rdata_a [NPE],
  input  logic [255:0]   bk_rdata_b [NPE],
  output logic           bk_we    [NPE],
  output logic [BAW-1:0] bk_waddr [NPE],
  output logic [255:0]   bk_wdata [NPE],
  output logic [31:0]    fused_ops
);
  localparam int BPR = ROW / 4;                  // beats per host row
  localparam int PW  = (NPE > 1) ? $clog2(NPE) : 1;

  // ---------------- command sequencer ----------------
  xm_op_t         op_r;
  modulus_t       m_r;
  logic [BAW-1:0] ab, bb, pb, yb, as, bs, nb;
  logic [7:0]     na;
  logic [BAW-1:0] k;
  logic [7:0]     g;
  logic           rd_v, rd_first, rd_last;   // beat whose read was issued
  logic           pe_ov [NPE];
  logic [255:0]   pe_y  [NPE];
  logic [BAW-1:0] wk;                        // write index of the PE output
  logic           issuing;
  logic [7:0]     nbeats_per_out;

  assign nbeats_per_out = (op_r == XM_IP_PMUL) ? na + 8'd1 : na;
  assign issuing        = busy && (k != nb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cmd_done <= 1'b0; op_r <= XM_CADD; m_r <= '0;
      ab <= '0; bb <= '0; pb <= '0; yb <= '0; as <= '0; bs <= '0; nb <= '0; na <= '0;
      k <= '0; g <= '0; rd_v <= 1'b0; rd_first <= 1'b0; rd_last <= 1'b0;
      wk <= '0; fused_ops <= '0;
    end else begin
      cmd_done <= 1'b0;
      rd_v <= 1'b0;
      if (cmd_start && !busy) begin
        busy <= 1'b1; op_r <= cmd_op; m_r <= cmd_m;
        ab <= a_base; bb <= b_base; pb <= p_base; yb <= y_base;
        as <= a_stride; bs <= b_stride; nb <= nbeat; na <= nacc;
        k <= '0; g <= '0; wk <= '0;
      end else if (busy) begin
        if (issuing) begin
          rd_v     <= 1'b1;
          rd_first <= (g == 0);
          rd_last  <= (g == nbeats_per_out - 1);

          if (g == nbeats_per_out - 1) begin g <= '0; k <= k + 1'b1; end
          else g <= g + 1'b1;
        end
        if (pe_ov[0]) begin
          wk <= wk + 1'b1;
          if (op_r == XM_IP_PMUL) fused_ops <= fused_ops + 1;
          if (wk == nb - 1) begin busy <= 1'b0; cmd_done <= 1'b1; end
        end
      end
    end
  end

  // ---------------- PEs and bank ports ----------------
  logic [HAW-1:0] hr_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin hbm_rvalid <= 1'b0; hr_q <= '0; end
    else begin hbm_rvalid <= hbm_rreq && !busy; hr_q <= hbm_raddr; end

  assign hbm_ready = !busy;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic tail;
    assign tail = (op_r == XM_IP_PMUL) && (g == na);
    always_comb begin
      // defaults: host port
      automatic logic [HAW+PW:0] gbw = (HAW+PW+1)'({hbm_waddr, ($clog2(BPR))'(0)});
      automatic logic [HAW+PW:0] gbr = (HAW+PW+1)'({hbm_raddr, ($clog2(BPR))'(0)});
      bk_re[p]      = 1'b0;
      bk_raddr_a[p] = '0;
      bk_raddr_b[p] = '0;
      bk_we[p]      = 1'b0;
      bk_waddr[p]   = '0;
      bk_wdata[p]   = '0;
      if (busy) begin
        bk_re[p]      = issuing;
        bk_raddr_a[p] = tail ? pb + k : ab + BAW'(g) * as + k;
        bk_raddr_b[p] = bb + BAW'(g) * bs + k;
        bk_we[p]      = pe_ov[p];
        bk_waddr[p]   = yb + wk;
        bk_wdata[p]   = pe_y[p];
      end else begin
        for (int j = 0; j < BPR; j++) begin
          automatic logic [HAW+PW:0] bw = gbw + (HAW+PW+1)'(j);
          automatic logic [HAW+PW:0] br = gbr + (HAW+PW+1)'(j);
          if (hbm_wvalid && (bw % (HAW+PW+1)'(NPE)) == (HAW+PW+1)'(p)) begin
            bk_we[p]    = 1'b1;
            bk_waddr[p] = BAW'(bw / (HAW+PW+1)'(NPE));
            bk_wdata[p] = {112'd0, hbm_wdata[4*j+3], hbm_wdata[4*j+2], hbm_wdata[4*j+1], hbm_wdata[4*j]};
          end
          if (hbm_rreq && (br % (HAW+PW+1)'(NPE)) == (HAW+PW+1)'(p)) begin
            bk_re[p]      = 1'b1;
            bk_raddr_a[p] = BAW'(br / (HAW+PW+1)'(NPE));
          end
        end
      end
    end

    xmu_pe u_pe (
      .clk, .rst_n, .in_valid(rd_v), .op(op_r), .m(m_r), .first(rd_first), .last(rd_last),
      .a(bk_rdata_a[p]), .b(bk_rdata_b[p]), .out_valid(pe_ov[p]), .y(pe_y[p]));
  end

  // host read data: the 8 beats of the row from 8 banks
  always_comb
    for (int j = 0; j < BPR; j++) begin
      automatic logic [HAW+PW:0] br = (HAW+PW+1)'({hr_q, ($clog2(BPR))'(0)}) + (HAW+PW+1)'(j);
      automatic int unsigned pi = int'(br % (HAW+PW+1)'(NPE));
      for (int w = 0; w < 4; w++) hbm_rdata[4*j+w] = bk_rdata_a[pi][36*w +: 36];
    end
endmodule
