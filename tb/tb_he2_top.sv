// tb_he2_top: end-to-end run of the accelerator at reduced size.
//
// Configuration: N = 256, ALPHA = 2, DNUM = 3 (6 ciphertext limbs), KSP = 1
// (7 extended limbs, 5 targets per group), 14 NTTUs (two halves of 7),
// 64 BConvUs (2 targets x 32 lanes, so 3 batches per group), a 64-lane EWEU,
// a 4-bank scratchpad and 8 xMU banks, with a behavioural HBM bank model.
// Flow: the host writes a ciphertext polynomial (NTT domain), the evaluation
// key and a plaintext into the scratchpad; DMA moves key and plaintext into
// HBM; ModUp runs through the group pipeline and streams every extended
// limb to HBM; the xMU computes the inner products (one limb fused with the
// plaintext multiplication); DMA brings the results back; the EWEU runs a
// PMul and a CAdd. Every result is compared with a software reference
// (direct-sum NTT, schoolbook basis conversion, % arithmetic).
// Mechanisms counted (a failure for each one that never happened): INTT,
// BConv batches, NTT, OF-Twist table fills, NTTU allocation, group overlap
// (dual-level pipelining), IRF streaming from NTTUs to HBM, the original-limb
// path, near-memory IP, fused IP+PMul, xMU element-wise MemOp, EVF-style
// preload HBM->scratchpad, EWEU operation, NoC bank arbitration waits, all
// xMU banks working in the same cycle.
module tb_he2_top;
  import he2_pkg::*;
  import tb_util_pkg::*;
  localparam int LOGN = 8, NPE = 2, ALPHA = 2, DNUM = 3, KSP = 1, NUM_NTTU = 14, NUM_BCONVU = 64;
  localparam int EWE_LANES = 64, NBANK = 4, DEPTH = 128, XMU_NPE = 8, GAW = 20, HAW = 26, BAW = 12;
  localparam int N = 2**LOGN, ROW = 16*NPE, RPL = N / ROW, NQ = ALPHA*DNUM, NEXT = NQ + KSP, NTGT = NEXT - ALPHA;
  // scratchpad rows
  localparam int S_CT = 0, S_EVK = 64, S_PT = 240, S_EWE = 448, S_RES = 256;
  // HBM rows (= bank addresses since XMU_NPE beats make one row)
  localparam int H_MU = 0, H_EVK = 200, H_PT = 400, H_IP = 500, H_FU = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_req = 0, host_we = 0, host_gnt, host_rvalid;
  logic [GAW-1:0] host_addr = 0;
  word_t host_wdata [ROW], host_rdata [ROW];
  modulus_t limb_m [NEXT];
  word_t limb_psi [NEXT], intt_scale [NQ], bconv_c [DNUM][NTGT][ALPHA];
  logic modup_start = 0, modup_busy, modup_done;
  logic [GAW-1:0] ct_base = S_CT;
  logic [HAW-1:0] hbm_base = H_MU;
  logic ewe_start = 0, ewe_done; ew_op_t ewe_op = EW_PMUL; modulus_t ewe_m;
  logic [GAW-1:0] ewe_a_base = 0, ewe_b_base = 0, ewe_y_base = 0, ewe_nrows = 0;
  logic dma_start = 0, dma_done; logic [1:0] dma_kind = 0; logic [HAW-1:0] dma_src = 0, dma_dst = 0, dma_nrows = 0;
  logic xmu_start = 0, xmu_done; xm_op_t xmu_op = XM_IP; modulus_t xmu_m;
  logic [BAW-1:0] xmu_a_base = 0, xmu_b_base = 0, xmu_p_base = 0, xmu_y_base = 0, xmu_a_stride = 0, xmu_b_stride = 0, xmu_nbeat = 0;
  logic [7:0] xmu_nacc = 0;
  logic bk_re [XMU_NPE], bk_we [XMU_NPE];
  logic [BAW-1:0] bk_raddr_a [XMU_NPE], bk_raddr_b [XMU_NPE], bk_waddr [XMU_NPE];
  logic [255:0] bk_rdata_a [XMU_NPE], bk_rdata_b [XMU_NPE], bk_wdata [XMU_NPE];
  logic [31:0] overlap_cycles, wait_cycles, rows_streamed, bconv_batches, fused_ops;
  he2_events_t events;

  he2_top #(.LOGN(LOGN), .NPE(NPE), .ALPHA(ALPHA), .DNUM(DNUM), .KSP(KSP), .NUM_NTTU(NUM_NTTU),
            .NUM_BCONVU(NUM_BCONVU), .EWE_LANES(EWE_LANES), .NBANK(NBANK), .DEPTH(DEPTH),
            .XMU_NPE(XMU_NPE), .GAW(GAW), .HAW(HAW), .BAW(BAW)) dut (.*);

  // HBM banks: one write and two reads per cycle, read data one cycle later
  logic [255:0] bank [XMU_NPE][2**BAW];
  always @(posedge clk)
    for (int p = 0; p < XMU_NPE; p++) begin
      if (bk_re[p]) begin bk_rdata_a[p] <= bank[p][bk_raddr_a[p]]; bk_rdata_b[p] <= bank[p][bk_raddr_b[p]]; end
      if (bk_we[p]) bank[p][bk_waddr[p]] <= bk_wdata[p];
    end

  // ---------------- mechanism counters ----------------
  int n_intt = 0, n_ntt = 0, n_twist = 0, n_alloc = 0, n_irf_rows = 0, n_orig_rows = 0;
  int n_evf_rows = 0, n_noc_wait = 0, n_allbank = 0, n_xmu_ew = 0, n_xmu_ip = 0, n_ewe = 0;
  always @(posedge clk) if (rst_n) begin
    n_intt += int'(events.intt_starts);
    n_ntt  += int'(events.ntt_starts);
    n_twist += int'(events.intt_starts) + int'(events.ntt_starts);  // each start refills the twiddle tables
    if (events.alloc) n_alloc++;
    if (events.irf_row) n_irf_rows++;
    if (events.orig_row) n_orig_rows++;
    if (events.evf_row) n_evf_rows++;
    n_noc_wait += int'(events.noc_waits);
    if (events.xmu_allbank) n_allbank++;
    if (events.ewe_op) n_ewe++;
  end

  // ---------------- reference data ----------------
  logic [35:0] q [NEXT];
  logic [35:0] coef [NQ][N];          // ciphertext limbs, coefficient domain
  logic [35:0] ctn  [NQ][N];          // ciphertext limbs, NTT domain (what the chip gets)
  logic [35:0] mu   [DNUM][NEXT][N];  // expected ModUp output, NTT domain
  logic [35:0] evk  [DNUM][NEXT][N];
  logic [35:0] pt   [N];
  logic [35:0] ipr  [NEXT][N];

  function automatic int brv(int x);
    int r = 0;
    for (int i = 0; i < LOGN; i++) if (x & (1 << i)) r |= 1 << (LOGN-1-i);
    return r;
  endfunction
  // out[i] = sum_j c[j] psi^((2 brev(i) + 1) j)   (the NTTU's output order)
  task automatic ntt_ref(input logic [35:0] c [N], input logic [35:0] qq, input logic [35:0] psi, output logic [35:0] o [N]);
    for (int i = 0; i < N; i++) begin
      logic [35:0] w, acc;
      w = rpow(psi, 2 * brv(i) + 1, qq);
      acc = 0;
      for (int j = N - 1; j >= 0; j--) acc = radd(rmul(acc, w, qq), c[j], qq);
      o[i] = acc;
    end
  endtask
  function automatic int tgt_limb(int g, int t);
    return (t < g*ALPHA) ? t : t + ALPHA;
  endfunction
  // prod_{k in group g, k != i} q_k  mod m
  function automatic logic [35:0] qhat_mod(int g, int i, logic [35:0] m);
    logic [35:0] r = 1;
    for (int k = 0; k < ALPHA; k++) if (k != i) r = rmul(r, q[g*ALPHA + k] % m, m);
    return r;
  endfunction

  // ---------------- host helpers ----------------
  task automatic spm_write(input int a, input logic [35:0] d [ROW]);
    @(negedge clk); host_req = 1; host_we = 1; host_addr = GAW'(a);
    for (int w = 0; w < ROW; w++) host_wdata[w] = d[w];
    #1; while (!host_gnt) begin @(negedge clk); #1; end
    @(negedge clk); host_req = 0; host_we = 0;
  endtask
  task automatic spm_read(input int a, output logic [35:0] d [ROW]);
    @(negedge clk); host_req = 1; host_we = 0; host_addr = GAW'(a);
    #1; while (!host_gnt) begin @(negedge clk); #1; end
    @(negedge clk); host_req = 0;
    while (!host_rvalid) @(negedge clk);
    for (int w = 0; w < ROW; w++) d[w] = host_rdata[w];
  endtask
  task automatic write_poly(input int base, input logic [35:0] p [N]);
    logic [35:0] row [ROW];
    for (int r = 0; r < RPL; r++) begin
      for (int w = 0; w < ROW; w++) row[w] = p[r * ROW + w];
      spm_write(base + r, row);
    end
  endtask
  task automatic check_poly(input int base, input logic [35:0] p [N], input string what);
    logic [35:0] row [ROW];
    int bad = 0;
    for (int r = 0; r < RPL; r++) begin
      spm_read(base + r, row);
      for (int w = 0; w < ROW; w++) begin
        checks++;
        if (row[w] !== p[r * ROW + w]) begin failures++; bad++; if (bad < 3) $display("FAIL %s word %0d: %h vs %h", what, r * ROW + w, row[w], p[r * ROW + w]); end
      end
    end
  endtask
  task automatic dma(input int kind, input int src, input int dst, input int n);
    @(negedge clk); dma_start = 1; dma_kind = 2'(kind); dma_src = HAW'(src); dma_dst = HAW'(dst); dma_nrows = HAW'(n);
    @(negedge clk); dma_start = 0;
    while (!dma_done) @(negedge clk);
  endtask
  task automatic xmu_cmd(input xm_op_t o, input logic [35:0] qq, input int a, input int as, input int b, input int bs,
                         input int p, input int y, input int na);
    @(negedge clk);
    xmu_start = 1; xmu_op = o; xmu_m = mk_mod(qq); xmu_a_base = BAW'(a); xmu_a_stride = BAW'(as);
    xmu_b_base = BAW'(b); xmu_b_stride = BAW'(bs); xmu_p_base = BAW'(p); xmu_y_base = BAW'(y);
    xmu_nacc = 8'(na); xmu_nbeat = BAW'(RPL);
    @(negedge clk); xmu_start = 0;
    while (!xmu_done) @(negedge clk);
    if (o == XM_IP || o == XM_IP_PMUL) n_xmu_ip++; else n_xmu_ew++;
  endtask
  task automatic count(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    else $display("mechanism %-28s %0d", name, n);
  endtask

  initial begin
    int t0, t_modup;
    logic [35:0] tmp [N];
    logic [35:0] yv [N];
    for (int p = 0; p < XMU_NPE; p++) begin
      for (int i = 0; i < 2**BAW; i++) bank[p][i] = '0;
      bk_rdata_a[p] = '0; bk_rdata_b[p] = '0;
    end
    for (int w = 0; w < ROW; w++) host_wdata[w] = 0;
    // ---- constants ----
    for (int e = 0; e < NEXT; e++) begin
      q[e] = PRIMES[e]; limb_m[e] = mk_mod(q[e]); limb_psi[e] = psi_for(e, LOGN);
    end
    for (int j = 0; j < NQ; j++)
      intt_scale[j] = rmul(rinv(36'(N), q[j]), rinv(qhat_mod(j / ALPHA, j % ALPHA, q[j]), q[j]), q[j]);
    for (int g = 0; g < DNUM; g++) for (int t = 0; t < NTGT; t++) for (int i = 0; i < ALPHA; i++)
      bconv_c[g][t][i] = qhat_mod(g, i, q[tgt_limb(g, t)]);
    ewe_m = limb_m[0];
    xmu_m = limb_m[0];
    // ---- reference ----
    for (int j = 0; j < NQ; j++) begin
      for (int k = 0; k < N; k++) coef[j][k] = rnd(q[j]);
      ntt_ref(coef[j], q[j], limb_psi[j], ctn[j]);
    end
    for (int g = 0; g < DNUM; g++) for (int e = 0; e < NEXT; e++) begin
      if (e >= g * ALPHA && e < (g + 1) * ALPHA) mu[g][e] = ctn[e];
      else begin
        for (int k = 0; k < N; k++) begin
          yv[k] = 0;
          for (int i = 0; i < ALPHA; i++) begin
            automatic int j = g * ALPHA + i;
            automatic logic [35:0] x = rmul(coef[j][k], rinv(qhat_mod(g, i, q[j]), q[j]), q[j]);
            yv[k] = radd(yv[k], rmul(x % q[e], qhat_mod(g, i, q[e]), q[e]), q[e]);
          end
        end
        ntt_ref(yv, q[e], limb_psi[e], mu[g][e]);
      end
      for (int k = 0; k < N; k++) evk[g][e][k] = rnd(q[e]);
    end
    for (int k = 0; k < N; k++) pt[k] = rnd(q[0]);
    for (int e = 0; e < NEXT; e++) for (int k = 0; k < N; k++) begin
      ipr[e][k] = 0;
      for (int g = 0; g < DNUM; g++) ipr[e][k] = radd(ipr[e][k], rmul(mu[g][e][k], evk[g][e][k], q[e]), q[e]);
    end

    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    // ---- load the scratchpad ----
    for (int j = 0; j < NQ; j++) write_poly(S_CT + j * RPL, ctn[j]);
    for (int g = 0; g < DNUM; g++) for (int e = 0; e < NEXT; e++) write_poly(S_EVK + (g * NEXT + e) * RPL, evk[g][e]);
    write_poly(S_PT, pt);
    // ---- key and plaintext to HBM ----
    dma(1, S_EVK, H_EVK, DNUM * NEXT * RPL);
    dma(1, S_PT, H_PT, RPL);
    // ---- ModUp, with host traffic on the scratchpad at the same time ----
    @(negedge clk) modup_start = 1; t0 = $time;
    @(negedge clk) modup_start = 0;
    fork
      begin logic [35:0] row [ROW]; for (int r = 0; r < 24; r++) spm_read(S_PT + (r % RPL), row); end
      while (!modup_done) @(negedge clk);
    join
    t_modup = ($time - t0) / 10;
    $display("ModUp: %0d cycles, overlap_cycles=%0d wait_cycles=%0d", t_modup, overlap_cycles, wait_cycles);
    // ---- inner products in the xMU; limb 0 fused with the plaintext ----
    xmu_cmd(XM_IP_PMUL, q[0], H_MU, NEXT * RPL, H_EVK, NEXT * RPL, H_PT, H_FU, DNUM);
    for (int e = 0; e < NEXT; e++)
      xmu_cmd(XM_IP, q[e], H_MU + e * RPL, NEXT * RPL, H_EVK + e * RPL, NEXT * RPL, 0, H_IP + e * RPL, DNUM);
    // element-wise MemOp in the xMU: plaintext + IP result of limb 0 -> H_FU + RPL
    xmu_cmd(XM_CADD, q[0], H_PT, 0, H_IP, 0, 0, H_FU + RPL, 1);
    // ---- results back into the scratchpad ----
    dma(2, H_MU, S_RES, 1);                 // warm-up single row
    dma(2, H_MU, S_RES, DNUM * NEXT * RPL);
    for (int g = 0; g < DNUM; g++) for (int e = 0; e < NEXT; e++)
      check_poly(S_RES + (g * NEXT + e) * RPL, mu[g][e], $sformatf("ModUp g%0d limb %0d", g, e));
    dma(2, H_IP, S_EVK, NEXT * RPL);
    for (int e = 0; e < NEXT; e++) check_poly(S_EVK + e * RPL, ipr[e], $sformatf("IP limb %0d", e));
    dma(2, H_FU, S_EVK + NEXT * RPL, 2 * RPL);
    for (int k = 0; k < N; k++) tmp[k] = rmul(ipr[0][k], pt[k], q[0]);
    check_poly(S_EVK + NEXT * RPL, tmp, "fused IP+PMul");
    for (int k = 0; k < N; k++) tmp[k] = radd(pt[k], ipr[0][k], q[0]);
    check_poly(S_EVK + (NEXT + 1) * RPL, tmp, "xMU CAdd");
    // ---- EWEU on the xPU: PMul and CAdd on limb 0 ----
    @(negedge clk); ewe_start = 1; ewe_op = EW_PMUL; ewe_a_base = S_CT; ewe_b_base = S_PT; ewe_y_base = S_EWE; ewe_nrows = RPL;
    @(negedge clk); ewe_start = 0; while (!ewe_done) @(negedge clk);
    for (int k = 0; k < N; k++) tmp[k] = rmul(ctn[0][k], pt[k], q[0]);
    check_poly(S_EWE, tmp, "EWEU PMul");
    @(negedge clk); ewe_start = 1; ewe_op = EW_CADD; ewe_a_base = S_CT; ewe_b_base = S_PT; ewe_y_base = S_EWE + RPL;
    @(negedge clk); ewe_start = 0; while (!ewe_done) @(negedge clk);
    for (int k = 0; k < N; k++) tmp[k] = radd(ctn[0][k], pt[k], q[0]);
    check_poly(S_EWE + RPL, tmp, "EWEU CAdd");

    // IRF streaming: one row per cycle, so all rows of the new limbs plus the
    // copies must fit in the measured time
    checks++;
    if (rows_streamed < DNUM * NEXT * RPL) begin failures++; $display("FAIL rows streamed %0d", rows_streamed); end
    count("INTT (INTT-role NTTUs)", n_intt);
    count("OF-Twist table fills", n_twist);
    count("BConv batches", int'(bconv_batches));
    count("NTT (NTT-role NTTUs)", n_ntt);
    count("NTTU allocation", n_alloc);
    count("dual-level overlap cycles", int'(overlap_cycles));
    count("IRF rows NTTU->HBM", n_irf_rows);
    count("original-limb path rows", n_orig_rows);
    count("xMU inner products", n_xmu_ip);
    count("fused IP+PMul beats", int'(fused_ops));
    count("xMU element-wise MemOps", n_xmu_ew);
    count("all xMU banks active", n_allbank);
    count("EVF rows HBM->scratchpad", n_evf_rows);
    count("EWEU operations", n_ewe);
    count("NoC arbitration waits", n_noc_wait);
    checks++;
    if (bconv_batches != DNUM * ((NTGT + NUM_BCONVU / ROW - 1) / (NUM_BCONVU / ROW))) begin failures++; $display("FAIL batch count %0d", bconv_batches); end
    checks++;
    if (n_intt != DNUM * ALPHA || n_ntt != DNUM * NTGT) begin failures++; $display("FAIL transform counts %0d %0d", n_intt, n_ntt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
