// he2_top: the heterogeneous accelerator, an xPU and a near-memory xMU.
//
// The xPU holds NUM_NTTU iterative NTT units, an array of NUM_BCONVU tree-
// based basis-conversion units, the element-wise engine (EWEU), the banked
// scratchpad behind a crossbar NoC, the streaming memory controller, the NTTU
// allocator and the group-pipeline controller. The xMU is one PE per HBM
// bank; the DRAM banks themselves are outside (bk_* ports), as are the host
// (command, constant and scratchpad ports).
//
// Built-in operation: ModUp of one polynomial in the intermediate-results-
// flowing dataflow. The polynomial (NQ = ALPHA*DNUM limbs in the NTT domain,
// bit-reversed order, limb j at scratchpad rows ct_base + j*RPL) is split
// into DNUM groups of ALPHA limbs. Each group passes three stages:
//   0  load its ALPHA limbs into INTT-role NTTUs and run the INTT, whose
//      final scaling multiplies by N^-1 * qhat_i^-1 (intt_scale);
//   1  basis conversion: all INTT-role units present the same row, the
//      BConvU array turns the ALPHA coefficients of every column into the
//      NTGT = NEXT-ALPHA other limbs of the extended basis (TGT_PAR targets
//      at a time), writing straight into NTT-role NTTUs; then the NTT;
//   2  stream the NTGT new limbs from the NTTUs, and the group's own ALPHA
//      limbs unchanged from the scratchpad, to HBM slot g*NEXT + e (rows
//      hbm_base + (g*NEXT+e)*RPL), where the xMU will use them.
// The xpu_controller lets different groups occupy different stages at once
// (group g+1 transforms while group g is converted and group g-1 streams);
// the allocator splits the NTTUs into two ping-pong halves, each with ALPHA
// INTT-role and NTGT NTT-role units. The inner product with the evaluation
// key then runs in the xMU on a host command (xmu_*), one command per
// extended limb, accumulating over the DNUM groups, optionally fused with a
// plaintext multiplication. ModDown is not built in as a sequence; its
// pieces (INTT, BConv, NTT, subtraction) are the same units.
// Host commands besides ModUp: ewe_* (element-wise operation on scratchpad
// rows through the EWEU), dma_* (scratchpad <-> HBM rows, e.g. preloading one
// evk for the evk-flowing part of the hybrid dataflow) and xmu_*.
// Statistics: overlap/wait cycles of the group pipeline, rows streamed, BConv
// batches, fused xMU operations, and a per-cycle `events` struct (unit
// starts, allocation, each kind of transfer row, NoC refusals, all-bank xMU
// activity, EWEU issue).
//
// What follows the paper: the set of units, their counts and widths, the
// NTTU->BConvU->NTTU links, the group pipeline, IRF streaming, MemOps in the
// xMU. What is this design's own: the command interface, the stage split,
// the address layout, the NoC and all handshakes.
//
// Lint: several unit outputs (allocator counts, busy flags, the EWEU's second
// and third result, the group controller's busy) are left unread because the
// top's own state machine already knows them; loop indices are ints of which
// only the low bits are used. Verilator reports rst_n as used both
// asynchronously and synchronously: every register resets asynchronously,
// and the synchronous use is the reset gating of the HBM-write assertion,
// which is not hardware.
module he2_top
  import he2_pkg::*;
#(
  parameter int LOGN       = 16,
  parameter int NPE        = 2,
  parameter int ALPHA      = 12,
  parameter int DNUM       = 3,
  parameter int KSP        = 12,
  parameter int NUM_NTTU   = 96,
  parameter int NUM_BCONVU = 672,
  parameter int EWE_LANES  = 512,
  parameter int NBANK      = 250,
  parameter int DEPTH      = 2447,
  parameter int XMU_NPE    = 512,
  parameter int GAW        = 20,
  parameter int HAW        = 26,
  parameter int BAW        = 20,
  localparam int N       = 2**LOGN,
  localparam int ROW     = 16*NPE,
  localparam int RPL     = N / ROW,
  localparam int RB      = $clog2(RPL),
  localparam int NQ      = ALPHA*DNUM,
  localparam int NEXT    = NQ + KSP,
  localparam int NTGT    = NEXT - ALPHA,
  localparam int TGT_PAR = NUM_BCONVU / ROW,
  localparam int NBATCH  = (NTGT + TGT_PAR - 1) / TGT_PAR,
  localparam int GW      = $clog2(DNUM + 1)
)(
  input  logic           clk,
  input  logic           rst_n,
  // host access to the scratchpad
  input  logic           host_req,
  input  logic           host_we,
  input  logic [GAW-1:0] host_addr,
  input  word_t          host_wdata [ROW],
  output logic           host_gnt,
  output logic           host_rvalid,
  output word_t          host_rdata [ROW],
  // per-limb constants
  input  modulus_t       limb_m     [NEXT],
  input  word_t          limb_psi   [NEXT],
  input  word_t          intt_scale [NQ],
  input  word_t          bconv_c    [DNUM][NTGT][ALPHA],
  // ModUp
  input  logic           modup_start,
  input  logic [GAW-1:0] ct_base,
  input  logic [HAW-1:0] hbm_base,
  output logic           modup_busy,
  output logic           modup_done,
  // element-wise operation
  input  logic           ewe_start,
  input  ew_op_t         ewe_op,
  input  modulus_t       ewe_m,
  input  logic [GAW-1:0] ewe_a_base, ewe_b_base, ewe_y_base, ewe_nrows,
  output logic           ewe_done,
  // scratchpad <-> HBM transfer
  input  logic           dma_start,
  input  logic [1:0]     dma_kind,
  input  logic [HAW-1:0] dma_src, dma_dst, dma_nrows,
  output logic           dma_done,
  // xMU command
  input  logic           xmu_start,
  input  xm_op_t         xmu_op,
  input  modulus_t       xmu_m,
  input  logic [BAW-1:0] xmu_a_base, xmu_b_base, xmu_p_base, xmu_y_base, xmu_a_stride, xmu_b_stride,
  input  logic [7:0]     xmu_nacc,
  input  logic [BAW-1:0] xmu_nbeat,
  output logic           xmu_done,
  // HBM banks (DRAM arrays outside)
  output logic           bk_re      [XMU_NPE],
  output logic [BAW-1:0] bk_raddr_a [XMU_NPE],
  output logic [BAW-1:0] bk_raddr_b [XMU_NPE],
  input  logic [255:0]   bk_rdata_a [XMU_NPE],
  input  logic [255:0]   bk_rdata_b [XMU_NPE],
  output logic           bk_we      [XMU_NPE],
  output logic [BAW-1:0] bk_waddr   [XMU_NPE],
  output logic [255:0]   bk_wdata   [XMU_NPE],
  // statistics
  output logic [31:0]    overlap_cycles,
  output logic [31:0]    wait_cycles,
  output logic [31:0]    rows_streamed,
  output logic [31:0]    bconv_batches,
  output logic [31:0]    fused_ops,
  output he2_events_t    events
);
  localparam int H       = NUM_NTTU / 2;
  localparam int NCLIENT = 3 + ALPHA;
  localparam int UW      = $clog2(NUM_NTTU + 1);
  localparam int AW      = $clog2(DEPTH);
  localparam int BLAT    = 1 + ((ALPHA > 1) ? $clog2(ALPHA) : 1);

  initial begin
    assert (NQ + KSP <= 255) else $error("too many limbs");
    assert (H >= ALPHA + NTGT) else $error("NUM_NTTU too small for two ping-pong halves");
    assert (TGT_PAR >= 1) else $error("NUM_BCONVU must be at least one row wide");
    assert (ROW == 32) else $error("the xMU host port carries 32-word rows: NPE must be 2");
  end

  function automatic int tgt_limb(int g, int t);
    return (t < g*ALPHA) ? t : t + ALPHA;
  endfunction

  // ------------------------------------------------------------------
  // scratchpad and NoC
  // ------------------------------------------------------------------
  logic           c_req   [NCLIENT];
  logic           c_we    [NCLIENT];
  logic [GAW-1:0] c_addr  [NCLIENT];
  word_t          c_wdata [NCLIENT][ROW];
  logic           c_gnt   [NCLIENT];
  logic           c_rvalid[NCLIENT];
  word_t          c_rdata [NCLIENT][ROW];
  logic           b_en    [NBANK];
  logic           b_we    [NBANK];
  logic [AW-1:0]  b_addr  [NBANK];
  word_t          b_wdata [NBANK][ROW];
  logic           b_rvalid[NBANK];
  word_t          b_rdata [NBANK][ROW];

  noc #(.NCLIENT(NCLIENT), .NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW), .GAW(GAW)) u_noc (.*);
  scratchpad #(.NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW)) u_spm (
    .clk, .rst_n, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wdata),
    .rvalid(b_rvalid), .rdata(b_rdata));

  assign c_req[0]   = host_req;
  assign c_we[0]    = host_we;
  assign c_addr[0]  = host_addr;
  assign c_wdata[0] = host_wdata;
  assign host_gnt   = c_gnt[0];
  assign host_rvalid= c_rvalid[0];
  assign host_rdata = c_rdata[0];

  // ------------------------------------------------------------------
  // NTTU allocator and group-pipeline controller
  // ------------------------------------------------------------------
  logic          al_valid;
  logic [UW-1:0] al_na, al_nb;
  logic          role [NUM_NTTU];
  logic [UW-1:0] uidx [NUM_NTTU];
  logic [UW-1:0] uhalf[NUM_NTTU];

  nttu_allocator #(.NUM_NTTU(NUM_NTTU), .NHALF(2), .WW(8)) u_alloc (
    .clk, .rst_n, .req(modup_start && !modup_busy), .work_a(8'(ALPHA)), .work_b(8'(NTGT)),
    .valid(al_valid), .n_a(al_na), .n_b(al_nb), .role, .idx(uidx), .half(uhalf));

  logic          st_start [3];
  logic [GW-1:0] st_group [3];
  logic          st_done  [3];
  logic          ctl_busy, ctl_done;

  xpu_controller #(.DNUM(DNUM), .NSTAGE(3), .NBUF(2)) u_ctl (
    .clk, .rst_n, .start(al_valid), .busy(ctl_busy), .done(ctl_done),
    .stage_start(st_start), .stage_group(st_group), .stage_done(st_done),
    .overlap_cycles, .wait_cycles);

  logic mu_busy;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mu_busy <= 1'b0;
    else if (modup_start && !mu_busy) mu_busy <= 1'b1;
    else if (ctl_done) mu_busy <= 1'b0;
  assign modup_busy = mu_busy;
  assign modup_done = ctl_done;

  // unit number of (half, role, index)
  logic [UW-1:0] unit_a [2][ALPHA];
  logic [UW-1:0] unit_b [2][NTGT];
  always_comb begin
    for (int h = 0; h < 2; h++) begin
      for (int i = 0; i < ALPHA; i++) unit_a[h][i] = '0;
      for (int t = 0; t < NTGT; t++)  unit_b[h][t] = '0;
    end
    for (int u = 0; u < NUM_NTTU; u++) begin
      for (int h = 0; h < 2; h++) begin
        for (int i = 0; i < ALPHA; i++)
          if (uhalf[u] == UW'(h) && !role[u] && uidx[u] == UW'(i)) unit_a[h][i] = UW'(u);
        for (int t = 0; t < NTGT; t++)
          if (uhalf[u] == UW'(h) && role[u] && uidx[u] == UW'(t)) unit_b[h][t] = UW'(u);
      end
    end
  end

  // ------------------------------------------------------------------
  // NTTUs
  // ------------------------------------------------------------------
  logic          n_start [NUM_NTTU];
  logic          n_mode  [NUM_NTTU];
  modulus_t      n_m     [NUM_NTTU];
  word_t         n_psi   [NUM_NTTU];
  word_t         n_scale [NUM_NTTU];
  logic          n_busy  [NUM_NTTU];
  logic          n_done  [NUM_NTTU];
  logic          n_wen   [NUM_NTTU];
  logic [RB-1:0] n_wrow  [NUM_NTTU];
  word_t         n_wdata [NUM_NTTU][ROW];
  logic [RB-1:0] n_rrow  [NUM_NTTU];
  word_t         n_rdata [NUM_NTTU][ROW];

  for (genvar u = 0; u < NUM_NTTU; u++) begin : g_nttu
    nttu #(.LOGN(LOGN), .NPE(NPE)) u_nttu (
      .clk, .rst_n, .start(n_start[u]), .mode(n_mode[u]), .m(n_m[u]), .psi(n_psi[u]),
      .scale(n_scale[u]), .busy(n_busy[u]), .done(n_done[u]),
      .wr_en(n_wen[u]), .wr_row(n_wrow[u]), .wr_data(n_wdata[u]),
      .rd_row(n_rrow[u]), .rd_data(n_rdata[u]));
  end

  // ------------------------------------------------------------------
  // stage 0: load + INTT
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {A_IDLE, A_LOAD, A_RUN} s0_t;
  s0_t            s0;
  logic [GW-1:0]  g0;
  logic [RB:0]    ld_iss [ALPHA];
  logic [RB:0]    ld_got [ALPHA];
  logic           s0_fin [ALPHA];
  logic           s0_go;
  logic           h0;

  assign h0 = g0[0];
  always_comb begin
    automatic logic all_in = 1'b1;
    automatic logic all_fin = 1'b1;
    for (int i = 0; i < ALPHA; i++) begin
      c_req[3+i]   = (s0 == A_LOAD) && (ld_iss[i] != (RB+1)'(RPL));
      c_we[3+i]    = 1'b0;
      c_addr[3+i]  = ct_base + GAW'((int'(g0)*ALPHA + i) * RPL) + GAW'(ld_iss[i]);
      c_wdata[3+i] = c_rdata[3+i];
      if (ld_got[i] != (RB+1)'(RPL)) all_in = 1'b0;
      if (!s0_fin[i]) all_fin = 1'b0;
    end
    s0_go = all_in;
    st_done[0] = (s0 == A_RUN) && all_fin;
  end

  logic s0_intt_start;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0 <= A_IDLE; g0 <= '0; s0_intt_start <= 1'b0;
      for (int i = 0; i < ALPHA; i++) begin ld_iss[i] <= '0; ld_got[i] <= '0; s0_fin[i] <= 1'b0; end
    end else begin
      s0_intt_start <= 1'b0;
      unique case (s0)
        A_IDLE: if (st_start[0]) begin
          g0 <= st_group[0]; s0 <= A_LOAD;
          for (int i = 0; i < ALPHA; i++) begin ld_iss[i] <= '0; ld_got[i] <= '0; s0_fin[i] <= 1'b0; end
        end
        A_LOAD: begin
          for (int i = 0; i < ALPHA; i++) begin
            if (c_req[3+i] && c_gnt[3+i]) ld_iss[i] <= ld_iss[i] + 1'b1;
            if (c_rvalid[3+i]) ld_got[i] <= ld_got[i] + 1'b1;
          end
          if (s0_go) begin s0 <= A_RUN; s0_intt_start <= 1'b1; end
        end
        A_RUN: begin
          for (int i = 0; i < ALPHA; i++)
            if (n_done[unit_a[h0][i]]) s0_fin[i] <= 1'b1;
          if (st_done[0]) s0 <= A_IDLE;
        end
        default: s0 <= A_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // stage 1: BConv (INTT-role units -> BConvU array -> NTT-role units) + NTT
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {B_IDLE, B_ROWS, B_DRAIN, B_NTT} s1_t;
  s1_t                        s1;
  logic [GW-1:0]              g1;
  logic                       h1;
  logic [RB:0]                brow;
  logic [$clog2(NBATCH+1)-1:0] batch;
  logic [3:0]                 bdrain;
  logic                       s1_fin [NTGT];
  logic                       s1_ntt_start;

  assign h1 = g1[0];

  word_t           bx   [ROW][ALPHA];
  logic            bc_ov [TGT_PAR][ROW];
  word_t           bc_y  [TGT_PAR][ROW];
  logic [15:0]     bc_tag[TGT_PAR][ROW];
  modulus_t        bc_m  [TGT_PAR];
  word_t           bc_c  [TGT_PAR][ALPHA];

  always_comb begin
    for (int l = 0; l < ROW; l++)
      for (int i = 0; i < ALPHA; i++)
        bx[l][i] = n_rdata[unit_a[h1][i]][l];
    for (int t = 0; t < TGT_PAR; t++) begin
      automatic int tg = int'(batch) * TGT_PAR + t;
      automatic int tgc = (tg < NTGT) ? tg : NTGT - 1;
      bc_m[t] = limb_m[tgt_limb(int'(g1), tgc)];
      for (int i = 0; i < ALPHA; i++) bc_c[t][i] = bconv_c[g1][tgc][i];
    end
  end

  for (genvar t = 0; t < TGT_PAR; t++) begin : g_bct
    for (genvar l = 0; l < ROW; l++) begin : g_bcl
      bconvu #(.ALPHA(ALPHA), .TAGW(16)) u_bc (
        .clk, .rst_n, .m(bc_m[t]), .c(bc_c[t]),
        .in_valid((s1 == B_ROWS) && (int'(batch) * TGT_PAR + t < NTGT)),
        .x(bx[l]), .in_tag(16'(brow)),
        .out_valid(bc_ov[t][l]), .y(bc_y[t][l]), .out_tag(bc_tag[t][l]));
    end
  end

  always_comb begin
    automatic logic all_fin = 1'b1;
    for (int t = 0; t < NTGT; t++) if (!s1_fin[t]) all_fin = 1'b0;
    st_done[1] = (s1 == B_NTT) && all_fin;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= B_IDLE; g1 <= '0; brow <= '0; batch <= '0; bdrain <= '0; s1_ntt_start <= 1'b0;
      bconv_batches <= '0;
      for (int t = 0; t < NTGT; t++) s1_fin[t] <= 1'b0;
    end else begin
      s1_ntt_start <= 1'b0;
      unique case (s1)
        B_IDLE: if (st_start[1]) begin
          g1 <= st_group[1]; s1 <= B_ROWS; brow <= '0; batch <= '0;
          for (int t = 0; t < NTGT; t++) s1_fin[t] <= 1'b0;
        end
        B_ROWS: if (brow == (RB+1)'(RPL - 1)) begin
          s1 <= B_DRAIN; bdrain <= 4'(BLAT + 1);
        end else brow <= brow + 1'b1;
        B_DRAIN: if (bdrain == 0) begin
          bconv_batches <= bconv_batches + 1;
          if (int'(batch) == NBATCH - 1) begin s1 <= B_NTT; s1_ntt_start <= 1'b1; end
          else begin batch <= batch + 1'b1; brow <= '0; s1 <= B_ROWS; end
        end else bdrain <= bdrain - 1'b1;
        B_NTT: begin
          for (int t = 0; t < NTGT; t++)
            if (n_done[unit_b[h1][t]]) s1_fin[t] <= 1'b1;
          if (st_done[1]) s1 <= B_IDLE;
        end
        default: s1 <= B_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // stage 2: stream the group's extended limbs to HBM
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} s2_t;
  s2_t            s2;
  logic [GW-1:0]  g2;
  logic           h2;
  logic [7:0]     job;
  logic           sm_start, sm_busy, sm_done;
  logic [1:0]     sm_kind;
  logic [HAW-1:0] sm_src, sm_dst, sm_n;
  logic [RB-1:0]  sm_src_row;
  word_t          sm_src_data [ROW];
  logic           hb_wvalid, hb_rreq, hb_rvalid, hb_ready;
  logic [HAW-1:0] hb_waddr, hb_raddr;
  word_t          hb_wdata [ROW];
  word_t          hb_rdata [ROW];
  logic           dma_pend;
  logic [1:0]     sm_kind_r;         // kind of the running transfer job
  logic           xmu_busy;

  assign h2 = g2[0];
  assign st_done[2] = (s2 == C_WAIT) && sm_done && (job == 8'(NTGT + ALPHA - 1));

  always_comb begin
    automatic int e;
    sm_start = 1'b0; sm_kind = 2'd0; sm_src = '0; sm_dst = '0; sm_n = HAW'(RPL);
    if (int'(job) < NTGT) e = tgt_limb(int'(g2), int'(job));
    else                  e = int'(g2) * ALPHA + int'(job) - NTGT;
    if (s2 == C_ISSUE) begin
      sm_start = 1'b1;
      sm_dst   = hbm_base + HAW'((int'(g2) * NEXT + e) * RPL);
      if (int'(job) < NTGT) begin
        sm_kind = 2'd0; sm_src = '0;
      end else begin
        sm_kind = 2'd1;
        sm_src  = HAW'(ct_base) + HAW'(e * RPL);
      end
    end else if (!mu_busy && dma_start) begin
      sm_start = 1'b1; sm_kind = dma_kind; sm_src = dma_src; sm_dst = dma_dst; sm_n = dma_nrows;
    end
    sm_src_data = n_rdata[unit_b[h2][(int'(job) < NTGT) ? int'(job) : 0]];
  end

  stream_mem_ctrl #(.ROW(ROW), .GAW(GAW), .HAW(HAW), .RW(RB)) u_smc (
    .clk, .rst_n, .start(sm_start), .kind(sm_kind), .src_base(sm_src), .dst_base(sm_dst),
    .nrows(sm_n), .busy(sm_busy), .done(sm_done),
    .src_row(sm_src_row), .src_data(sm_src_data),
    .c_req(c_req[1]), .c_we(c_we[1]), .c_addr(c_addr[1]), .c_wdata(c_wdata[1]),
    .c_gnt(c_gnt[1]), .c_rvalid(c_rvalid[1]), .c_rdata(c_rdata[1]),
    .hbm_wvalid(hb_wvalid), .hbm_waddr(hb_waddr), .hbm_wdata(hb_wdata),
    .hbm_rreq(hb_rreq), .hbm_raddr(hb_raddr), .hbm_rvalid(hb_rvalid), .hbm_rdata(hb_rdata),
    .rows_moved(rows_streamed));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2 <= C_IDLE; g2 <= '0; job <= '0; dma_pend <= 1'b0; sm_kind_r <= '0;
    end else begin
      if (sm_start && !sm_busy) sm_kind_r <= sm_kind;
      if (!mu_busy && dma_start && s2 == C_IDLE) dma_pend <= 1'b1;
      else if (sm_done) dma_pend <= 1'b0;
      unique case (s2)
        C_IDLE: if (st_start[2]) begin g2 <= st_group[2]; job <= '0; s2 <= C_ISSUE; end
        C_ISSUE: s2 <= C_WAIT;
        C_WAIT: if (sm_done) begin
          if (job == 8'(NTGT + ALPHA - 1)) s2 <= C_IDLE;
          else begin job <= job + 1'b1; s2 <= C_ISSUE; end
        end
        default: s2 <= C_IDLE;
      endcase
    end
  end
  assign dma_done = dma_pend && sm_done;

  // ------------------------------------------------------------------
  // NTTU port multiplexing by role
  // ------------------------------------------------------------------
  always_comb begin
    for (int u = 0; u < NUM_NTTU; u++) begin
      n_start[u] = 1'b0; n_mode[u] = 1'b0; n_m[u] = limb_m[0]; n_psi[u] = limb_psi[0];
      n_scale[u] = '0; n_wen[u] = 1'b0; n_wrow[u] = '0; n_wdata[u] = c_rdata[3];
      n_rrow[u] = '0;
    end
    // stage 0 writes and INTT starts
    for (int i = 0; i < ALPHA; i++) begin
      automatic int u = int'(unit_a[h0][i]);
      automatic int j = int'(g0) * ALPHA + i;
      n_wen[u]   = (s0 == A_LOAD) && c_rvalid[3+i];
      n_wrow[u]  = RB'(ld_got[i]);
      n_wdata[u] = c_rdata[3+i];
      n_mode[u]  = 1'b1;
      n_start[u] = s0_intt_start;
      n_m[u]     = limb_m[j];
      n_psi[u]   = limb_psi[j];
      n_scale[u] = intt_scale[j];
    end
    // stage 1 reads of the INTT-role half
    for (int i = 0; i < ALPHA; i++) n_rrow[unit_a[h1][i]] = RB'(brow);
    // stage 1 writes from the BConvU array and NTT starts
    for (int t = 0; t < NTGT; t++) begin
      automatic int u  = int'(unit_b[h1][t]);
      automatic int e  = tgt_limb(int'(g1), t);
      automatic int bt = t % TGT_PAR;
      n_wen[u]   = 1'b0;
      for (int l = 0; l < ROW; l++) n_wdata[u][l] = bc_y[bt][l];
      n_wrow[u]  = RB'(bc_tag[bt][0]);
      if (t / TGT_PAR == int'(batch)) n_wen[u] = bc_ov[bt][0];
      n_mode[u]  = 1'b0;
      n_start[u] = s1_ntt_start;
      n_m[u]     = limb_m[e];
      n_psi[u]   = limb_psi[e];
    end
    // stage 2 reads of the NTT-role half
    for (int t = 0; t < NTGT; t++) n_rrow[unit_b[h2][t]] = sm_src_row;
  end

  // ------------------------------------------------------------------
  // element-wise engine
  // ------------------------------------------------------------------
  logic     e_valid, e_ovalid;
  ew_op_t   e_op;
  modulus_t e_m;
  word_t    e_a [EWE_LANES], e_b [EWE_LANES], e_y0 [EWE_LANES], e_y1 [EWE_LANES], e_y2 [EWE_LANES];
  logic     ewe_busy;

  ewe_engine #(.LANES(EWE_LANES), .ROW(ROW), .GAW(GAW)) u_ewe_eng (
    .clk, .rst_n, .start(ewe_start), .op(ewe_op), .m(ewe_m), .a_base(ewe_a_base),
    .b_base(ewe_b_base), .y_base(ewe_y_base), .nrows(ewe_nrows), .busy(ewe_busy), .done(ewe_done),
    .c_req(c_req[2]), .c_we(c_we[2]), .c_addr(c_addr[2]), .c_wdata(c_wdata[2]),
    .c_gnt(c_gnt[2]), .c_rvalid(c_rvalid[2]), .c_rdata(c_rdata[2]),
    .e_valid, .e_op, .e_m, .e_a, .e_b, .e_ovalid, .e_y(e_y0));

  eweu #(.LANES(EWE_LANES)) u_eweu (
    .clk, .rst_n, .in_valid(e_valid), .op(e_op), .m(e_m),
    .a0(e_a), .a1(e_a), .b0(e_b), .b1(e_b), .c0(e_b), .c1(e_b),
    .out_valid(e_ovalid), .y0(e_y0), .y1(e_y1), .y2(e_y2));

  // ------------------------------------------------------------------
  // xMU
  // ------------------------------------------------------------------
  xmu #(.NPE(XMU_NPE), .BAW(BAW), .HAW(HAW)) u_xmu (
    .clk, .rst_n, .cmd_start(xmu_start), .cmd_op(xmu_op), .cmd_m(xmu_m),
    .a_base(xmu_a_base), .b_base(xmu_b_base), .p_base(xmu_p_base), .y_base(xmu_y_base),
    .a_stride(xmu_a_stride), .b_stride(xmu_b_stride), .nacc(xmu_nacc), .nbeat(xmu_nbeat),
    .busy(xmu_busy), .cmd_done(xmu_done),
    .hbm_ready(hb_ready), .hbm_wvalid(hb_wvalid), .hbm_waddr(hb_waddr), .hbm_wdata(hb_wdata),
    .hbm_rreq(hb_rreq), .hbm_raddr(hb_raddr), .hbm_rvalid(hb_rvalid), .hbm_rdata(hb_rdata),
    .bk_re, .bk_raddr_a, .bk_raddr_b, .bk_rdata_a, .bk_rdata_b, .bk_we, .bk_waddr, .bk_wdata,
    .fused_ops);

  // activity report
  always_comb begin
    automatic int ni = 0, nn = 0, nw = 0;
    automatic logic allb = xmu_busy;
    for (int u = 0; u < NUM_NTTU; u++) if (n_start[u]) begin
      if (n_mode[u]) ni++; else nn++;
    end
    for (int c = 0; c < NCLIENT; c++) if (c_req[c] && !c_gnt[c]) nw++;
    for (int p = 0; p < XMU_NPE; p++) if (!bk_re[p]) allb = 1'b0;
    events.intt_starts = 8'(ni);
    events.ntt_starts  = 8'(nn);
    events.alloc       = al_valid;
    events.irf_row     = hb_wvalid && sm_kind_r == 2'd0;
    events.orig_row    = hb_wvalid && sm_kind_r == 2'd1 && mu_busy;
    events.evf_row     = sm_kind_r == 2'd2 && c_req[1] && c_gnt[1];
    events.noc_waits   = 8'(nw);
    events.xmu_allbank = allb;
    events.ewe_op      = e_valid;
  end

  // transfers into the HBM must not meet a running xMU command
  a_no_hbm_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(hb_wvalid && !hb_ready))
    else $error("HBM write while the xMU is busy");
endmodule
