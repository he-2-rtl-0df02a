// nttu: iterative, configurable radix-2 NTT/INTT unit.
//
// The unit holds one polynomial limb of N = 2^LOGN coefficients in a local
// buffer and transforms it in place with NPE radix-16 PEs. A radix-16 PE
// performs four radix-2 stages on sixteen coefficients, so a transform takes
// LOGN/4 passes over the buffer; in each pass the PEs consume 16*NPE
// coefficients per cycle.
//
//   Forward (mode 0): negacyclic Cooley-Tukey NTT, natural order in,
//     bit-reversed order out. Pass p takes groups of 16 coefficients at
//     stride N/16^(p+1), lanes in natural order.
//   Inverse (mode 1): Gentleman-Sande INTT, bit-reversed order in, natural
//     order out. Pass p takes groups at stride 16^p, lanes in bit-reversed
//     order, so the same PE wiring serves both. The last pass multiplies
//     every result by `scale`; the controller sets it to N^-1 (or N^-1 times
//     the BConv constant qhat^-1 of the limb, which saves a separate
//     multiplication in front of the basis conversion).
//
// Twiddles psi^e (psi a primitive 2N-th root of unity mod q) come from an
// OF-Twist generator that is re-initialised at every `start` (2^8 + 2^9
// cycles for N = 2^16) before the first pass.
//
// Interface: load rows with wr_en/wr_row/wr_data (row r holds coefficients
// r*LANES .. r*LANES+LANES-1), pulse start with mode, m, psi, scale; `done`
// pulses one cycle when the result is in the buffer; read rows with
// rd_row/rd_data (combinational). Loading and reading are not allowed while
// busy. A transform takes about 768 + LOGN/4 * (N/LANES + 5) cycles.
//
// Following the paper: radix-2 BFUs grouped into radix-16 PEs, n PEs per
// NTTU, iterative operation, shared NTT/INTT datapath. This design's own
// choices: the buffer inside the unit (a multi-ported array), the pass
// ordering, the twiddle indexing and the folded scaling.
//
// Lint: the lane index `l` of laddr() is an int, of which only the low four bits
// select a lane; the upper bits are unused by design.
module nttu
  import he2_pkg::*;
#(
  parameter int LOGN = 16,
  parameter int NPE  = 2,
  localparam int N     = 2**LOGN,
  localparam int LANES = 16*NPE,
  localparam int RB    = LOGN - $clog2(LANES)    // row-address bits
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          mode,
  input  modulus_t      m,
  input  word_t         psi,
  input  word_t         scale,
  output logic          busy,
  output logic          done,
  input  logic          wr_en,
  input  logic [RB-1:0] wr_row,
  input  word_t         wr_data [LANES],
  input  logic [RB-1:0] rd_row,
  output word_t         rd_data [LANES]
);
  localparam int NPASS = LOGN / 4;
  localparam int G     = N / 16;                // groups per pass
  localparam int ISSUE = G / NPE;               // issue cycles per pass
  localparam int NLOOK = NPE * 32;

  initial assert (LOGN % 4 == 0 && LOGN >= 8) else $error("LOGN must be a multiple of 4");

  word_t mem [N];

  typedef enum logic [2:0] {S_IDLE, S_TWI, S_TWW, S_ISSUE, S_DRAIN} st_t;
  st_t st;

  logic [$clog2(NPASS+1)-1:0] pass;
  logic [$clog2(ISSUE+1)-1:0] gcnt;
  logic [3:0]                 drain;
  logic                       mode_r;
  modulus_t                   m_r;
  word_t                      psi_r, scale_r;
  logic                       tw_init, tw_ready;

  function automatic logic [LOGN-1:0] brev(logic [LOGN-1:0] x);
    for (int i = 0; i < LOGN; i++) brev[i] = x[LOGN-1-i];
  endfunction
  function automatic logic [3:0] brev4(logic [3:0] x);
    return {x[0], x[1], x[2], x[3]};
  endfunction

  // log2 of the group stride in the current pass
  function automatic int unsigned lg_stride(logic md, int unsigned p);
    return md ? 4*p : LOGN - 4 - 4*p;
  endfunction

  // base address of group g in pass p
  function automatic logic [LOGN-1:0] gbase(logic md, int unsigned p, logic [LOGN-1:0] g);
    int unsigned ls;
    logic [LOGN-1:0] blk, off;
    ls  = lg_stride(md, p);
    blk = g >> ls;
    off = g & ((LOGN'(1) << ls) - 1'b1);
    return (blk << (ls + 4)) | off;
  endfunction

  // address of lane l of the group with base b in pass p
  function automatic logic [LOGN-1:0] laddr(logic md, int unsigned p, logic [LOGN-1:0] b, int unsigned l);
    logic [3:0] mi;
    mi = md ? brev4(4'(l)) : 4'(l);
    return b + (LOGN'(mi) << lg_stride(md, p));
  endfunction

  // ---------------- issue side ----------------
  logic [LOGN-1:0]  ibase [NPE];
  word_t            pe_in [NPE][16];
  logic [LOGN:0]    texp  [NLOOK];
  word_t            tw    [NLOOK];
  word_t            pe_tw [NPE][4][8];
  logic             issue_v;

  assign issue_v = (st == S_ISSUE);

  always_comb begin
    for (int k = 0; k < NPE; k++) begin
      ibase[k] = gbase(mode_r, 32'(pass), LOGN'(gcnt) * LOGN'(NPE) + LOGN'(k));
      for (int l = 0; l < 16; l++) pe_in[k][l] = mem[laddr(mode_r, 32'(pass), ibase[k], l)];
      for (int c = 0; c < 4; c++)
        for (int p = 0; p < 8; p++) begin
          automatic int unsigned half = 8 >> c;
          automatic int unsigned lo   = (p / half) * 2 * half + (p % half);
          automatic logic [LOGN-1:0] j  = laddr(mode_r, 32'(pass), ibase[k], lo);
          automatic int unsigned s    = 4*pass + c;          // stage index
          automatic logic [LOGN-1:0] kk;
          automatic logic [LOGN:0]   e;
          if (!mode_r) kk = (LOGN'(1) << s) + (j >> (LOGN - s));
          else         kk = (LOGN'(1) << (LOGN - s - 1)) + (j >> (s + 1));
          e = {1'b0, brev(kk)};
          if (mode_r && e != 0) e = (LOGN+1)'(2*N) - e;      // psi^-e = psi^(2N-e)
          texp[k*32 + c*8 + p] = e;
        end
    end
    for (int k = 0; k < NPE; k++)
      for (int c = 0; c < 4; c++)
        for (int p = 0; p < 8; p++)
          pe_tw[k][c][p] = tw[k*32 + c*8 + p];
  end

  of_twist #(.LOGE(LOGN+1), .LO((LOGN+1)/2), .NLOOK(NLOOK)) u_tw (
    .clk, .rst_n, .init(tw_init), .m(m_r), .psi(psi_r), .ready(tw_ready),
    .exp_i(texp), .tw_o(tw));

  // ---------------- PEs ----------------
  logic        o_v   [NPE];
  word_t       o_d   [NPE][16];
  logic [31:0] o_tag [NPE];

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    radix16_pe u_pe (
      .clk, .rst_n, .mode(mode_r), .m(m_r),
      .in_valid(issue_v), .in_data(pe_in[k]), .tw(pe_tw[k]), .in_tag(32'(ibase[k])),
      .out_valid(o_v[k]), .out_data(o_d[k]), .out_tag(o_tag[k]));
  end

  wire last_scaled = mode_r && (32'(pass) == NPASS - 1);

  // ---------------- buffer writes ----------------
  always_ff @(posedge clk) begin
    if (wr_en && !busy)
      for (int l = 0; l < LANES; l++) mem[{wr_row, ($clog2(LANES))'(l)}] <= wr_data[l];
    for (int k = 0; k < NPE; k++)
      if (o_v[k])
        for (int l = 0; l < 16; l++)
          mem[laddr(mode_r, 32'(pass), o_tag[k][LOGN-1:0], l)] <=
            last_scaled ? mod_mul(o_d[k][l], scale_r, m_r) : o_d[k][l];
  end

  always_comb
    for (int l = 0; l < LANES; l++) rd_data[l] = mem[{rd_row, ($clog2(LANES))'(l)}];

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pass <= '0; gcnt <= '0; drain <= '0; done <= 1'b0;
      mode_r <= 1'b0; m_r <= '0; psi_r <= '0; scale_r <= '0; tw_init <= 1'b0;
    end else begin
      done    <= 1'b0;
      tw_init <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          mode_r <= mode; m_r <= m; psi_r <= psi; scale_r <= scale;
          tw_init <= 1'b1;
          st <= S_TWI;
        end
        S_TWI: st <= S_TWW;                // of_twist leaves ready low now
        S_TWW: if (tw_ready) begin
          st <= S_ISSUE; pass <= '0; gcnt <= '0;
        end
        S_ISSUE: begin
          if (gcnt == ($bits(gcnt))'(ISSUE - 1)) begin
            st <= S_DRAIN; drain <= 4'd5;
          end else gcnt <= gcnt + 1'b1;
        end
        S_DRAIN: begin
          if (drain == 0) begin
            if (pass == ($bits(pass))'(NPASS - 1)) begin
              st <= S_IDLE; done <= 1'b1;
            end else begin
              pass <= pass + 1'b1; gcnt <= '0; st <= S_ISSUE;
            end
          end else drain <= drain - 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
