// tb_xmu: the xMU with a behavioural bank model (one write and two reads per
// bank per cycle, read data one cycle later). Loads three ciphertext limbs,
// three key limbs and a plaintext limb through the host port, runs an inner
// product, the fused inner product + plaintext multiplication, an addition
// and a multiplication, reads the results back through the host port and
// compares them with % arithmetic. Checks the command time: one beat per
// bank per cycle, nbeat * (beats per output) cycles plus a short pipeline.
module tb_xmu;
  import he2_pkg::*;
  import tb_util_pkg::*;
  localparam int NPE = 8, BAW = 10, HAW = 8, ROW = 32;
  localparam int N = 256, RPL = N / ROW, BPB = N / 4 / NPE;  // rows per limb, beats per bank per limb
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cmd_start = 0, busy, cmd_done, hbm_ready, hbm_wvalid = 0, hbm_rreq = 0, hbm_rvalid;
  xm_op_t cmd_op; modulus_t cmd_m;
  logic [BAW-1:0] a_base, b_base, p_base, y_base, a_stride, b_stride, nbeat;
  logic [7:0] nacc;
  logic [HAW-1:0] hbm_waddr = 0, hbm_raddr = 0;
  word_t hbm_wdata [ROW], hbm_rdata [ROW];
  logic bk_re [NPE], bk_we [NPE];
  logic [BAW-1:0] bk_raddr_a [NPE], bk_raddr_b [NPE], bk_waddr [NPE];
  logic [255:0] bk_rdata_a [NPE], bk_rdata_b [NPE], bk_wdata [NPE];
  logic [31:0] fused_ops;
  xmu #(.NPE(NPE), .BAW(BAW), .HAW(HAW)) dut (.*);

  logic [255:0] bank [NPE][2**BAW];
  always @(posedge clk)
    for (int p = 0; p < NPE; p++) begin
      if (bk_re[p]) begin bk_rdata_a[p] <= bank[p][bk_raddr_a[p]]; bk_rdata_b[p] <= bank[p][bk_raddr_b[p]]; end
      if (bk_we[p]) bank[p][bk_waddr[p]] <= bk_wdata[p];
    end

  int cyc = 0;
  always @(posedge clk) cyc++;
  logic [35:0] q;
  logic [35:0] poly [16][N];      // polys 0..2 ct, 3..5 evk, 6 plaintext, 8.. results

  task automatic host_write(input int pidx);
    for (int r = 0; r < RPL; r++) begin
      @(negedge clk);
      hbm_wvalid = 1; hbm_waddr = HAW'(pidx * RPL + r);
      for (int w = 0; w < ROW; w++) hbm_wdata[w] = poly[pidx][r * ROW + w];
    end
    @(negedge clk) hbm_wvalid = 0;
  endtask
  task automatic host_check(input int pidx, input string what);
    for (int r = 0; r < RPL; r++) begin
      @(negedge clk); hbm_rreq = 1; hbm_raddr = HAW'(pidx * RPL + r);
      @(negedge clk); hbm_rreq = 0;
      checks++; if (!hbm_rvalid) failures++;
      for (int w = 0; w < ROW; w++) begin
        checks++;
        if (hbm_rdata[w] !== poly[pidx][r * ROW + w]) begin failures++; if (failures < 5) $display("%s word %0d", what, r * ROW + w); end
      end
    end
  endtask
  task automatic cmd(input xm_op_t o, input int a, input int b, input int p, input int y, input int na, output int cycles);
    int t0;
    @(negedge clk);
    cmd_op = o; cmd_m = mk_mod(q);
    a_base = BAW'(a * BPB); b_base = BAW'(b * BPB); p_base = BAW'(p * BPB); y_base = BAW'(y * BPB);
    a_stride = BAW'(BPB); b_stride = BAW'(BPB); nacc = 8'(na); nbeat = BAW'(BPB);
    cmd_start = 1; t0 = cyc;
    @(negedge clk) cmd_start = 0;
    checks++; if (hbm_ready) begin failures++; $display("hbm_ready while busy"); end
    while (!cmd_done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    int cycles, nf;
    for (int p = 0; p < NPE; p++) begin
      for (int i = 0; i < 2**BAW; i++) bank[p][i] = '0;
      bk_rdata_a[p] = '0; bk_rdata_b[p] = '0;
    end
    for (int w = 0; w < ROW; w++) hbm_wdata[w] = 0;
    cmd_op = XM_CADD; cmd_m = '0; a_base = 0; b_base = 0; p_base = 0; y_base = 0; a_stride = 0; b_stride = 0; nacc = 0; nbeat = 0;
    q = PRIMES[4];
    #12 rst_n = 1;
    for (int pi = 0; pi < 7; pi++) begin
      for (int i = 0; i < N; i++) poly[pi][i] = rnd(q);
      host_write(pi);
    end
    host_check(6, "host port round trip");
    // inner product: poly 8 = sum_g ct_g * evk_g
    cmd(XM_IP, 0, 3, 0, 8, 3, cycles);
    for (int i = 0; i < N; i++) begin
      poly[8][i] = 0;
      for (int g = 0; g < 3; g++) poly[8][i] = radd(poly[8][i], rmul(poly[g][i], poly[3 + g][i], q), q);
    end
    checks++; if (cycles > BPB * 3 + 6) begin failures++; $display("IP took %0d cycles", cycles); end
    // fused: poly 9 = (sum_g ct_g * evk_g) * pt
    nf = fused_ops;
    cmd(XM_IP_PMUL, 0, 3, 6, 9, 3, cycles);
    for (int i = 0; i < N; i++) poly[9][i] = rmul(poly[8][i], poly[6][i], q);
    checks++; if (cycles > BPB * 4 + 6) begin failures++; $display("IP+PMul took %0d cycles", cycles); end
    checks++; if (fused_ops - nf != BPB) begin failures++; $display("fused_ops %0d", fused_ops - nf); end
    // element-wise
    cmd(XM_CADD, 0, 1, 0, 10, 1, cycles);
    for (int i = 0; i < N; i++) poly[10][i] = radd(poly[0][i], poly[1][i], q);
    checks++; if (cycles > BPB + 6) begin failures++; $display("CAdd took %0d cycles", cycles); end
    cmd(XM_PMUL, 2, 6, 0, 11, 1, cycles);
    for (int i = 0; i < N; i++) poly[11][i] = rmul(poly[2][i], poly[6][i], q);
    cmd(XM_CSUB, 4, 5, 0, 12, 1, cycles);
    for (int i = 0; i < N; i++) poly[12][i] = rsub(poly[4][i], poly[5][i], q);
    host_check(8, "IP");
    host_check(9, "IP+PMul");
    host_check(10, "CAdd");
    host_check(11, "PMul");
    host_check(12, "CSub");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
