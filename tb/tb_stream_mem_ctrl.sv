// tb_stream_mem_ctrl: the controller with a NoC, a scratchpad, a unit source
// and an HBM model. Runs the three job kinds, checks every row that lands in
// HBM or in the scratchpad, the one-row-per-cycle rate of unit-to-HBM
// streaming, and the scratchpad jobs while a second NoC client competes for
// the banks.
module tb_stream_mem_ctrl;
  import he2_pkg::*;
  localparam int ROW = 4, GAW = 8, HAW = 8, RW = 6, NBANK = 4, DEPTH = 32, NCLIENT = 2;
  localparam int AW = $clog2(DEPTH), HROWS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done; logic [1:0] kind;
  logic [HAW-1:0] src_base, dst_base, nrows;
  logic [RW-1:0] src_row; word_t src_data [ROW];
  logic hbm_wvalid, hbm_rreq, hbm_rvalid; logic [HAW-1:0] hbm_waddr, hbm_raddr;
  word_t hbm_wdata [ROW], hbm_rdata [ROW];
  logic [31:0] rows_moved;
  logic c_req [NCLIENT], c_we [NCLIENT], c_gnt [NCLIENT], c_rvalid [NCLIENT];
  logic [GAW-1:0] c_addr [NCLIENT];
  word_t c_wdata [NCLIENT][ROW], c_rdata [NCLIENT][ROW];
  logic b_en [NBANK], b_we [NBANK], b_rvalid [NBANK];
  logic [AW-1:0] b_addr [NBANK];
  word_t b_wdata [NBANK][ROW], b_rdata [NBANK][ROW];

  stream_mem_ctrl #(.ROW(ROW), .GAW(GAW), .HAW(HAW), .RW(RW)) dut (
    .clk, .rst_n, .start, .kind, .src_base, .dst_base, .nrows, .busy, .done,
    .src_row, .src_data, .c_req(c_req[1]), .c_we(c_we[1]), .c_addr(c_addr[1]), .c_wdata(c_wdata[1]),
    .c_gnt(c_gnt[1]), .c_rvalid(c_rvalid[1]), .c_rdata(c_rdata[1]),
    .hbm_wvalid, .hbm_waddr, .hbm_wdata, .hbm_rreq, .hbm_raddr, .hbm_rvalid, .hbm_rdata, .rows_moved);
  noc #(.NCLIENT(NCLIENT), .NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW), .GAW(GAW)) u_noc (.*);
  scratchpad #(.NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW)) spm (.clk, .rst_n, .en(b_en), .we(b_we),
    .addr(b_addr), .wdata(b_wdata), .rvalid(b_rvalid), .rdata(b_rdata));

  // unit source: row r holds r*100 + w
  always_comb for (int w = 0; w < ROW; w++) src_data[w] = 36'(src_row) * 100 + 36'(w);

  // HBM model: write immediately, read data one cycle later
  word_t hbm [HROWS][ROW];
  always @(posedge clk) begin
    if (hbm_wvalid) hbm[hbm_waddr] <= hbm_wdata;
    hbm_rvalid <= hbm_rreq;
    if (hbm_rreq) hbm_rdata <= hbm[hbm_raddr];
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run_job(input int k, input int s, input int d, input int n, output int cycles);
    int t0;
    @(negedge clk);
    kind = 2'(k); src_base = HAW'(s); dst_base = HAW'(d); nrows = HAW'(n); start = 1; t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  // tb client 0: write or read one scratchpad row (held until granted)
  task automatic spm_write(input int a, input word_t d [ROW]);
    @(negedge clk); c_req[0] = 1; c_we[0] = 1; c_addr[0] = GAW'(a); c_wdata[0] = d;
    #1; while (!c_gnt[0]) begin @(negedge clk); #1; end
    @(negedge clk); c_req[0] = 0;
  endtask
  task automatic spm_read(input int a, output word_t d [ROW]);
    @(negedge clk); c_req[0] = 1; c_we[0] = 0; c_addr[0] = GAW'(a);
    #1; while (!c_gnt[0]) begin @(negedge clk); #1; end
    @(negedge clk); c_req[0] = 0;
    while (!c_rvalid[0]) @(negedge clk);
    d = c_rdata[0];
  endtask

  bit noise = 0;
  always @(negedge clk) if (noise) begin
    // competing traffic: client 0 reads random rows
    c_req[0] = ($urandom_range(0, 1) == 1); c_we[0] = 0; c_addr[0] = GAW'($urandom_range(0, NBANK * DEPTH - 1));
  end

  initial begin
    int cycles;
    word_t row [ROW];
    c_req[0] = 0; c_we[0] = 0; c_addr[0] = 0;
    for (int w = 0; w < ROW; w++) c_wdata[0][w] = 0;
    for (int r = 0; r < HROWS; r++) for (int w = 0; w < ROW; w++) hbm[r][w] = 0;
    hbm_rvalid = 0; for (int w = 0; w < ROW; w++) hbm_rdata[w] = 0;
    #12 rst_n = 1;
    // 1. unit -> HBM, 20 rows: one row per cycle
    run_job(0, 3, 10, 20, cycles);
    @(negedge clk);
    for (int r = 0; r < 20; r++) for (int w = 0; w < ROW; w++) begin
      checks++; if (hbm[10 + r][w] !== 36'((3 + r) * 100 + w)) begin failures++; if (failures < 5) $display("unit2hbm row %0d", r); end
    end
    checks++; if (cycles > 20 + 2) begin failures++; $display("unit2hbm took %0d cycles for 20 rows", cycles); end
    // 2. scratchpad -> HBM, 16 rows, first quiet then with competing traffic
    for (int r = 0; r < 32; r++) begin
      for (int w = 0; w < ROW; w++) row[w] = 36'(r * 1000 + w + 7);
      spm_write(r, row);
    end
    run_job(1, 0, 40, 16, cycles);
    checks++; if (cycles > 16 + 4) begin failures++; $display("spm2hbm took %0d cycles for 16 rows", cycles); end
    noise = 1;
    run_job(1, 16, 0, 16, cycles);
    noise = 0; @(negedge clk); c_req[0] = 0;
    @(negedge clk);
    for (int r = 0; r < 16; r++) for (int w = 0; w < ROW; w++) begin
      checks += 2;
      if (hbm[40 + r][w] !== 36'(r * 1000 + w + 7)) begin failures++; if (failures < 5) $display("spm2hbm row %0d", r); end
      if (hbm[r][w] !== 36'((16 + r) * 1000 + w + 7)) begin failures++; if (failures < 5) $display("spm2hbm noisy row %0d", r); end
    end
    // 3. HBM -> scratchpad, 12 rows, with competing traffic
    noise = 1;
    run_job(2, 10, 64, 12, cycles);
    noise = 0; @(negedge clk); c_req[0] = 0;
    repeat (3) @(negedge clk);
    for (int r = 0; r < 12; r++) begin
      spm_read(64 + r, row);
      for (int w = 0; w < ROW; w++) begin
        checks++; if (row[w] !== hbm[10 + r][w]) begin failures++; if (failures < 5) $display("hbm2spm row %0d", r); end
      end
    end
    checks++; if (rows_moved != 20 + 16 + 16 + 12) begin failures++; $display("rows_moved %0d", rows_moved); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
