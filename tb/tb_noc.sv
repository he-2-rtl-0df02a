// tb_noc: three clients issue random reads and writes to a four-bank
// scratchpad through the NoC, holding each request until granted. Checks
// read data against a reference updated in grant order, the two-cycle grant
// to read-data latency, one grant per bank per cycle, and that no waiting
// client is passed over more than NCLIENT-1 times (rotating priority).
module tb_noc;
  import he2_pkg::*;
  localparam int NCLIENT = 3, NBANK = 4, DEPTH = 8, ROW = 2, GAW = 6, AW = $clog2(DEPTH);
  localparam int NROWS = NBANK * DEPTH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic c_req [NCLIENT], c_we [NCLIENT], c_gnt [NCLIENT], c_rvalid [NCLIENT];
  logic [GAW-1:0] c_addr [NCLIENT];
  word_t c_wdata [NCLIENT][ROW], c_rdata [NCLIENT][ROW];
  logic b_en [NBANK], b_we [NBANK], b_rvalid [NBANK];
  logic [AW-1:0] b_addr [NBANK];
  word_t b_wdata [NBANK][ROW], b_rdata [NBANK][ROW];
  noc #(.NCLIENT(NCLIENT), .NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW), .GAW(GAW)) dut (.*);
  scratchpad #(.NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW)) spm (.clk, .rst_n, .en(b_en), .we(b_we),
    .addr(b_addr), .wdata(b_wdata), .rvalid(b_rvalid), .rdata(b_rdata));

  word_t ref_m [NROWS][ROW];
  word_t pipe_d [NCLIENT][2][ROW];
  bit    pipe_v [NCLIENT][2];
  int    waited [NCLIENT];
  int    conflicts = 0;

  initial begin
    for (int c = 0; c < NCLIENT; c++) begin c_req[c] = 0; c_we[c] = 0; c_addr[c] = 0; waited[c] = 0; pipe_v[c] = '{0, 0}; end
    #12 rst_n = 1;
    // client 0 fills every row
    for (int r = 0; r < NROWS; r++) begin
      @(negedge clk);
      c_req[0] = 1; c_we[0] = 1; c_addr[0] = GAW'(r);
      for (int w = 0; w < ROW; w++) begin c_wdata[0][w] = 36'(r * 16 + w); ref_m[r][w] = c_wdata[0][w]; end
      #1; checks++; if (!c_gnt[0]) failures++;
    end
    @(negedge clk) c_req[0] = 0;
    repeat (3) @(negedge clk);
    for (int it = 0; it < 2000; it++) begin
      int gcount [NBANK];
      @(negedge clk);
      // check read data returned this cycle
      for (int c = 0; c < NCLIENT; c++) begin
        checks++;
        if (c_rvalid[c] !== pipe_v[c][1]) begin failures++; if (failures < 5) $display("rvalid client %0d", c); end
        if (pipe_v[c][1]) for (int w = 0; w < ROW; w++) begin
          checks++; if (c_rdata[c][w] !== pipe_d[c][1][w]) begin failures++; if (failures < 5) $display("rdata client %0d", c); end
        end
        pipe_v[c][1] = pipe_v[c][0]; pipe_d[c][1] = pipe_d[c][0]; pipe_v[c][0] = 0;
      end
      // new requests for clients without a pending one
      for (int c = 0; c < NCLIENT; c++) if (!c_req[c] && $urandom_range(0, 3) != 0) begin
        c_req[c] = 1; c_we[c] = $urandom_range(0, 1);
        c_addr[c] = GAW'($urandom_range(0, 2 * NBANK - 1));   // few rows: many conflicts
        for (int w = 0; w < ROW; w++) c_wdata[c][w] = {$urandom, $urandom} % 64'h1000000000;
      end
      #1;
      for (int b = 0; b < NBANK; b++) gcount[b] = 0;
      for (int c = 0; c < NCLIENT; c++) if (c_req[c]) begin
        for (int d = 0; d < NCLIENT; d++) if (d != c && c_req[d] && c_addr[d] % NBANK == c_addr[c] % NBANK) begin conflicts++; break; end
        if (c_gnt[c]) begin
          gcount[c_addr[c] % NBANK]++;
          if (c_we[c]) ref_m[c_addr[c]] = c_wdata[c];
          else begin pipe_v[c][0] = 1; pipe_d[c][0] = ref_m[c_addr[c]]; end
          waited[c] = 0;
        end else begin
          waited[c]++;
          checks++; if (waited[c] > NCLIENT - 1) begin failures++; $display("client %0d starved", c); end
        end
      end
      for (int b = 0; b < NBANK; b++) begin checks++; if (gcount[b] > 1) failures++; end
      @(posedge clk); #1;
      for (int c = 0; c < NCLIENT; c++) if (c_req[c] && waited[c] == 0) c_req[c] = 0;
    end
    checks++; if (conflicts == 0) begin failures++; $display("no bank conflict exercised"); end
    $display("bank conflicts seen: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
