// tb_scratchpad: random reads and writes on all banks at once against a
// reference array; checks data and the one-cycle read latency.
module tb_scratchpad;
  import he2_pkg::*;
  localparam int NBANK = 5, DEPTH = 16, ROW = 4, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic en [NBANK], we [NBANK], rvalid [NBANK];
  logic [AW-1:0] addr [NBANK];
  word_t wdata [NBANK][ROW], rdata [NBANK][ROW];
  scratchpad #(.NBANK(NBANK), .DEPTH(DEPTH), .ROW(ROW)) dut (.*);
  word_t ref_m [NBANK][DEPTH][ROW];
  word_t expd [NBANK][ROW];
  bit    expv [NBANK];
  initial begin
    for (int b = 0; b < NBANK; b++) begin en[b] = 0; we[b] = 0; addr[b] = 0; expv[b] = 0; end
    #4 rst_n = 1;
    // fill everything first so that no unwritten row is read
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        en[b] = 1; we[b] = 1; addr[b] = AW'(r);
        for (int w = 0; w < ROW; w++) begin wdata[b][w] = {$urandom, $urandom} % 64'h1000000000; ref_m[b][r][w] = wdata[b][w]; end
      end
    end
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        checks++;
        if (rvalid[b] !== expv[b]) begin failures++; $display("rvalid bank %0d", b); end
        if (expv[b]) for (int w = 0; w < ROW; w++) begin
          checks++; if (rdata[b][w] !== expd[b][w]) begin failures++; if (failures < 5) $display("data bank %0d", b); end
        end
        en[b] = ($urandom_range(0, 3) != 0); we[b] = $urandom_range(0, 1); addr[b] = AW'($urandom_range(0, DEPTH - 1));
        for (int w = 0; w < ROW; w++) wdata[b][w] = {$urandom, $urandom} % 64'h1000000000;
        expv[b] = en[b] && !we[b];
        if (expv[b]) expd[b] = ref_m[b][addr[b]];
        if (en[b] && we[b]) ref_m[b][addr[b]] = wdata[b];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
