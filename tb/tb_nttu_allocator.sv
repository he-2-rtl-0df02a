// tb_nttu_allocator: sweeps the work split between the two paths and checks
// the unit counts, the per-unit role/index/half map and the one-cycle
// response time against the proportional rule.
module tb_nttu_allocator;
  localparam int NUM_NTTU = 96, NHALF = 2, WW = 8, H = NUM_NTTU / NHALF;
  localparam int UW = $clog2(NUM_NTTU + 1);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic req = 0, valid;
  logic [WW-1:0] work_a, work_b;
  logic [UW-1:0] n_a, n_b, idx [NUM_NTTU], half [NUM_NTTU];
  logic role [NUM_NTTU];
  nttu_allocator #(.NUM_NTTU(NUM_NTTU), .NHALF(NHALF), .WW(WW)) dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; if (failures < 8) $display("FAIL %s a=%0d b=%0d", s, work_a, work_b); end
  endtask
  initial begin
    #4 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int ea, cnt_a, cnt_b;
      @(negedge clk);
      work_a = (it < 3) ? WW'(it * 12) : WW'($urandom_range(0, 48));
      work_b = (it < 3) ? WW'(36 - it * 12) : WW'($urandom_range(0, 48));
      if (work_a == 0 && work_b == 0) work_b = 1;
      req = 1;
      @(negedge clk); req = 0;
      chk(valid, "valid one cycle after req");
      if (work_b == 0) ea = H;
      else if (work_a == 0) ea = 0;
      else begin
        ea = (H * work_a + (work_a + work_b) / 2) / (work_a + work_b);
        if (ea < 1) ea = 1;
        if (ea > H - 1) ea = H - 1;
      end
      chk(n_a == ea && n_b == H - ea, "counts");
      for (int h = 0; h < NHALF; h++) begin
        cnt_a = 0; cnt_b = 0;
        for (int u = 0; u < NUM_NTTU; u++) if (half[u] == h) begin
          if (!role[u]) begin chk(idx[u] == cnt_a, "index A"); cnt_a++; end
          else          begin chk(idx[u] == cnt_b, "index B"); cnt_b++; end
        end
        chk(cnt_a == ea && cnt_b == H - ea, "units per half");
      end
      @(negedge clk);
      chk(!valid, "valid is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
