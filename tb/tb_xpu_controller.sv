// tb_xpu_controller: three stage engines with random busy times driven by
// the controller. Checks the ordering rules (stage order per group, group
// order per stage, one group per stage, double-buffer dependency), that
// stages overlap, and the schedule length for equal stage times:
// (DNUM + NSTAGE - 1) stage slots rather than DNUM * NSTAGE.
module tb_xpu_controller;
  localparam int DNUM = 3, NSTAGE = 3, NBUF = 2, GW = $clog2(DNUM + 1);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done;
  logic stage_start [NSTAGE], stage_done [NSTAGE];
  logic [GW-1:0] stage_group [NSTAGE];
  logic [31:0] overlap_cycles, wait_cycles;
  xpu_controller #(.DNUM(DNUM), .NSTAGE(NSTAGE), .NBUF(NBUF)) dut (.*);

  int cyc = 0;
  int t_start [NSTAGE][DNUM], t_done [NSTAGE][DNUM];
  int left [NSTAGE], cur [NSTAGE];
  bit act [NSTAGE];
  int dur_fixed = 0;
  always @(posedge clk) cyc++;

  // stage engines: busy for a random or fixed time, then a done pulse
  always @(negedge clk) begin
    for (int s = 0; s < NSTAGE; s++) begin
      stage_done[s] = 0;
      if (act[s]) begin
        if (left[s] == 0) begin stage_done[s] = 1; act[s] = 0; t_done[s][cur[s]] = cyc; end
        else left[s]--;
      end
      if (stage_start[s]) begin
        checks++;
        if (act[s]) begin failures++; $display("stage %0d started while busy", s); end
        act[s] = 1; cur[s] = stage_group[s]; t_start[s][cur[s]] = cyc;
        left[s] = dur_fixed ? dur_fixed : $urandom_range(2, 30);
      end
    end
  end

  initial begin
    for (int s = 0; s < NSTAGE; s++) begin stage_done[s] = 0; act[s] = 0; end
    #4 rst_n = 1;
    for (int run = 0; run < 21; run++) begin
      int t0, t1;
      dur_fixed = (run == 20) ? 20 : 0;
      for (int s = 0; s < NSTAGE; s++) for (int g = 0; g < DNUM; g++) begin t_start[s][g] = -1; t_done[s][g] = -1; end
      @(negedge clk) start = 1; t0 = cyc;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      t1 = cyc;
      for (int s = 0; s < NSTAGE; s++) for (int g = 0; g < DNUM; g++) begin
        checks++;
        if (t_start[s][g] < 0 || t_done[s][g] < 0) begin failures++; $display("run %0d s%0d g%0d never ran", run, s, g); continue; end
        if (s > 0) begin checks++; if (t_start[s][g] <= t_done[s-1][g]) begin failures++; $display("stage order"); end end
        if (g > 0) begin checks++; if (t_start[s][g] <= t_done[s][g-1]) begin failures++; $display("group order"); end end
        if (s < NSTAGE - 1 && g >= NBUF) begin
          checks++; if (t_start[s][g] <= t_done[s+1][g-NBUF]) begin failures++; $display("buffer reuse"); end
        end
      end
      if (dur_fixed) begin
        // each stage slot is 21 busy cycles plus at most 2 cycles of handshake
        checks++;
        if (t1 - t0 > (DNUM + NSTAGE - 1) * (dur_fixed + 3) + 2 || t1 - t0 >= DNUM * NSTAGE * (dur_fixed + 1)) begin
          failures++; $display("schedule length %0d", t1 - t0);
        end
      end
    end
    checks++; if (overlap_cycles == 0) begin failures++; $display("no overlap"); end
    $display("overlap_cycles=%0d wait_cycles=%0d", overlap_cycles, wait_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
