// tb_nttu: forward NTT against a direct evaluation
// a_hat[i] = sum_j a[j] * psi^((2*brev(i)+1)*j), then the inverse NTT with
// scale N^-1 must give the input back. Also checks the cycle count.
module tb_nttu;
  import he2_pkg::*;
  import tb_util_pkg::*;
  localparam int LOGN = 8, NPE = 2, N = 2**LOGN, LANES = 16*NPE, ROWS = N/LANES;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, mode = 0, busy, done, wr_en = 0;
  modulus_t m; word_t psi, scale;
  logic [$clog2(ROWS)-1:0] wr_row = 0, rd_row = 0;
  word_t wr_data [LANES], rd_data [LANES];

  nttu #(.LOGN(LOGN), .NPE(NPE)) dut (.*);

  word_t a [N], ah [N], got [N];
  int cyc;

  function automatic int brv(int x);
    int r = 0;
    for (int i = 0; i < LOGN; i++) if (x & (1 << i)) r |= 1 << (LOGN-1-i);
    return r;
  endfunction

  task automatic load(input word_t v [N]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); wr_en = 1; wr_row = r[$clog2(ROWS)-1:0];
      for (int l = 0; l < LANES; l++) wr_data[l] = v[r*LANES+l];
    end
    @(negedge clk); wr_en = 0;
  endtask
  task automatic run(input logic md, input word_t sc);
    @(negedge clk); start = 1; mode = md; scale = sc;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask
  task automatic unload();
    for (int r = 0; r < ROWS; r++) begin
      rd_row = r[$clog2(ROWS)-1:0]; #1;
      for (int l = 0; l < LANES; l++) got[r*LANES+l] = rd_data[l];
    end
  endtask

  initial begin
    #200000; failures++; $display("watchdog"); 
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int pi = 0; pi < 2; pi++) begin
      logic [35:0] q;
      q = PRIMES[pi]; m = mk_mod(q); psi = psi_for(pi, LOGN);
      for (int i = 0; i < N; i++) a[i] = rnd(q);
      for (int i = 0; i < N; i++) begin
        logic [35:0] acc, x, step;
        acc = 0; x = 1;
        step = rpow(psi, 2*brv(i)+1, q);
        for (int j = 0; j < N; j++) begin
          acc = radd(acc, rmul(a[j], x, q), q);
          x = rmul(x, step, q);
        end
        ah[i] = acc;
      end
      #5 rst_n = 1;
      load(a); run(0, 0); unload();
      for (int i = 0; i < N; i++) begin
        checks++;
        if (got[i] !== ah[i]) begin
          failures++;
          if (failures < 5) $display("NTT mismatch q%0d i=%0d got %h exp %h", pi, i, got[i], ah[i]);
        end
      end
      // latency: twiddle init 2^4+2^5 plus LOGN/4 passes of N/LANES + 6
      checks++;
      if (cyc > (16 + 32 + 8) + (LOGN/4) * (N/LANES + 8)) begin
        failures++; $display("NTT took %0d cycles", cyc);
      end
      load(got); run(1, rinv(N, q)); unload();
      for (int i = 0; i < N; i++) begin
        checks++;
        if (got[i] !== a[i]) begin
          failures++;
          if (failures < 10) $display("INTT mismatch q%0d i=%0d got %h exp %h", pi, i, got[i], a[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
