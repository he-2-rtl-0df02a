// tb_bconvu: a stream of random columns, one per cycle, against
// sum_i [x_i]_p * c_i mod p computed with %, checking the pipeline latency.
module tb_bconvu;
  import he2_pkg::*;
  import tb_util_pkg::*;
  localparam int ALPHA = 12, NV = 200;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  modulus_t m; word_t c [ALPHA], x [ALPHA], y;
  logic in_valid = 0, out_valid; logic [15:0] in_tag = 0, out_tag;
  bconvu #(.ALPHA(ALPHA)) dut (.*);
  logic [35:0] expv [NV]; int sent [NV]; int cyc = 0, ngot = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (y !== expv[out_tag]) begin failures++; if (failures < 5) $display("tag %0d got %h exp %h", out_tag, y, expv[out_tag]); end
    if (cyc - sent[out_tag] != 1 + $clog2(ALPHA) + 1) begin  // +1: the output is sampled one edge after it is registered
      failures++; $display("latency %0d", cyc - sent[out_tag]); end
    ngot++;
  end
  initial begin
    logic [35:0] p;
    p = PRIMES[5]; m = mk_mod(p);
    for (int i = 0; i < ALPHA; i++) c[i] = rnd(p);
    #4 rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      logic [35:0] acc;
      @(negedge clk);
      acc = 0;
      for (int i = 0; i < ALPHA; i++) begin
        // limb values below 2^36 but possibly above p
        x[i] = (v < 3) ? 36'hfffffffff - 36'(i) : {$urandom, $urandom} % 64'h1000000000;
        acc = radd(acc, rmul(36'({28'd0, x[i]} % {28'd0, p}), c[i], p), p);
      end
      expv[v] = acc; in_valid = 1; in_tag = 16'(v);
      @(posedge clk); sent[v] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++; if (ngot != NV) begin failures++; $display("got %0d", ngot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
