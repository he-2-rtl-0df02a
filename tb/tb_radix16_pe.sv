// tb_radix16_pe: four radix-2 stages on 16 lanes against a software model
// of the same pairing (lane i with i + 8>>c in column c), both modes, with
// back-to-back groups and a check of the 4-cycle latency.
module tb_radix16_pe;
  import he2_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic mode = 0, in_valid = 0, out_valid;
  modulus_t m;
  word_t in_data [16], out_data [16], tw [4][8];
  logic [31:0] in_tag = 0, out_tag;
  radix16_pe dut (.*);

  localparam int NG = 20;
  word_t exp_d [NG][16];
  int sent_cyc [NG];
  int cyc = 0, ngot = 0;
  always @(posedge clk) cyc++;

  function automatic void model(input logic md, input logic [35:0] q, inout word_t v [16], input word_t t [4][8]);
    for (int c = 0; c < 4; c++) begin
      automatic int half = 8 >> c;
      for (int p = 0; p < 8; p++) begin
        automatic int lo = (p / half) * 2 * half + (p % half);
        automatic int hi = lo + half;
        automatic logic [35:0] A = v[lo], B = v[hi];
        if (!md) begin v[lo] = radd(A, rmul(t[c][p], B, q), q); v[hi] = rsub(A, rmul(t[c][p], B, q), q); end
        else begin v[lo] = radd(A, B, q); v[hi] = rmul(rsub(A, B, q), t[c][p], q); end
      end
    end
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int g = int'(out_tag);
    for (int l = 0; l < 16; l++) begin
      checks++;
      if (out_data[l] !== exp_d[g][l]) begin failures++; if (failures < 5) $display("grp %0d lane %0d", g, l); end
    end
    checks++;
    if (cyc - sent_cyc[g] != 4 + 1) begin  // +1: the output is sampled one edge after it is registered
      failures++; $display("latency %0d", cyc - sent_cyc[g]); end
    ngot++;
  end

  initial begin
    logic [35:0] q;
    q = PRIMES[2]; m = mk_mod(q);
    #4 rst_n = 1;
    for (int md = 0; md < 2; md++) begin
      @(negedge clk); mode = md[0];
      for (int g = md*NG/2; g < (md+1)*NG/2; g++) begin
        for (int l = 0; l < 16; l++) begin in_data[l] = rnd(q); exp_d[g][l] = in_data[l]; end
        for (int c = 0; c < 4; c++) for (int p = 0; p < 8; p++) tw[c][p] = rnd(q);
        model(mode, q, exp_d[g], tw);
        in_valid = 1; in_tag = g;
        @(posedge clk); sent_cyc[g] = cyc; @(negedge clk);
      end
      in_valid = 0;
      repeat (8) @(negedge clk);
    end
    checks++; if (ngot != NG) begin failures++; $display("got %0d groups", ngot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
