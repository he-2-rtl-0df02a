// tb_xmu_pe: element-wise ops, a 3-beat inner product, the fused IP+PMul
// and the bypass, against % arithmetic.
module tb_xmu_pe;
  import he2_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, first = 0, last = 0, out_valid; xm_op_t op; modulus_t m;
  logic [255:0] a, b, y;
  xmu_pe dut (.*);
  logic [35:0] q;
  logic [35:0] av [4], bv [4], acc [4];

  task automatic beat(input xm_op_t o, input logic f, input logic l);
    @(negedge clk);
    op = o; first = f; last = l; in_valid = 1;
    a = '0; b = '0;
    for (int k = 0; k < 4; k++) begin av[k] = rnd(q); bv[k] = rnd(q); a[36*k +: 36] = av[k]; b[36*k +: 36] = bv[k]; end
    if (o == XM_BYPASS) a[255:144] = {4{28'habcdef1}};
    @(negedge clk); in_valid = 0;
  endtask
  task automatic expect_y(input logic [35:0] e [4]);
    checks++;
    if (!out_valid) begin failures++; $display("no output op %0d", op); end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (y[36*k +: 36] !== e[k]) begin failures++; if (failures < 6) $display("op %0d lane %0d got %h exp %h", op, k, y[36*k +: 36], e[k]); end
    end
  endtask

  initial begin
    logic [35:0] e [4];
    q = PRIMES[3]; m = mk_mod(q);
    #4 rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      beat(XM_CADD, 1, 1); for (int k = 0; k < 4; k++) e[k] = radd(av[k], bv[k], q); expect_y(e);
      beat(XM_CSUB, 1, 1); for (int k = 0; k < 4; k++) e[k] = rsub(av[k], bv[k], q); expect_y(e);
      beat(XM_PMUL, 1, 1); for (int k = 0; k < 4; k++) e[k] = rmul(av[k], bv[k], q); expect_y(e);
      // inner product over 3 beats (dnum = 3)
      for (int k = 0; k < 4; k++) acc[k] = 0;
      for (int g = 0; g < 3; g++) begin
        beat(XM_IP, g == 0, g == 2);
        for (int k = 0; k < 4; k++) acc[k] = radd(acc[k], rmul(av[k], bv[k], q), q);
        if (g < 2) begin checks++; if (out_valid) begin failures++; $display("early output"); end end
      end
      expect_y(acc);
      // fused: 3 IP beats then the plaintext beat
      for (int k = 0; k < 4; k++) acc[k] = 0;
      for (int g = 0; g < 3; g++) begin
        beat(XM_IP_PMUL, g == 0, 0);
        for (int k = 0; k < 4; k++) acc[k] = radd(acc[k], rmul(av[k], bv[k], q), q);
      end
      beat(XM_IP_PMUL, 0, 1);
      for (int k = 0; k < 4; k++) e[k] = rmul(acc[k], av[k], q);
      expect_y(e);
      beat(XM_BYPASS, 1, 1);
      checks++; if (y !== a) begin failures++; $display("bypass"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
