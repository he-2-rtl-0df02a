// tb_of_twist: table generation time and psi^e for every exponent of a
// small configuration, against modular exponentiation.
module tb_of_twist;
  import he2_pkg::*;
  import tb_util_pkg::*;
  localparam int LOGE = 9, LO = 4, NLOOK = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic init = 0, ready;
  modulus_t m; word_t psi;
  logic [LOGE-1:0] exp_i [NLOOK];
  word_t tw_o [NLOOK];
  of_twist #(.LOGE(LOGE), .LO(LO), .NLOOK(NLOOK)) dut (.*);
  initial begin
    for (int pi = 0; pi < 3; pi++) begin
      int cyc;
      logic [35:0] q;
      q = PRIMES[pi]; m = mk_mod(q); psi = psi_for(pi, LOGE - 1);
      #4 rst_n = 1;
      @(negedge clk) init = 1; @(negedge clk) init = 0; cyc = 1;
      while (!ready) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 2**LO + 2**(LOGE-LO) + 3) begin failures++; $display("init took %0d", cyc); end
      for (int e = 0; e < 2**LOGE; e += NLOOK) begin
        for (int k = 0; k < NLOOK; k++) exp_i[k] = LOGE'(e + k);
        #1;
        for (int k = 0; k < NLOOK; k++) begin
          checks++;
          if (tw_o[k] !== rpow(psi, e + k, q)) begin failures++; if (failures < 5) $display("e=%0d", e+k); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
