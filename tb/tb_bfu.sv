// tb_bfu: random butterflies in both modes against % arithmetic.
module tb_bfu;
  import he2_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic mode; word_t a, b, w, x, y; modulus_t m;
  bfu dut (.*);
  initial begin
    for (int pi = 0; pi < NPRIME; pi++) begin
      logic [35:0] q;
      q = PRIMES[pi]; m = mk_mod(q);
      for (int k = 0; k < 500; k++) begin
        logic [35:0] ex, ey;
        a = rnd(q); b = rnd(q); w = rnd(q);
        if (k < 4) begin a = q - 1; b = (k[0]) ? q - 1 : 0; w = q - 1; end
        mode = k[0];
        #1;
        if (!mode) begin ex = radd(a, rmul(w, b, q), q); ey = rsub(a, rmul(w, b, q), q); end
        else begin ex = radd(a, b, q); ey = rmul(rsub(a, b, q), w, q); end
        checks += 2;
        if (x !== ex) begin failures++; if (failures < 5) $display("x mismatch mode %0d", mode); end
        if (y !== ey) begin failures++; if (failures < 5) $display("y mismatch mode %0d", mode); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
