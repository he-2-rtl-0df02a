// tb_eweu: every operation on random vectors against % arithmetic.
module tb_eweu;
  import he2_pkg::*;
  import tb_util_pkg::*;
  localparam int LANES = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid; ew_op_t op; modulus_t m;
  word_t a0[LANES], a1[LANES], b0[LANES], b1[LANES], c0[LANES], c1[LANES], y0[LANES], y1[LANES], y2[LANES];
  eweu #(.LANES(LANES)) dut (.*);
  initial begin
    logic [35:0] q;
    q = PRIMES[1]; m = mk_mod(q);
    #4 rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      @(negedge clk);
      op = ew_op_t'(it % 5);
      for (int l = 0; l < LANES; l++) begin
        a0[l] = rnd(q); a1[l] = rnd(q); b0[l] = rnd(q); b1[l] = rnd(q); c0[l] = rnd(q); c1[l] = rnd(q);
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int l = 0; l < LANES; l++) begin
        logic [35:0] e0, e1, e2;
        e2 = 0;
        case (op)
          EW_PMUL:  begin e0 = rmul(a0[l], c0[l], q); e1 = rmul(a1[l], c0[l], q); end
          EW_CADD:  begin e0 = radd(a0[l], b0[l], q); e1 = radd(a1[l], b1[l], q); end
          EW_CSUB:  begin e0 = rsub(a0[l], b0[l], q); e1 = rsub(a1[l], b1[l], q); end
          EW_IPMAC: begin e0 = radd(b0[l], rmul(a0[l], c0[l], q), q); e1 = radd(b1[l], rmul(a0[l], c1[l], q), q); end
          default:  begin e0 = rmul(a0[l], c0[l], q);
                          e1 = radd(rmul(a0[l], c1[l], q), rmul(a1[l], c0[l], q), q);
                          e2 = rmul(a1[l], c1[l], q); end
        endcase
        checks += 3;
        if (y0[l] !== e0) begin failures++; if (failures < 5) $display("op %0d y0", op); end
        if (y1[l] !== e1) begin failures++; if (failures < 5) $display("op %0d y1", op); end
        if (y2[l] !== e2) begin failures++; if (failures < 5) $display("op %0d y2", op); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
