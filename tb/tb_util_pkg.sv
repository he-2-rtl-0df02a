// tb_util_pkg: reference arithmetic for the testbenches, written with the
// simulator's own wide-integer % operator so that it does not share code
// with the Barrett reduction in the design.
package tb_util_pkg;
  import he2_pkg::*;

  // NTT-friendly 36-bit primes q = 1 mod 2^17 and a primitive 2^17-th root
  // of unity for each (psi^(2^16) = -1 mod q).
  localparam int NPRIME = 8;
  localparam logic [35:0] PRIMES [NPRIME] = '{
    36'hffff00001, 36'hfff9c0001, 36'hfff8e0001, 36'hfff840001,
    36'hfff700001, 36'hfff640001, 36'hfff4c0001, 36'hfff3c0001};
  localparam logic [35:0] PSI17 [NPRIME] = '{
    36'hbc20141b6, 36'hc73d58359, 36'hff07c92ea, 36'hc5f8a0d03,
    36'haed47a529, 36'h4309fbdb3, 36'hb4a941546, 36'hcd22065a0};

  function automatic modulus_t mk_mod(logic [35:0] q);
    logic [72:0] t;
    modulus_t r;
    t = (73'd1 << 72) / {37'd0, q};
    r.q = q; r.mu = t[36:0];
    return r;
  endfunction

  function automatic logic [35:0] rmul(logic [35:0] a, logic [35:0] b, logic [35:0] q);
    logic [71:0] p;
    p = {36'd0, a} * {36'd0, b};
    return 36'(p % {36'd0, q});
  endfunction
  function automatic logic [35:0] radd(logic [35:0] a, logic [35:0] b, logic [35:0] q);
    return 36'(({1'b0, a} + {1'b0, b}) % {1'b0, q});
  endfunction
  function automatic logic [35:0] rsub(logic [35:0] a, logic [35:0] b, logic [35:0] q);
    return 36'(({1'b0, a} + {1'b0, q} - {1'b0, b}) % {1'b0, q});
  endfunction
  function automatic logic [35:0] rpow(logic [35:0] a, longint unsigned e, logic [35:0] q);
    logic [35:0] r, b;
    r = 1; b = a;
    while (e != 0) begin
      if (e[0]) r = rmul(r, b, q);
      b = rmul(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic logic [35:0] rinv(logic [35:0] a, logic [35:0] q);
    return rpow(a, longint'(q) - 2, q);
  endfunction
  // primitive 2N-th root for N = 2^logn
  function automatic logic [35:0] psi_for(int idx, int logn);
    return rpow(PSI17[idx], 64'd1 << (16 - logn), PRIMES[idx]);
  endfunction
  function automatic logic [35:0] rnd(logic [35:0] q);
    logic [63:0] r;
    r = {$urandom, $urandom};
    return 36'(r % {28'd0, q});
  endfunction
endpackage
