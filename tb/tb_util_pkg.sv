// tb_util_pkg: reference modular arithmetic for the testbenches, written
// with plain 64-bit integer operations (no Montgomery reduction), so that
// results of the design are checked against an independent computation.
package tb_util_pkg;

  localparam longint unsigned Q1 = 64'd2013265921; // 15*2^27+1, generator 31
  localparam longint unsigned G1 = 64'd31;
  localparam longint unsigned Q2 = 64'd998244353;  // 119*2^23+1, generator 3
  localparam longint unsigned G2 = 64'd3;

  function automatic longint unsigned mulmod(longint unsigned a, longint unsigned b,
                                             longint unsigned q);
    return (a * b) % q;
  endfunction

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned q);
    longint unsigned r = 1;
    b = b % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, q);
      b = mulmod(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction

  // x * 2^32 mod q (Montgomery form)
  function automatic logic [31:0] to_mont(longint unsigned x, longint unsigned q);
    return 32'((x << 32) % q);
  endfunction

  // -q^-1 mod 2^32 by exhaustive bit-by-bit construction
  function automatic logic [31:0] neg_qinv(logic [31:0] q);
    logic [31:0] x = 32'd1;
    for (int b = 1; b < 32; b++)
      if (((q * x) >> b) & 1) x |= (32'd1 << b);
    return -x;
  endfunction

  function automatic int unsigned brv(int unsigned i, int unsigned bits);
    int unsigned r = 0;
    for (int b = 0; b < int'(bits); b++) r |= ((i >> b) & 1) << (bits - 1 - b);
    return r;
  endfunction

endpackage
