// tb_util_pkg -- reference arithmetic for the CoFHEE testbenches.
//
// Bit-serial (shift-and-add) modular multiplication, exponentiation, the
// Barrett constant floor(2^k / q) by long division, and a test modulus.
// None of it uses the design's Barrett datapath, so results computed here
// are an independent reference.
package tb_util_pkg;
  typedef logic [127:0] u128;

  // 128-bit prime q = c * 2^14 + 1, so 2n-th roots of unity exist for every
  // power-of-two n up to 8192.  PSI_MAX has multiplicative order 2^14.
  localparam u128 TEST_Q   = 128'hfffffffffffffffffffffffffffac001;
  localparam u128 PSI_MAX  = 128'hb371dbf7be8497d0155d8538a3ca0d45;

  function automatic u128 addmod(u128 a, u128 b, u128 q);
    logic [128:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[127:0];
  endfunction

  function automatic u128 submod(u128 a, u128 b, u128 q);
    return (a >= b) ? a - b : a - b + q;
  endfunction

  function automatic u128 mulmod(u128 a, u128 b, u128 q);
    u128 r;
    r = '0;
    for (int i = 127; i >= 0; i--) begin
      r = addmod(r, r, q);
      if (b[i]) r = addmod(r, a, q);
    end
    return r;
  endfunction

  function automatic u128 powmod(u128 a, u128 e, u128 q);
    u128 r;
    r = 128'd1;
    for (int i = 127; i >= 0; i--) begin
      r = mulmod(r, r, q);
      if (e[i]) r = mulmod(r, a, q);
    end
    return r;
  endfunction

  // floor(2^k / q) by restoring division, k <= 300.
  function automatic logic [159:0] barrett_mu(u128 q, int k);
    logic [129:0] rem;
    logic [159:0] quo;
    rem = '0; quo = '0;
    for (int i = k; i >= 0; i--) begin
      rem = {rem[128:0], (i == k) ? 1'b1 : 1'b0};
      quo = {quo[158:0], 1'b0};
      if (rem >= {2'b0, q}) begin
        rem = rem - {2'b0, q};
        quo[0] = 1'b1;
      end
    end
    return quo;
  endfunction

  // psi of order 2n for n = 2^logn.
  function automatic u128 psi_for(int logn);
    u128 p;
    p = PSI_MAX;
    for (int i = logn; i < 13; i++) p = mulmod(p, p, TEST_Q);
    return p;
  endfunction

  function automatic int bitrev(int v, int bits);
    int r;
    r = 0;
    for (int i = 0; i < bits; i++) if (v[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  function automatic u128 rand128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction
endpackage
