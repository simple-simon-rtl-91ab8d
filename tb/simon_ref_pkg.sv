// simon_ref_pkg: a plain behavioural SIMON64/128 reference for the testbenches.
//
// It is written independently of the RTL. Rotations are bit concatenations,
// the key schedule is a loop over the standard recurrence, and decryption
// applies the inverse round R^-1(l, r, k) = (r, f(r) ^ l ^ k) directly,
// without swapping words. Words are 32 bits, blocks {left, right}, and keys
// {k3, k2, k1, k0}. The published SIMON64/128 test vector checks the model
// itself.
package simon_ref_pkg;

  localparam logic [61:0] REF_Z3 = 62'b11110000101100111001010001001000000111101001100011010111011011;

  function automatic logic [31:0] f(input logic [31:0] x);
    logic [31:0] s1, s8, s2;
    s1 = {x[30:0], x[31]};
    s8 = {x[23:0], x[31:24]};
    s2 = {x[29:0], x[31:30]};
    return (s1 & s8) ^ s2;
  endfunction

  // (z3)_i: digit i counted from the right of the little-endian sequence
  function automatic logic z3(input int i);
    return REF_Z3[i % 62];
  endfunction

  function automatic logic [31:0] round_key(input logic [127:0] key, input int idx);
    logic [31:0] k [0:43];
    logic [31:0] t;
    for (int i = 0; i < 4; i++) k[i] = key[32*i +: 32];
    for (int i = 4; i < 44; i++) begin
      t = {k[i-1][2:0], k[i-1][31:3]} ^ k[i-3];
      t = t ^ {t[0], t[31:1]};
      k[i] = ~k[i-4] ^ t ^ 32'd3 ^ {31'd0, z3(i-4)};
    end
    return k[idx];
  endfunction

  function automatic logic [63:0] ref_encrypt(input logic [127:0] key, input logic [63:0] pt);
    logic [31:0] l, r, nl;
    l = pt[63:32];
    r = pt[31:0];
    for (int i = 0; i < 44; i++) begin
      nl = f(l) ^ r ^ round_key(key, i);
      r  = l;
      l  = nl;
    end
    return {l, r};
  endfunction

  function automatic logic [63:0] ref_decrypt(input logic [127:0] key, input logic [63:0] ct);
    logic [31:0] l, r, nr;
    l = ct[63:32];
    r = ct[31:0];
    for (int i = 43; i >= 0; i--) begin
      nr = f(r) ^ l ^ round_key(key, i);
      l  = r;
      r  = nr;
    end
    return {l, r};
  endfunction

  localparam logic [127:0] TV_KEY = 128'h1b1a1918_13121110_0b0a0908_03020100;
  localparam logic [63:0]  TV_PT  = 64'h656b696c_20646e75;
  localparam logic [63:0]  TV_CT  = 64'h44c8fc20_b9dfa07a;

  function automatic logic [127:0] rand_key();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  function automatic logic [63:0] rand_block();
    return {$urandom, $urandom};
  endfunction

endpackage
