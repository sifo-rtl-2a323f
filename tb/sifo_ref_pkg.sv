// sifo_ref_pkg: reference models used by the testbenches.
//
// A plain, loop-based SHA-1 (FIPS 180-4) for one padded block, written
// independently of the clocked core; a garbled-AND reference that computes
// the four rows, the row reduction and the permuted table directly from
// the definition; and an evaluator that ungarbles one AND gate from its
// table, so the testbenches can check that garbling is not only
// self-consistent but lets an evaluator recover the right output key.
package sifo_ref_pkg;
  import sifo_pkg::*;

  function automatic logic [31:0] rol(input logic [31:0] x, input int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic logic [159:0] sha1_ref(input logic [511:0] blk);
    logic [31:0] w [80];
    logic [31:0] h [5];
    logic [31:0] a, b, c, d, e, f, k, tmp;
    h[0] = 32'h67452301; h[1] = 32'hEFCDAB89; h[2] = 32'h98BADCFE;
    h[3] = 32'h10325476; h[4] = 32'hC3D2E1F0;
    for (int t = 0; t < 16; t++) w[t] = blk[511 - 32*t -: 32];
    for (int t = 16; t < 80; t++) w[t] = rol(w[t-3] ^ w[t-8] ^ w[t-14] ^ w[t-16], 1);
    a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4];
    for (int t = 0; t < 80; t++) begin
      if (t < 20)      begin f = (b & c) | ((~b) & d);       k = 32'h5A827999; end
      else if (t < 40) begin f = b ^ c ^ d;                  k = 32'h6ED9EBA1; end
      else if (t < 60) begin f = (b & c) | (b & d) | (c & d); k = 32'h8F1BBCDC; end
      else             begin f = b ^ c ^ d;                  k = 32'hCA62C1D6; end
      tmp = rol(a, 5) + f + e + k + w[t];
      e = d; d = c; c = rol(b, 30); b = a; a = tmp;
    end
    return {h[0] + a, h[1] + b, h[2] + c, h[3] + d, h[4] + e};
  endfunction

  // Hash of one key pair, truncated to a key.
  function automatic key_t hkey(input key_t ka, input key_t kb, input logic [31:0] g);
    logic [159:0] dg;
    dg = sha1_ref({ka, kb, g, 1'b1, 255'd0, 64'd192});
    return dg[159:80];
  endfunction

  // Garble one AND gate. Returns the new zero key of the output and the
  // table slots 1..3 (t[0] unused, always the zero slot).
  function automatic void garble_and(input key_t k0, input key_t k1, input key_t r,
                                     input logic [31:0] g,
                                     output key_t kout, output key_t t [4]);
    key_t ka, kb, cz, kz1;
    int   pa, pb, slot;
    // Output zero key: the row whose keys both have permute bit 0.
    ka = k0[0] ? (k0 ^ r) : k0;       // key of input 0 with lsb 0
    kb = k1[0] ? (k1 ^ r) : k1;
    cz = hkey(ka, kb, g);
    // that row encodes bit (a AND b) where a = k0[0], b = k1[0]
    kout = (k0[0] && k1[0]) ? (cz ^ r) : cz;
    kz1  = kout ^ r;
    t[0] = '0;
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        ka = a ? (k0 ^ r) : k0;
        kb = b ? (k1 ^ r) : k1;
        pa = int'(ka[0]);
        pb = int'(kb[0]);
        slot = 2*pa + pb;
        if (slot != 0) t[slot] = hkey(ka, kb, g) ^ ((a && b) ? kz1 : kout);
      end
  endfunction

  // Evaluator side: recover the output key from two input keys.
  function automatic key_t eval_and(input key_t la, input key_t lb, input logic [31:0] g,
                                    input key_t t1, input key_t t2, input key_t t3);
    int slot;
    key_t row;
    slot = 2*int'(la[0]) + int'(lb[0]);
    case (slot)
      1: row = t1;
      2: row = t2;
      3: row = t3;
      default: row = '0;
    endcase
    return hkey(la, lb, g) ^ row;
  endfunction

  function automatic key_t rand_key();
    return {$urandom, $urandom, $urandom};
  endfunction

endpackage
