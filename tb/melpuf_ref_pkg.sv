// melpuf_ref_pkg: reference model used by the testbenches to predict the
// power-up state of a MeLPUF inverter pair.
//
// It restates, independently of the RTL package, the mismatch model of the
// behavioural pair: a site with seed s has the fixed offset
//   m(s)    = (H(s) mod 2001) - 1000
// and, at its k-th power-up (k = 0, 1, ...), the noise
//   n(s, k) = (H(H(s) xor H(k + 1)) mod (2*NOISE + 1)) - NOISE,
// where H is the MurmurHash3 32-bit finaliser. The pair resolves to 1 (Inv 1
// output high) exactly when m(s) + n(s, k) > 0.
package melpuf_ref_pkg;

  function automatic bit [31:0] ref_hash(input bit [31:0] x);
    bit [31:0] a, b, c, d, e;
    a = x ^ {16'h0000, x[31:16]};
    b = a * 32'd2246822507;        // 0x85ebca6b
    c = b ^ {13'h0000, b[31:13]};
    d = c * 32'd3266489909;        // 0xc2b2ae35
    e = d ^ {16'h0000, d[31:16]};
    return e;
  endfunction

  function automatic longint ref_offset(input bit [31:0] seed);
    return longint'(ref_hash(seed) % 32'd2001) - 1000;
  endfunction

  function automatic longint ref_noise(input bit [31:0] seed, input int unsigned k,
                                       input int noise);
    bit [31:0] h;
    if (noise == 0) return 0;
    h = ref_hash(ref_hash(seed) ^ ref_hash(k + 1));
    return longint'(h % (2 * noise + 1)) - noise;
  endfunction

  function automatic bit ref_bit(input bit [31:0] seed, input int unsigned k,
                                 input int noise);
    return (ref_offset(seed) + ref_noise(seed, k, noise)) > 0;
  endfunction

  // Seed of site i of the die selected by chip_seed (same rule as the top).
  function automatic bit [31:0] ref_site_seed(input int unsigned chip_seed,
                                              input int unsigned i);
    return (chip_seed << 16) + i;
  endfunction

endpackage
