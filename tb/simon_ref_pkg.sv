// simon_ref_pkg: reference model of SIMON-128 for the testbenches.
//
// Written independently of the RTL: the round constants are kept as the
// z_j bit strings of the SIMON specification (leftmost character = z_j[0]),
// the whole key expansion is computed into an array and encryption loops
// over it. Also holds the published SIMON-128 test vectors and the inverse
// round, used to check that a round can be undone.
package simon_ref_pkg;

  typedef logic [63:0] w64_t;

  localparam string ZSTR2 = "10101111011100000011010010011000101000010001111110010110110011";
  localparam string ZSTR3 = "11011011101011000110010111100000010010001010011100110100001111";
  localparam string ZSTR4 = "11010001111001101011011000100000010111000011001010010011101111";

  function automatic int ref_rounds(int m);
    return (m == 2) ? 68 : (m == 3) ? 69 : 72;
  endfunction

  function automatic bit ref_z(int m, int i);
    string s;
    s = (m == 2) ? ZSTR2 : (m == 3) ? ZSTR3 : ZSTR4;
    return s[i % 62] == "1";
  endfunction

  function automatic w64_t rl(w64_t x, int j);
    return w64_t'({x, x} >> (64 - j));
  endfunction

  function automatic w64_t rr(w64_t x, int j);
    return w64_t'({x, x} >> j);
  endfunction

  // Key expansion: k[0..m-1] from the key, k[m..T-1] generated
  function automatic void ref_expand(int m, w64_t kin [4], output w64_t k [72]);
    w64_t t;
    for (int i = 0; i < 72; i++) k[i] = '0;
    for (int i = 0; i < m; i++) k[i] = kin[i];
    for (int i = 0; i < ref_rounds(m) - m; i++) begin
      t = rr(k[i+m-1], 3);
      if (m == 4) t ^= k[i+1];
      t ^= rr(t, 1);
      k[i+m] = ~k[i] ^ t ^ 64'd3 ^ {63'd0, ref_z(m, i)};
    end
  endfunction

  function automatic void ref_round(w64_t l, w64_t r, w64_t k, output w64_t lo, output w64_t ro);
    lo = r ^ (rl(l, 1) & rl(l, 8)) ^ rl(l, 2) ^ k;
    ro = l;
  endfunction

  // Inverse round: R^-1(l, r, k) = (r, (S1 r & S8 r) ^ S2 r ^ l ^ k)
  function automatic void ref_unround(w64_t l, w64_t r, w64_t k, output w64_t lo, output w64_t ro);
    lo = r;
    ro = (rl(r, 1) & rl(r, 8)) ^ rl(r, 2) ^ l ^ k;
  endfunction

  function automatic logic [127:0] ref_encrypt(int m, w64_t kin [4], logic [127:0] pt);
    w64_t k [72];
    w64_t l, r, lo, ro;
    ref_expand(m, kin, k);
    l = pt[127:64];
    r = pt[63:0];
    for (int i = 0; i < ref_rounds(m); i++) begin
      ref_round(l, r, k[i], lo, ro);
      l = lo; r = ro;
    end
    return {l, r};
  endfunction

  // Published SIMON-128 test vectors; key word 0 is the rightmost printed word
  function automatic void ref_vector(int m, output w64_t kin [4], output logic [127:0] pt,
                                     output logic [127:0] ct);
    kin[0] = 64'h0706050403020100;
    kin[1] = 64'h0f0e0d0c0b0a0908;
    kin[2] = 64'h1716151413121110;
    kin[3] = 64'h1f1e1d1c1b1a1918;
    case (m)
      2: begin
        pt = 128'h63736564207372656c6c657661727420;
        ct = 128'h49681b1e1e54fe3f65aa832af84e0bbc;
      end
      3: begin
        pt = 128'h206572656874206e6568772065626972;
        ct = 128'hc4ac61effcdc0d4f6c9c8d6e2597b85b;
      end
      default: begin
        pt = 128'h74206e69206d6f6f6d69732061207369;
        ct = 128'h8d2b5579afc8a3a03bf72a87efe7b868;
      end
    endcase
  endfunction

endpackage
