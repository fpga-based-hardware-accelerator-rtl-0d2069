// tb_paillier_pkg: reference arithmetic and test keys for the Paillier
// testbenches. Everything here is computed with plain wide-integer operators
// (*, %, <<), independently of the Montgomery datapath under test.
//
// Keys: four Paillier key pairs (n = p*q with p, q prime, lambda =
// lcm(p-1, q-1), g = n+1, mu = lambda^-1 mod n) with n of 32, 64, 128 and
// 1024 bits (key index 0 .. 3). The derived constants the hardware needs
// (n^2, word counts, -M^-1 mod 2^32, R^2 mod M) are computed by functions.
package tb_paillier_pkg;
  import he_pkg::*;

  typedef logic [4095:0] big_t;   // wide enough for products of 2048-bit values

  function automatic big_t key_n(int k);
    case (k)
      0: return big_t'(32'h7f55b8fb);
      1: return big_t'(64'hb30fa828682e48c5);
      2: return big_t'(128'hd861e930689ff7f5055d98e4605740af);
      3: return big_t'({
               256'hc6daa2bc51d4855cbacd79fcb00545d66caae0b5daf674c010e0355f8783fd25 ,
               256'hbfff48705ba53aa179f15d516cdda534388a6f2e8bf6b165c08e02a65880d830 ,
               256'hf96faf49c2f0cc4ade833b9c7e4e7f29b3a2ffe9ade1d8141a2031eef1c73263 ,
               256'hdc9f1b96d4113b9a4c64f5792fecdf76a9319486205795ffbcc15e38a06454f3});
      default: return '0;
    endcase
  endfunction

  function automatic big_t key_lambda(int k);
    case (k)
      0: return big_t'(32'h3faa27d0);
      1: return big_t'(64'h11e7f737122727fe);
      2: return big_t'(128'h6c30f498344ffbf996fda08ed67a9f98);
      3: return big_t'({
               256'h636d515e28ea42ae5d66bcfe5802a2eb3655705aed7b3a6008701aafc3c1fe92 ,
               256'hdfffa4382dd29d50bcf8aea8b66ed29a1c45379745fb58b2e04701532c406c17 ,
               256'h99c4e80d5c00740c7a44cca3e0c77c178a8d39e452433b6b4f27c762e363aa87 ,
               256'hd5e8d8fe7fc5c140e2d4e6b37554fb5e194c480234c4f19c28f550244ee679d8});
      default: return '0;
    endcase
  endfunction

  function automatic big_t key_mu(int k);
    case (k)
      0: return big_t'(32'h6a290b1e);
      1: return big_t'(64'h4f6d3038e0967d3d);
      2: return big_t'(128'h31bda2cc82b84be9014d0d36d4c6b797);
      3: return big_t'({
               256'h741062b752ebfd498c5c007eb827d33337a7275b3ab526a77500773500b27d21 ,
               256'hd2b3be224358814e47c0e609df37e41fb62ae89ad8a83dec1ee6c447f7742bbb ,
               256'h71008134cd382ad7d130d76dc5fe9761decb75cfd6c421fde2906bfe30525cb4 ,
               256'h93f8bf5126f6403317f728822bb93e6316f81a2930044bd74549acd3d545cbe7});
      default: return '0;
    endcase
  endfunction

  function automatic int nwords_of(big_t x);
    for (int w = 127; w >= 0; w--) if (x[32*w +: 32] != 0) return w + 1;
    return 1;
  endfunction

  function automatic int bitlen(big_t x);
    for (int i = 4095; i >= 0; i--) if (x[i]) return i + 1;
    return 0;
  endfunction

  function automatic int popcount(big_t x);
    int c = 0;
    for (int i = 0; i < 4096; i++) c += int'(x[i]);
    return c;
  endfunction

  function automatic big_t modexp(big_t b, big_t e, big_t m);
    big_t r = big_t'(1) % m;
    b = b % m;
    for (int i = bitlen(e) - 1; i >= 0; i--) begin
      r = (r * r) % m;
      if (e[i]) r = (r * b) % m;
    end
    return r;
  endfunction

  // number of Montgomery multiplications of a left-to-right ModExp that
  // skips leading zeros: one for the leading one, then a square per further
  // bit and a multiply per further one bit
  function automatic int expmm(big_t e);
    return (e == '0) ? 0 : bitlen(e) + popcount(e) - 1;
  endfunction

  function automatic word_t neg_inv(word_t m0);
    word_t inv = 32'd1;
    for (int k = 0; k < 6; k++) inv = inv * (32'd2 - m0 * inv);
    return -inv;
  endfunction

  // R^2 mod m with R = 2^(32*nw), nw <= 64
  function automatic big_t r2_of(big_t m, int nw);
    big_t r1 = (big_t'(1) << (32 * nw)) % m;
    return (r1 * r1) % m;
  endfunction

  function automatic word_t xorshift(word_t x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  // Paillier decryption by the textbook formula
  function automatic big_t dec_ref(big_t c, big_t n, big_t lam, big_t mu);
    big_t u = modexp(c, lam, n * n);
    return (((u - 1) / n) * mu) % n;
  endfunction

  function automatic big_t enc_ref(big_t m, big_t r, big_t g, big_t n);
    big_t n2 = n * n;
    return (modexp(g, m, n2) * modexp(r, n, n2)) % n2;
  endfunction

endpackage
