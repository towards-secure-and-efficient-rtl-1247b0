// tb_ref_pkg: reference models used by the testbenches. They compute the
// expected results directly, as plain functions, without the handshakes,
// state machines or stored state of the RTL:
//   * AES-128 encryption (key schedule and rounds chained in one call, built
//     from the FIPS-197 round primitives whose results tb_aes_core checks
//     against the published vectors),
//   * the LFSR subset masks and combination keys,
//   * the per-sub-block counter-mode pads,
//   * GF(2^128) multiplication, written as LSB-first shift-and-add (the RTL
//     uses the MSB-first Horner form), and the polynomial MAC built on it.
package tb_ref_pkg;
  import sec_pkg::*;

  function automatic rk_array_t ref_round_keys(input blk_t key);
    rk_array_t rk;
    logic [7:0] rc;
    rk[0] = key;
    rc = 8'h01;
    for (int r = 1; r <= int'(NR); r++) begin
      rk[r] = key_step(rk[r-1], rc);
      rc = xtime(rc);
    end
    return rk;
  endfunction

  function automatic blk_t ref_aes(input blk_t key, input blk_t pt);
    rk_array_t rk;
    blk_t s;
    rk = ref_round_keys(key);
    s = pt ^ rk[0];
    for (int r = 1; r <= int'(NR); r++) s = aes_round(s, rk[r], r == int'(NR));
    return s;
  endfunction

  // i-th subset mask: LFSR x^10+x^7+1 stepped i times from the seed.
  function automatic comb_mask_t ref_mask(input comb_mask_t seed, input int i);
    comb_mask_t s;
    s = (seed == 0) ? 10'd1 : seed;
    for (int k = 0; k < i; k++) s = {s[8:0], s[9] ^ s[6]};
    return s;
  endfunction

  function automatic blk_t ref_comb_key(input blk_t key, input comb_mask_t m);
    rk_array_t rk;
    blk_t r;
    rk = ref_round_keys(key);
    r = '0;
    for (int j = 0; j < 10; j++) if (m[j]) r ^= rk[j+1];
    return r;
  endfunction

  // Pad of sub-block i of the block at (pa, vn).
  function automatic blk_t ref_block_otp(input blk_t key, input comb_mask_t seed,
                                         input pa_t pa, input vn_t vn, input int i);
    return ref_aes(key, {pa, vn}) ^ ref_comb_key(key, ref_mask(seed, i));
  endfunction

  function automatic blk_t ref_gfmul(input blk_t a, input blk_t b);
    blk_t r, x;
    r = '0;
    x = a;
    for (int i = 0; i < 128; i++) begin
      if (b[i]) r ^= x;
      x = {x[126:0], 1'b0} ^ (x[127] ? 128'h87 : 128'h0);
    end
    return r;
  endfunction

  // opt_blk_mac over the ciphertext chunks of one block:
  //   H = AES_Kh(0); X = 0; X = (X ^ c) * H over {PA,VN}, {layer,idx,0},
  //   the chunks and a length chunk; MAC = upper 64 bits of AES_Kh(X).
  function automatic mac_t ref_mac(input blk_t kh, input pa_t pa, input vn_t vn,
                                   input layer_t layer_id, input blkidx_t idx,
                                   input blk_t chunks[$]);
    blk_t h, x;
    h = ref_aes(kh, '0);
    x = ref_gfmul({pa, vn}, h);
    x = ref_gfmul(x ^ {layer_id, idx, 80'h0}, h);
    foreach (chunks[k]) x = ref_gfmul(x ^ chunks[k], h);
    x = ref_gfmul(x ^ {64'(chunks.size()), 64'h0}, h);
    x = ref_aes(kh, x);
    return x[127:64];
  endfunction
endpackage
