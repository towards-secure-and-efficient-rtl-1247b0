// sec_pkg: types, constants and pure functions shared by the memory-protection
// unit of a secure DNN accelerator.
//
// What is here:
//   * Sizes: 128-bit cipher blocks (AES), AES-128 with 10 rounds, a counter
//     block made of a 64-bit physical address and a 64-bit version number,
//     64-bit MACs, 16-bit layer numbers and 32-bit authentication-block indices.
//     The 128-bit block and AES-128 follow the paper; the split of the counter
//     into PA and VN halves and the MAC, layer and index widths are this
//     design's choices (the paper mentions 8-byte MACs when it discusses
//     metadata traffic, which the 64-bit MAC follows).
//   * AES round primitives (SubBytes, ShiftRows, MixColumns, AddRoundKey) and
//     the AES-128 key-schedule step, as in FIPS-197. The S-box is not typed in
//     as a table: it is computed at elaboration time as the affine transform of
//     the multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1.
//   * A GF(2^128) multiplier (polynomial basis, bit i is the coefficient of
//     x^i, reduction by x^128+x^7+x^2+x+1) used by the polynomial MAC.
//
// Byte order: byte 0 of a 128-bit value is bits [127:120], as in FIPS-197
// where the first input byte is the most significant; byte 4c+r is row r of
// column c of the AES state.
package sec_pkg;

  localparam int unsigned BLK_W      = 128;  // AES block, one sub-block
  localparam int unsigned NR         = 10;   // AES-128 rounds
  localparam int unsigned PA_W       = 64;   // physical address bits in the counter
  localparam int unsigned VN_W       = 64;   // version number bits in the counter
  localparam int unsigned MAC_W      = 64;   // opt_blk / tile / layer / model MAC width
  localparam int unsigned LAYER_W    = 16;   // layer_id width
  localparam int unsigned BLKIDX_W   = 32;   // opt_blk_idx width
  localparam int unsigned COMB_W     = NR;   // one mask bit per round key k1..k10

  typedef logic [BLK_W-1:0]    blk_t;
  typedef logic [MAC_W-1:0]    mac_t;
  typedef logic [PA_W-1:0]     pa_t;
  typedef logic [VN_W-1:0]     vn_t;
  typedef logic [LAYER_W-1:0]  layer_t;
  typedef logic [BLKIDX_W-1:0] blkidx_t;
  typedef logic [COMB_W-1:0]   comb_mask_t;
  // Round keys k0..k10, k0 being the initial key.
  typedef blk_t [NR:0]         rk_array_t;

  // Direction of a transfer through the protection unit.
  typedef enum logic {
    DIR_WRITE = 1'b0,  // plaintext from on-chip SRAM -> ciphertext to off-chip memory
    DIR_READ  = 1'b1   // ciphertext from off-chip memory -> plaintext to on-chip SRAM
  } dir_e;

  // Per-beat header of a transfer through the protection unit. An
  // authentication block (opt_blk) is one or more beats; blk_first marks its
  // first beat, blk_last its last; tile_last and layer_last on a block's last
  // beat close the tile and the layer; weight selects the model-level MAC.
  typedef struct packed {
    dir_e    dir;
    logic    weight;
    logic    blk_first;
    logic    blk_last;
    logic    tile_last;
    logic    layer_last;
    pa_t     pa;
    vn_t     vn;
    layer_t  layer;
    blkidx_t idx;
  } xfer_hdr_t;

  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r, x;
    r = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r = r ^ x;
      x = xtime(x);
    end
    return r;
  endfunction

  // a^254 = a^-1 in GF(2^8) (0 maps to 0), by square-and-multiply.
  function automatic logic [7:0] gf8_inv(input logic [7:0] a);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 7; i >= 0; i--) begin
      r = gf8_mul(r, r);
      if (i != 0) r = gf8_mul(r, a);  // 254 = 8'b1111_1110
    end
    return r;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] a, input int unsigned n);
    return (a << n) | (a >> (8 - n));
  endfunction

  function automatic logic [7:0] sbox_calc(input logic [7:0] x);
    logic [7:0] b;
    b = gf8_inv(x);
    return b ^ rotl8(b, 1) ^ rotl8(b, 2) ^ rotl8(b, 3) ^ rotl8(b, 4) ^ 8'h63;
  endfunction

  function automatic logic [2047:0] gen_sbox_table();
    logic [2047:0] t;
    for (int i = 0; i < 256; i++) t[i*8 +: 8] = sbox_calc(8'(i));
    return t;
  endfunction

  localparam logic [2047:0] SBOX_TABLE = gen_sbox_table();

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return SBOX_TABLE[{x, 3'b000} +: 8];
  endfunction

  // ---------------------------------------------------------------- AES state
  function automatic logic [7:0] get_byte(input blk_t s, input int unsigned i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic blk_t sub_bytes(input blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[127 - 8*i -: 8] = sbox(get_byte(s, i));
    return r;
  endfunction

  // Row r of column c takes the byte of column (c+r) mod 4.
  function automatic blk_t shift_rows(input blk_t s);
    blk_t r;
    for (int c = 0; c < 4; c++)
      for (int w = 0; w < 4; w++)
        r[127 - 8*(4*c + w) -: 8] = get_byte(s, 4*((c + w) % 4) + w);
    return r;
  endfunction

  function automatic logic [31:0] mix_column(input logic [31:0] col);
    logic [7:0] a0, a1, a2, a3;
    {a0, a1, a2, a3} = col;
    return {xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3,
            a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3,
            a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3),
            (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3)};
  endfunction

  function automatic blk_t mix_columns(input blk_t s);
    blk_t r;
    for (int c = 0; c < 4; c++) r[127 - 32*c -: 32] = mix_column(s[127 - 32*c -: 32]);
    return r;
  endfunction

  // One AES round: SubBytes, ShiftRows, MixColumns (skipped in the final
  // round), AddRoundKey.
  function automatic blk_t aes_round(input blk_t s, input blk_t rk, input logic final_round);
    blk_t t;
    t = shift_rows(sub_bytes(s));
    if (!final_round) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // One step of the AES-128 key schedule: round key j from round key j-1.
  function automatic blk_t key_step(input blk_t prev, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    t  = {sbox(prev[23:16]), sbox(prev[15:8]), sbox(prev[7:0]), sbox(prev[31:24])}
         ^ {rcon, 24'h0};
    w0 = prev[127:96] ^ t;
    w1 = prev[95:64]  ^ w0;
    w2 = prev[63:32]  ^ w1;
    w3 = prev[31:0]   ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // ---------------------------------------------------------------- GF(2^128)
  function automatic blk_t gf128_mul(input blk_t a, input blk_t b);
    blk_t r;
    r = '0;
    for (int i = BLK_W - 1; i >= 0; i--) begin
      r = {r[126:0], 1'b0} ^ (r[127] ? 128'h87 : 128'h0);
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

endpackage
