// comb_key_gen: builds the per-sub-block combination keys of the
// bandwidth-aware encryption scheme.
//
// The ten AES-128 round keys k1..k10 form a pool; any subset of them XORed
// together is a "combination key", giving 2^10 = 1024 combinations. For a
// data block of n 128-bit sub-blocks, n distinct combinations are chosen and
// sub-block i gets the one-time pad shared_otp XOR comb_key_i, so that no two
// sub-blocks of a block share a pad. This module does the choosing
// (RandSelect) and the XORing (CalcComb).
//
// How it chooses: a 10-bit maximal-length LFSR (x^10 + x^7 + 1, period 1023)
// is seeded with `seed` (a zero seed is replaced by 1) and stepped once per
// lane; the LFSR state is the subset mask, bit j selecting round key k(j+1).
// Consecutive states of a maximal LFSR are distinct and non-zero, so the
// N_LANES masks are distinct and none is the empty subset. The selection is
// fixed after configuration (not redrawn per block) because decryption must
// regenerate exactly the pads used for encryption; uniqueness across blocks
// comes from the PA || VN counter in shared_otp.
//
// Interface and timing: pulse `start` once the round keys are valid; lane i
// is written i+1 cycles later and `ready` rises after N_LANES cycles. Masks
// and keys are held until the next start.
//
// From the paper: the round-key pool, 2^10 combinations for AES-128, random
// selection of n combinations and XOR with the shared pad. This design's
// choices: the LFSR as the random source, the fixed per-configuration
// selection, and excluding k0 (the initial key itself) from the pool.
module comb_key_gen
  import sec_pkg::*;
#(
  parameter int unsigned N_LANES = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  comb_mask_t               seed,
  input  rk_array_t                round_keys,
  output logic                     ready,
  output comb_mask_t [N_LANES-1:0] masks,
  output blk_t       [N_LANES-1:0] comb_keys
);

  localparam int unsigned IDX_W = (N_LANES > 1) ? $clog2(N_LANES) : 1;

  comb_mask_t       lfsr;
  logic [IDX_W-1:0] idx;
  logic             busy;

  // CalcComb for one mask: XOR of the selected round keys k1..k10.
  function automatic blk_t comb_of(input comb_mask_t m, input rk_array_t rk);
    blk_t r;
    r = '0;
    for (int j = 0; j < int'(COMB_W); j++)
      if (m[j]) r = r ^ rk[j + 1];
    return r;
  endfunction

  function automatic comb_mask_t lfsr_next(input comb_mask_t s);
    return {s[8:0], s[9] ^ s[6]};
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr      <= 10'd1;
      idx       <= '0;
      busy      <= 1'b0;
      ready     <= 1'b0;
      masks     <= '0;
      comb_keys <= '0;
    end else if (start) begin
      lfsr  <= (seed == '0) ? 10'd1 : seed;
      idx   <= '0;
      busy  <= 1'b1;
      ready <= 1'b0;
    end else if (busy) begin
      masks[idx]     <= lfsr;
      comb_keys[idx] <= comb_of(lfsr, round_keys);
      lfsr           <= lfsr_next(lfsr);
      idx            <= idx + 1'b1;
      if (idx == IDX_W'(N_LANES - 1)) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end
    end
  end

endmodule
