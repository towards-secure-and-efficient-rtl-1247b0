// mac_engine: computes the MAC of one optimal authentication block,
//   opt_blk_mac = Auth_Kh(opt_blk || PA || VN || layer_id || opt_blk_idx).
//
// The paper fixes what the MAC covers (the encrypted block, its address and
// version number, its layer and its index inside the layer) but not the MAC
// algorithm. This design uses hash-then-encrypt: a polynomial hash over
// GF(2^128) followed by one AES-128 encryption under the MAC key Kh,
//   H   = AES_Kh(0)                              (once, at configuration)
//   X   = 0; X = (X ^ c) * H for c = {PA, VN}, {layer_id, opt_blk_idx, 80'b0},
//         the data chunks in order, {number of data chunks [63:0], 64'b0}
//   MAC = upper 64 bits of AES_Kh(X)
// The final AES matters: a MAC that is linear in the data (GMAC-style,
// hash XOR pad) lets the XOR of all block MACs of a layer stay unchanged
// when the contents of two blocks are swapped, which is exactly the
// re-permutation attack the layer MAC must detect. The polynomial and bit
// order are this design's own (see sec_pkg).
//
// Interface: a block arrives as one or more beats of up to N_LANES chunks
// (lanes 0..beat_n-1 valid); the first beat carries beat_first and the
// metadata, the last beat beat_last and `beat_user`, an opaque tag returned
// with the MAC on `mac_user`. The hash absorbs one chunk per cycle. When the
// length chunk is absorbed the hash value goes to the AES engine and the
// next block can start hashing while the AES runs. `mac_valid` is raised in
// the cycle the AES finishes and held until `mac_ready`.
//
// Timing: a single-beat block of n chunks gives its MAC n + 14 cycles after
// its first beat is taken (2 metadata chunks, n data chunks, the length
// chunk, one cycle to start the AES, 11 AES cycles). With `mac_ready` high,
// blocks of n chunks follow each other every max(11, n + 4) cycles.
// Configuration: pulse `cfg_start` with Kh; `cfg_ready` rises once H is
// computed (about 23 cycles later).
module mac_engine
  import sec_pkg::*;
#(
  parameter int unsigned N_LANES = 8,
  parameter int unsigned USER_W  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_start,
  input  blk_t                     cfg_key,
  output logic                     cfg_ready,
  // beats of the authentication block (ciphertext)
  input  logic                     beat_valid,
  output logic                     beat_ready,
  input  logic                     beat_first,
  input  logic                     beat_last,
  input  pa_t                      beat_pa,
  input  vn_t                      beat_vn,
  input  layer_t                   beat_layer,
  input  blkidx_t                  beat_idx,
  input  logic [USER_W-1:0]        beat_user,
  input  logic [$clog2(N_LANES+1)-1:0] beat_n,
  input  blk_t [N_LANES-1:0]       beat_data,
  // result
  output logic                     mac_valid,
  input  logic                     mac_ready,
  output mac_t                     mac,
  output logic [USER_W-1:0]        mac_user
);

  localparam int unsigned NW = $clog2(N_LANES + 1);

  typedef enum logic [2:0] {S_CFG, S_HGEN, S_IDLE, S_META, S_ABS, S_WAIT, S_LEN, S_TAG} state_e;

  state_e             state;
  rk_array_t          round_keys;
  logic               ke_ready, ke_ready_q;
  logic               aes_start, aes_busy, aes_done;
  blk_t               aes_in, aes_out;
  blk_t               h, x, mul_in, x_next;
  blk_t [N_LANES-1:0] data_q;
  logic [NW-1:0]      n_q, lane;
  logic               last_q;
  layer_t             layer_q;
  blkidx_t            idx_q;
  logic [USER_W-1:0]  user_abs, user_tag;
  logic [63:0]        cnt;
  logic               beat_fire, pend, tag_start, mac_out;

  aes_key_expand u_key_expand (
    .clk, .rst_n, .start(cfg_start), .key(cfg_key), .ready(ke_ready), .round_keys(round_keys)
  );

  aes_core u_aes (
    .clk, .rst_n, .round_keys(round_keys), .start(aes_start), .din(aes_in),
    .busy(aes_busy), .done(aes_done), .dout(aes_out)
  );

  assign beat_ready = !cfg_start && (state == S_IDLE || state == S_WAIT);
  assign beat_fire  = beat_valid && beat_ready;
  assign cfg_ready  = !cfg_start && !(state == S_CFG || state == S_HGEN);

  // A finished AES result (other than H) is a MAC; it is held in the AES
  // output register until taken, so the AES may only restart once it is.
  assign mac_out   = aes_done && state != S_HGEN && state != S_CFG;
  assign mac_valid = mac_out || pend;
  assign mac       = mac_t'(aes_out >> (BLK_W - MAC_W));
  assign mac_user  = user_tag;
  assign tag_start = state == S_TAG && !aes_busy && !pend && (!mac_out || mac_ready);

  assign aes_start = (state == S_CFG && ke_ready && !ke_ready_q) || tag_start;
  assign aes_in    = (state == S_CFG) ? '0 : x;

  // The one GF(2^128) multiplier, shared by all chunks.
  always_comb begin
    unique case (state)
      S_IDLE:  mul_in = {beat_pa, beat_vn};
      S_META:  mul_in = x ^ {layer_q, idx_q, 80'h0};
      S_ABS:   mul_in = x ^ data_q[lane];
      default: mul_in = x ^ {cnt, 64'h0};
    endcase
    x_next = gf128_mul(mul_in, h);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_CFG;
      ke_ready_q <= 1'b0;
      h          <= '0;
      x          <= '0;
      data_q     <= '0;
      n_q        <= '0;
      lane       <= '0;
      last_q     <= 1'b0;
      layer_q    <= '0;
      idx_q      <= '0;
      user_abs   <= '0;
      user_tag   <= '0;
      cnt        <= '0;
      pend       <= 1'b0;
    end else if (cfg_start) begin
      state      <= S_CFG;
      ke_ready_q <= 1'b0;
      pend       <= 1'b0;
    end else begin
      ke_ready_q <= ke_ready;
      if (mac_valid) pend <= !mac_ready;
      if (beat_fire) begin
        data_q <= beat_data;
        n_q    <= beat_n;
        lane   <= '0;
        last_q <= beat_last;
        if (beat_last) user_abs <= beat_user;
      end
      unique case (state)
        S_CFG:  if (aes_start) state <= S_HGEN;
        S_HGEN: if (aes_done) begin
                  h     <= aes_out;
                  state <= S_IDLE;
                end
        S_IDLE: if (beat_fire) begin
                  x       <= x_next;
                  cnt     <= '0;
                  layer_q <= beat_layer;
                  idx_q   <= beat_idx;
                  state   <= S_META;
                end
        S_META: begin
                  x     <= x_next;
                  state <= S_ABS;
                end
        S_ABS:  begin
                  x    <= x_next;
                  cnt  <= cnt + 64'd1;
                  lane <= lane + 1'b1;
                  if (lane == n_q - 1'b1) state <= last_q ? S_LEN : S_WAIT;
                end
        S_WAIT: if (beat_fire) state <= S_ABS;
        S_LEN:  begin
                  x     <= x_next;
                  state <= S_TAG;
                end
        S_TAG:  if (tag_start) begin
                  user_tag <= user_abs;
                  state    <= S_IDLE;
                end
        default: state <= S_CFG;
      endcase
    end
  end

  // Rules of the beat stream: a block starts with a first beat and only
  // there; beats carry 1..N_LANES chunks; a MAC on offer is held until taken.
  a_first_in_idle: assert property (@(posedge clk) disable iff (!rst_n)
    beat_fire |-> (beat_first == (state == S_IDLE)));
  a_beat_n_range: assert property (@(posedge clk) disable iff (!rst_n)
    beat_valid |-> (beat_n >= 1 && beat_n <= NW'(N_LANES)));
  a_mac_stable: assert property (@(posedge clk) disable iff (!rst_n || cfg_start)
    mac_valid && !mac_ready |=> mac_valid && $stable(mac) && $stable(mac_user));
  a_aes_free: assert property (@(posedge clk) disable iff (!rst_n) aes_start |-> !aes_busy);

endmodule
