// protection_unit: memory protection between a DNN accelerator and its
// untrusted off-chip memory: confidentiality by bandwidth-aware AES-CTR
// (crypt_engine) and integrity by multi-level MACs kept on chip
// (integ_engine).
//
// Every transfer between the on-chip SRAM and off-chip memory passes through
// this unit as beats of up to N_LANES 128-bit sub-blocks with a header
// (xfer_hdr_t):
//   write (dir = DIR_WRITE): plaintext in, ciphertext out to memory; the
//     ciphertext is authenticated and its block MACs are folded into the
//     tile/layer (or model, for weights) MACs, the layer MAC being stored on
//     chip;
//   read (dir = DIR_READ): ciphertext in from memory, plaintext out to the
//     SRAM; the ciphertext is authenticated the same way and the layer MAC
//     is checked against the stored one when the header marks the layer's
//     last block (result on layer_ver_*). The weight MAC is checked on a
//     `model_check` pulse (result on model_ver_*).
// `req_n` (1..N_LANES) is the number of sub-blocks in the beat, i.e. the
// encryption bandwidth chosen for the transfer.
//
// Dataflow and timing: a beat is taken by the crypt engine (one AES
// operation, 11 cycles); its result is offered on rsp_* and, in the same
// handshake, given to the integrity engine (ciphertext: the result for
// writes, the input for reads). The response is released only when both the
// consumer (rsp_ready) and the integrity engine are ready, so either can
// stall the stream. At most one beat is inside the crypt engine; with no
// stalls a beat passes every 11 cycles (single-beat blocks of up to 7
// sub-blocks) or 12 cycles (8 sub-blocks, limited by the MAC hash).
//
// Configuration: pulse cfg_start with the encryption key Ke, the MAC key Kh
// and the seed of the combination-key selection; cfg_ready rises when both
// engines are ready (about 23 cycles). Reconfiguring clears the layer table
// and all aggregates. Reset is synchronous and active low.
//
// What follows the paper: the two engines of the protection unit, one AES
// engine for encryption with round-key combinations for the sub-block pads,
// MACs bound to PA, VN, layer and index, XOR aggregation into tile, layer and
// model MACs, layer MACs in on-chip memory. This design's choices: the beat
// interface and header, the MAC algorithm (see mac_engine), widths, sizes and
// all timing.
module protection_unit
  import sec_pkg::*;
#(
  parameter int unsigned N_LANES  = 8,
  parameter int unsigned N_LAYERS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     cfg_start,
  input  blk_t                     cfg_enc_key,
  input  blk_t                     cfg_mac_key,
  input  comb_mask_t               cfg_seed,
  output logic                     cfg_ready,
  // beats in (plaintext from SRAM for writes, ciphertext from memory for reads)
  input  logic                     req_valid,
  output logic                     req_ready,
  input  xfer_hdr_t                req_hdr,
  input  logic [$clog2(N_LANES+1)-1:0] req_n,
  input  blk_t [N_LANES-1:0]       req_data,
  // beats out (ciphertext to memory for writes, plaintext to SRAM for reads)
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output xfer_hdr_t                rsp_hdr,
  output blk_t [N_LANES-1:0]       rsp_data,
  // integrity results
  input  logic                     model_check,
  output logic                     tile_mac_valid,
  output dir_e                     tile_mac_dir,
  output mac_t                     tile_mac,
  output logic                     layer_mac_valid,
  output layer_t                   layer_mac_id,
  output mac_t                     layer_mac,
  output logic                     layer_ver_valid,
  output logic                     layer_ver_ok,
  output layer_t                   layer_ver_id,
  output logic                     model_ver_valid,
  output logic                     model_ver_ok
);

  localparam int unsigned NW = $clog2(N_LANES + 1);

  logic               crypt_cfg_ready, integ_cfg_ready;
  logic               c_req_ready, c_rsp_valid, c_rsp_ready;
  blk_t [N_LANES-1:0] c_rsp_data;
  logic               i_beat_valid, i_beat_ready;
  xfer_hdr_t          hdr_q;
  logic [NW-1:0]      n_q;
  blk_t [N_LANES-1:0] din_q;

  assign cfg_ready = crypt_cfg_ready && integ_cfg_ready;

  crypt_engine #(.N_LANES(N_LANES)) u_crypt (
    .clk, .rst_n, .cfg_start, .cfg_key(cfg_enc_key), .cfg_seed, .cfg_ready(crypt_cfg_ready),
    .req_valid(req_valid && integ_cfg_ready), .req_ready(c_req_ready),
    .req_pa(req_hdr.pa), .req_vn(req_hdr.vn), .req_n, .req_data,
    .rsp_valid(c_rsp_valid), .rsp_ready(c_rsp_ready), .rsp_data(c_rsp_data)
  );

  assign req_ready = c_req_ready && integ_cfg_ready;

  // header and input copy of the beat inside the crypt engine
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hdr_q <= '0;
      n_q   <= '0;
      din_q <= '0;
    end else if (req_valid && req_ready) begin
      hdr_q <= req_hdr;
      n_q   <= req_n;
      din_q <= req_data;
    end
  end

  // fork the crypt result to the consumer and the integrity engine
  assign rsp_valid    = c_rsp_valid && i_beat_ready;
  assign i_beat_valid = c_rsp_valid && rsp_ready;
  assign c_rsp_ready  = rsp_ready && i_beat_ready;
  assign rsp_hdr      = hdr_q;
  assign rsp_data     = c_rsp_data;

  integ_engine #(.N_LANES(N_LANES), .N_LAYERS(N_LAYERS)) u_integ (
    .clk, .rst_n, .cfg_start, .cfg_key(cfg_mac_key), .cfg_ready(integ_cfg_ready),
    .beat_valid(i_beat_valid), .beat_ready(i_beat_ready),
    .beat_dir(hdr_q.dir), .beat_first(hdr_q.blk_first), .beat_last(hdr_q.blk_last),
    .beat_tile_last(hdr_q.tile_last), .beat_layer_last(hdr_q.layer_last),
    .beat_weight(hdr_q.weight), .beat_pa(hdr_q.pa), .beat_vn(hdr_q.vn),
    .beat_layer(hdr_q.layer), .beat_idx(hdr_q.idx), .beat_n(n_q),
    // the MAC always covers the ciphertext
    .beat_data(hdr_q.dir == DIR_READ ? din_q : c_rsp_data),
    .model_check,
    .tile_mac_valid, .tile_mac_dir, .tile_mac,
    .layer_mac_valid, .layer_mac_id, .layer_mac,
    .layer_ver_valid, .layer_ver_ok, .layer_ver_id,
    .model_ver_valid, .model_ver_ok
  );

endmodule
