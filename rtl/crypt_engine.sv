// crypt_engine: bandwidth-aware AES-CTR encryption/decryption with a single
// AES engine.
//
// A data block of up to N_LANES 128-bit sub-blocks is protected with one AES
// operation: shared_otp = AES_Ke(PA || VN). Sub-block i is XORed with
// block_otp_i = shared_otp XOR comb_key_i, where the comb_key_i are distinct
// XOR-combinations of the AES round keys (comb_key_gen). Encryption and
// decryption are the same XOR, so one request path serves both directions.
// The number of sub-blocks actually used, `req_n` (1..N_LANES), is the
// bandwidth setting: the ratio of the required bandwidth to that of one AES
// engine. Lanes at or above req_n return zero.
//
// Configuration: pulse `cfg_start` with the data key and the selection seed;
// the key is expanded (11 cycles), then the combination keys are built
// (N_LANES cycles); `cfg_ready` stays high afterwards.
//
// Request/response: valid/ready handshakes. A request is accepted when the
// engine is configured and either idle or handing its response over in the
// same cycle. The response appears 11 cycles after the request is accepted
// (the AES latency) and is held until taken. With `rsp_ready` held high the
// engine takes a new block every 11 cycles, i.e. N_LANES*16 bytes per
// 11 cycles at most.
//
// From the paper: single AES engine, counter = PA || VN, the pad derivation
// shared_otp XOR comb_key_i and the XOR with the data. This design's choices:
// 64-bit PA and VN halves, the handshake, one block in flight at a time.
module crypt_engine
  import sec_pkg::*;
#(
  parameter int unsigned N_LANES = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     cfg_start,
  input  blk_t                     cfg_key,
  input  comb_mask_t               cfg_seed,
  output logic                     cfg_ready,
  // request
  input  logic                     req_valid,
  output logic                     req_ready,
  input  pa_t                      req_pa,
  input  vn_t                      req_vn,
  input  logic [$clog2(N_LANES+1)-1:0] req_n,
  input  blk_t [N_LANES-1:0]       req_data,
  // response
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output blk_t [N_LANES-1:0]       rsp_data
);

  localparam int unsigned NW = $clog2(N_LANES + 1);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_HOLD} state_e;

  rk_array_t          round_keys;
  logic               ke_ready, ck_ready, ke_ready_q;
  blk_t [N_LANES-1:0] comb_keys;
  comb_mask_t [N_LANES-1:0] masks;

  logic               aes_busy, aes_done;
  blk_t               shared_otp;

  state_e             state;
  blk_t [N_LANES-1:0] data_q;
  logic [NW-1:0]      n_q;
  logic               req_fire, rsp_fire;

  aes_key_expand u_key_expand (
    .clk, .rst_n, .start(cfg_start), .key(cfg_key),
    .ready(ke_ready), .round_keys(round_keys)
  );

  // Start the combination-key build on the rising edge of ke_ready.
  always_ff @(posedge clk) begin
    if (!rst_n) ke_ready_q <= 1'b0;
    else        ke_ready_q <= ke_ready;
  end

  comb_key_gen #(.N_LANES(N_LANES)) u_comb_key_gen (
    .clk, .rst_n, .start(ke_ready && !ke_ready_q), .seed(cfg_seed),
    .round_keys(round_keys), .ready(ck_ready), .masks(masks), .comb_keys(comb_keys)
  );

  assign cfg_ready = ke_ready && ck_ready && ke_ready_q;

  aes_core u_aes (
    .clk, .rst_n, .round_keys(round_keys), .start(req_fire), .din({req_pa, req_vn}),
    .busy(aes_busy), .done(aes_done), .dout(shared_otp)
  );

  assign rsp_valid = (state == S_BUSY && aes_done) || state == S_HOLD;
  assign rsp_fire  = rsp_valid && rsp_ready;
  assign req_ready = cfg_ready && !cfg_start && (state == S_IDLE || rsp_fire);
  assign req_fire  = req_valid && req_ready;

  // block_otp_i = shared_otp ^ comb_key_i; data ^ block_otp_i for active lanes
  always_comb begin
    for (int i = 0; i < int'(N_LANES); i++)
      rsp_data[i] = (i < int'(n_q)) ? (data_q[i] ^ shared_otp ^ comb_keys[i]) : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      data_q <= '0;
      n_q    <= '0;
    end else begin
      if (req_fire) begin
        data_q <= req_data;
        n_q    <= req_n;
      end
      unique case (state)
        S_IDLE: if (req_fire) state <= S_BUSY;
        S_BUSY: if (aes_done) state <= rsp_fire ? (req_fire ? S_BUSY : S_IDLE) : S_HOLD;
        S_HOLD: if (rsp_fire) state <= req_fire ? S_BUSY : S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules: a request or response that is offered stays offered,
  // unchanged, until it is taken; the lane count is 1..N_LANES.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req_pa) && $stable(req_vn) && $stable(req_n));
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_data));
  // Every lane's combination key XORs at least one round key.
  for (genvar g = 0; g < N_LANES; g++) begin : g_mask_chk
    a_mask_nonzero: assert property (@(posedge clk) disable iff (!rst_n) cfg_ready |-> masks[g] != '0);
  end
  a_aes_free: assert property (@(posedge clk) disable iff (!rst_n) req_fire |-> !aes_busy);
  a_req_n_range: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> (req_n >= 1 && req_n <= NW'(N_LANES)));

endmodule
