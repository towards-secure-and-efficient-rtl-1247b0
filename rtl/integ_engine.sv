// integ_engine: multi-level authentication of data kept in off-chip memory.
//
// Every optimal authentication block (opt_blk) of ciphertext gets a MAC bound
// to its address, version, layer and index (mac_engine). Instead of storing
// those MACs off chip, they are folded together by XOR:
//   tile_mac  = XOR of the opt_blk_macs of one tile,
//   layer_mac = XOR of the opt_blk_macs of one layer (= XOR of its tile_macs),
//   model_mac = XOR of the opt_blk_macs of all weight blocks of the model.
// Because each opt_blk_mac covers its index and layer, swapping blocks or
// tiles inside a layer changes the aggregate even though XOR itself is
// order-independent.
//
// Write direction (data produced on chip and sent off chip): the layer_mac is
// stored in the on-chip layer_mac_table under the layer number and also
// offered on `layer_mac_*`; the weight aggregate becomes the reference
// model_mac. Read direction (data fetched back): the same aggregates are
// recomputed; at the last block of a layer the result is compared with the
// stored entry and reported on `layer_ver_*` one cycle after the table read;
// a pulse on `model_check` (end of inference) compares the recomputed weight
// aggregate with the reference and reports on `model_ver_*`. Tile MACs of
// both directions are offered on `tile_mac_*` for designs that keep them off
// chip. Write and read aggregates are kept apart so that a layer's output
// can be written while its input is being read.
//
// Beat stream: as for mac_engine, plus per-block fields (dir, weight,
// tile_last, layer_last) taken from the last beat of each block and carried
// through the MAC pipeline with it, so a block may be hashed while the MAC of
// the previous one is still being encrypted.
// For the layer and model checks to pass, the reader must fetch each
// authentication block of the layer (or of the weights) exactly once between
// two checks; that is what the software-chosen opt_blk partition arranges.
//
// From the paper: the MAC binding, the XOR hierarchy opt_blk_mac -> tile_mac
// -> layer_mac, on-chip layer MACs, one on-chip model MAC for the weights
// with its check at the end of inference. This design's choices: the port
// set, separate write/read aggregates, the table size and the timing.
module integ_engine
  import sec_pkg::*;
#(
  parameter int unsigned N_LANES  = 8,
  parameter int unsigned N_LAYERS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_start,
  input  blk_t                     cfg_key,
  output logic                     cfg_ready,
  // ciphertext beats
  input  logic                     beat_valid,
  output logic                     beat_ready,
  input  dir_e                     beat_dir,
  input  logic                     beat_first,
  input  logic                     beat_last,
  input  logic                     beat_tile_last,
  input  logic                     beat_layer_last,
  input  logic                     beat_weight,
  input  pa_t                      beat_pa,
  input  vn_t                      beat_vn,
  input  layer_t                   beat_layer,
  input  blkidx_t                  beat_idx,
  input  logic [$clog2(N_LANES+1)-1:0] beat_n,
  input  blk_t [N_LANES-1:0]       beat_data,
  // end of inference
  input  logic                     model_check,
  // results
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

  localparam int unsigned AW = $clog2(N_LAYERS);

  logic   mac_valid;
  mac_t   blk_mac;
  logic   mac_fire;

  // fields of the block whose MAC is on mac_* (carried as mac_engine user bits)
  typedef struct packed {
    dir_e   dir;
    logic   weight;
    logic   tile_last;
    logic   layer_last;
    layer_t layer;
  } blk_user_t;
  localparam int unsigned USER_W = $bits(blk_user_t);

  blk_user_t beat_user, mac_user;
  dir_e   m_dir;
  layer_t m_layer;
  logic   m_weight, m_tile_last, m_layer_last;

  mac_t   tile_acc  [2];
  mac_t   layer_acc [2];
  mac_t   model_ref, model_run;
  logic   model_ref_set;

  // layer check pipeline
  logic   chk_pend;
  mac_t   chk_val;
  layer_t chk_id;
  mac_t   tbl_rd_data;
  logic   tbl_rd_hit;
  logic   tbl_wr_en, tbl_rd_en;
  mac_t   tile_sum, layer_sum;

  assign beat_user = '{dir: beat_dir, weight: beat_weight, tile_last: beat_tile_last,
                       layer_last: beat_layer_last, layer: beat_layer};

  mac_engine #(.N_LANES(N_LANES), .USER_W(USER_W)) u_mac (
    .clk, .rst_n, .cfg_start, .cfg_key, .cfg_ready,
    .beat_valid, .beat_ready, .beat_first, .beat_last,
    .beat_pa, .beat_vn, .beat_layer, .beat_idx, .beat_user, .beat_n, .beat_data,
    .mac_valid, .mac_ready(1'b1), .mac(blk_mac), .mac_user
  );

  assign m_dir        = mac_user.dir;
  assign m_layer      = mac_user.layer;
  assign m_weight     = mac_user.weight;
  assign m_tile_last  = mac_user.tile_last;
  assign m_layer_last = mac_user.layer_last;

  assign mac_fire  = mac_valid;

  assign tile_sum  = tile_acc[m_dir] ^ blk_mac;
  assign layer_sum = layer_acc[m_dir] ^ blk_mac;
  assign tbl_wr_en = mac_fire && !m_weight && m_layer_last && m_dir == DIR_WRITE;
  assign tbl_rd_en = mac_fire && !m_weight && m_layer_last && m_dir == DIR_READ;

  layer_mac_table #(.DEPTH(N_LAYERS)) u_table (
    .clk, .rst_n, .clear(cfg_start),
    .wr_en(tbl_wr_en), .wr_addr(AW'(m_layer)), .wr_data(layer_sum),
    .rd_en(tbl_rd_en), .rd_addr(AW'(m_layer)), .rd_data(tbl_rd_data), .rd_hit(tbl_rd_hit)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || cfg_start) begin
      tile_acc        <= '{default: '0};
      layer_acc       <= '{default: '0};
      model_ref       <= '0;
      model_run       <= '0;
      model_ref_set   <= 1'b0;
      chk_pend        <= 1'b0;
      chk_val         <= '0;
      chk_id          <= '0;
      tile_mac_valid  <= 1'b0;
      tile_mac_dir    <= DIR_WRITE;
      tile_mac        <= '0;
      layer_mac_valid <= 1'b0;
      layer_mac_id    <= '0;
      layer_mac       <= '0;
      layer_ver_valid <= 1'b0;
      layer_ver_ok    <= 1'b0;
      layer_ver_id    <= '0;
      model_ver_valid <= 1'b0;
      model_ver_ok    <= 1'b0;
    end else begin
      tile_mac_valid  <= 1'b0;
      layer_mac_valid <= 1'b0;
      layer_ver_valid <= 1'b0;
      model_ver_valid <= 1'b0;

      if (mac_fire) begin
        // tile level
        if (m_tile_last) begin
          tile_mac_valid   <= 1'b1;
          tile_mac_dir     <= m_dir;
          tile_mac         <= tile_sum;
          tile_acc[m_dir]  <= '0;
        end else begin
          tile_acc[m_dir]  <= tile_sum;
        end
        // model level (weights) or layer level (feature maps)
        if (m_weight) begin
          if (m_dir == DIR_WRITE) begin
            model_ref     <= model_ref ^ blk_mac;
            model_ref_set <= 1'b1;
          end else begin
            model_run     <= model_run ^ blk_mac;
          end
        end else if (m_layer_last) begin
          layer_acc[m_dir] <= '0;
          if (m_dir == DIR_WRITE) begin
            layer_mac_valid <= 1'b1;
            layer_mac_id    <= m_layer;
            layer_mac       <= layer_sum;
          end else begin
            chk_pend <= 1'b1;
            chk_val  <= layer_sum;
            chk_id   <= m_layer;
          end
        end else begin
          layer_acc[m_dir] <= layer_sum;
        end
      end

      // compare with the table one cycle after the read
      if (chk_pend) begin
        layer_ver_valid <= 1'b1;
        layer_ver_ok    <= tbl_rd_hit && (tbl_rd_data == chk_val);
        layer_ver_id    <= chk_id;
        if (!tbl_rd_en) chk_pend <= 1'b0;
      end

      if (model_check) begin
        model_ver_valid <= 1'b1;
        model_ver_ok    <= model_ref_set && (model_run == model_ref);
        // a weight block finishing in this very cycle starts the next run
        model_run       <= (mac_fire && m_weight && m_dir == DIR_READ) ? blk_mac : '0;
      end
    end
  end

  a_layer_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    beat_valid && beat_first |-> 32'(beat_layer) < N_LAYERS);

endmodule
