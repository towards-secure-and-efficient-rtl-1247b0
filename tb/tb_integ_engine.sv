// tb_integ_engine: writes the output of a layer as tiles of authentication
// blocks and checks the tile and layer MACs against XORs of reference block
// MACs; reads it back in another order (passes), with two blocks' contents
// swapped (the re-permutation attack, must fail), with one bit flipped (must
// fail) and for a layer never written (must fail); writes and reads weights
// and checks the model MAC at the end, clean and tampered; uses multi-beat
// blocks for one layer.
module tb_integ_engine;
  import sec_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 8;
  localparam int unsigned NW = $clog2(N + 1);
  localparam blk_t KH = 128'h0f1e2d3c_4b5a6978_8796a5b4_c3d2e1f0;

  logic clk = 1'b0, rst_n = 1'b0, cfg_start = 1'b0, cfg_ready;
  logic bv = 1'b0, br, bfirst = 1'b0, blast = 1'b0, btl = 1'b0, bll = 1'b0, bw = 1'b0;
  dir_e bdir = DIR_WRITE;
  pa_t pa = '0;
  vn_t vn = '0;
  layer_t layer = '0;
  blkidx_t idx = '0;
  logic [NW-1:0] bn = NW'(1);
  blk_t [N-1:0] bdata = '0;
  logic model_check = 1'b0;
  logic tmv, lmv, lvv, lvok, mvv, mvok;
  dir_e tmd;
  mac_t tm, lm;
  layer_t lmid, lvid;
  int checks = 0, failures = 0;

  mac_t tile_q[$], layer_q[$];
  logic ver_q[$], model_q[$];

  always #5 clk = ~clk;

  integ_engine #(.N_LANES(N), .N_LAYERS(16)) dut (
    .clk, .rst_n, .cfg_start, .cfg_key(KH), .cfg_ready,
    .beat_valid(bv), .beat_ready(br), .beat_dir(bdir), .beat_first(bfirst), .beat_last(blast),
    .beat_tile_last(btl), .beat_layer_last(bll), .beat_weight(bw),
    .beat_pa(pa), .beat_vn(vn), .beat_layer(layer), .beat_idx(idx), .beat_n(bn), .beat_data(bdata),
    .model_check,
    .tile_mac_valid(tmv), .tile_mac_dir(tmd), .tile_mac(tm),
    .layer_mac_valid(lmv), .layer_mac_id(lmid), .layer_mac(lm),
    .layer_ver_valid(lvv), .layer_ver_ok(lvok), .layer_ver_id(lvid),
    .model_ver_valid(mvv), .model_ver_ok(mvok)
  );

  always @(posedge clk) if (rst_n) begin
    if (tmv) tile_q.push_back(tm);
    if (lmv) layer_q.push_back(lm);
    if (lvv) ver_q.push_back(lvok);
    if (mvv) model_q.push_back(mvok);
  end

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // storage of the test blocks: 6 blocks of 4 chunks, 2 tiles of 3
  blk_t blk [6][4];
  mac_t bmac [6];

  function automatic pa_t pa_of(int b); return 64'h2000 + 64'(b * 64); endfunction

  // Sends one authentication block as beats of `per_beat` chunks.
  task automatic send(input dir_e d, input layer_t l, input blkidx_t k, input pa_t a,
                      input blk_t ch[$], input int per_beat, input logic tl, input logic ll,
                      input logic w);
    int c = 0;
    while (c < ch.size()) begin
      @(negedge clk);
      bdir = d; layer = l; idx = k; pa = a; vn = 64'h77; bw = w;
      bfirst = (c == 0);
      bn = NW'((ch.size() - c < per_beat) ? ch.size() - c : per_beat);
      blast = (c + int'(bn) == ch.size());
      btl = tl; bll = ll;
      for (int i = 0; i < int'(N); i++) bdata[i] = (i < int'(bn)) ? ch[c + i] : '0;
      bv = 1'b1;
      @(posedge clk);
      while (!br) @(posedge clk);
      c += int'(bn);
      @(negedge clk);
      bv = 1'b0;
    end
  endtask

  function automatic blk_t q_of(int b, output blk_t ch[$]);
    ch.delete();
    for (int i = 0; i < 4; i++) ch.push_back(blk[b][i]);
    return '0;
  endfunction

  task automatic settle();
    repeat (40) @(negedge clk);
  endtask

  // Reads the layer back in the given block order; data of block b taken
  // from block src[b]; `flip` flips a bit of block 0.
  task automatic read_layer(input layer_t l, input int order[6], input int src[6], input logic flip);
    blk_t ch[$];
    void'(q_of(0, ch));
    for (int j = 0; j < 6; j++) begin
      int b;
      b = order[j];
      void'(q_of(src[b], ch));
      if (flip && b == 0) ch[2][5] = ~ch[2][5];
      send(DIR_READ, l, blkidx_t'(b), pa_of(b), ch, 4, (j % 3) == 2, j == 5, 1'b0);
    end
    settle();
  endtask

  initial begin
    blk_t ch[$];
    mac_t exp_tile0, exp_tile1, wref;
    int ord[6], src[6];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); cfg_start = 1'b1;
    @(negedge clk); cfg_start = 1'b0;
    while (!cfg_ready) @(negedge clk);

    for (int b = 0; b < 6; b++) begin
      for (int i = 0; i < 4; i++) blk[b][i] = {$urandom, $urandom, $urandom, $urandom};
      void'(q_of(b, ch));
      bmac[b] = ref_mac(KH, pa_of(b), 64'h77, 16'd3, blkidx_t'(b), ch);
    end
    exp_tile0 = bmac[0] ^ bmac[1] ^ bmac[2];
    exp_tile1 = bmac[3] ^ bmac[4] ^ bmac[5];

    // produce layer 3
    for (int b = 0; b < 6; b++) begin
      void'(q_of(b, ch));
      send(DIR_WRITE, 16'd3, blkidx_t'(b), pa_of(b), ch, 4, (b % 3) == 2, b == 5, 1'b0);
    end
    settle();
    check("two tile MACs", 128'(tile_q.size()), 128'(2));
    check("tile 0 MAC", 128'(tile_q[0]), 128'(exp_tile0));
    check("tile 1 MAC", 128'(tile_q[1]), 128'(exp_tile1));
    check("one layer MAC", 128'(layer_q.size()), 128'(1));
    check("layer MAC", 128'(layer_q[0]), 128'(exp_tile0 ^ exp_tile1));

    // consume it in another order: passes
    ord = '{5, 4, 3, 0, 2, 1}; src = '{0, 1, 2, 3, 4, 5};
    read_layer(16'd3, ord, src, 1'b0);
    check("clean read verified", 128'(ver_q.size()), 128'(1));
    check("clean read ok", 128'(ver_q[0]), 128'(1));
    // re-permutation: contents of blocks 1 and 5 swapped
    ord = '{0, 1, 2, 3, 4, 5}; src = '{0, 5, 2, 3, 4, 1};
    read_layer(16'd3, ord, src, 1'b0);
    check("re-permutation detected", 128'(ver_q[1]), 128'(0));
    // one bit flipped
    src = '{0, 1, 2, 3, 4, 5};
    read_layer(16'd3, ord, src, 1'b1);
    check("bit flip detected", 128'(ver_q[2]), 128'(0));
    // layer never written
    read_layer(16'd9, ord, src, 1'b0);
    check("unknown layer fails", 128'(ver_q[3]), 128'(0));
    // clean read again still passes
    read_layer(16'd3, ord, src, 1'b0);
    check("second clean read ok", 128'(ver_q[4]), 128'(1));
    check("five verdicts", 128'(ver_q.size()), 128'(5));

    // multi-beat blocks: layer 5, blocks of 4 chunks sent as beats of 3 and 1
    for (int b = 0; b < 6; b++) begin
      void'(q_of(b, ch));
      send(DIR_WRITE, 16'd5, blkidx_t'(b), pa_of(b), ch, 3, (b % 3) == 2, b == 5, 1'b0);
    end
    settle();
    wref = '0;
    for (int b = 0; b < 6; b++) begin
      void'(q_of(b, ch));
      wref ^= ref_mac(KH, pa_of(b), 64'h77, 16'd5, blkidx_t'(b), ch);
    end
    check("multi-beat layer MAC", 128'(layer_q[1]), 128'(wref));
    for (int b = 0; b < 6; b++) begin
      void'(q_of(b, ch));
      send(DIR_READ, 16'd5, blkidx_t'(b), pa_of(b), ch, 2, (b % 3) == 2, b == 5, 1'b0);
    end
    settle();
    check("multi-beat read ok", 128'(ver_q[5]), 128'(1));

    // weights: written once, read during inference, model check at the end
    for (int b = 0; b < 4; b++) begin
      void'(q_of(b, ch));
      send(DIR_WRITE, 16'd0, blkidx_t'(b), pa_of(b + 100), ch, 4, 1'b0, 1'b0, 1'b1);
    end
    for (int b = 3; b >= 0; b--) begin
      void'(q_of(b, ch));
      send(DIR_READ, 16'd0, blkidx_t'(b), pa_of(b + 100), ch, 4, 1'b0, 1'b0, 1'b1);
    end
    settle();
    @(negedge clk); model_check = 1'b1;
    @(negedge clk); model_check = 1'b0;
    settle();
    check("model verdict", 128'(model_q.size()), 128'(1));
    check("model ok", 128'(model_q[0]), 128'(1));
    for (int b = 0; b < 4; b++) begin
      void'(q_of(b, ch));
      if (b == 2) ch[0][0] = ~ch[0][0];
      send(DIR_READ, 16'd0, blkidx_t'(b), pa_of(b + 100), ch, 4, 1'b0, 1'b0, 1'b1);
    end
    settle();
    @(negedge clk); model_check = 1'b1;
    @(negedge clk); model_check = 1'b0;
    settle();
    check("tampered weights detected", 128'(model_q[1]), 128'(0));
    check("weights leave layer MACs alone", 128'(layer_q.size()), 128'(2));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
