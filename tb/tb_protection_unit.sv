// tb_protection_unit: end-to-end test of the protection unit at its default
// parameters (8 lanes, 256-entry layer table), with an untrusted off-chip
// memory modelled as an associative array that the test can tamper with.
//
// It writes a layer's output through the unit (encrypt + authenticate),
// checks every ciphertext sub-block against the reference pad and the layer
// MAC against the XOR of reference block MACs, reads the data back in another
// order (decrypt + verify) and compares the plaintext; it then repeats with
// multi-beat blocks at another bandwidth setting and attacks the memory: a
// flipped bit, two blocks swapped (re-permutation), a stale block replayed
// after a rewrite with a new version number, a layer never written, and
// tampered weights under the model MAC. The consumer side is throttled at
// random so that responses stall. Each mechanism is counted and must occur
// at least once; the block rate with a free-running consumer is checked
// against the 11-cycle AES period.
module tb_protection_unit;
  import sec_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N  = 8;      // the unit's default lane count
  localparam int unsigned NW = $clog2(N + 1);
  localparam blk_t       KE   = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam blk_t       KH   = 128'h000102030405060708090a0b0c0d0e0f;
  localparam comb_mask_t SEED = 10'h3a7;

  typedef blk_t [N-1:0] beat_t;
  typedef struct {
    xfer_hdr_t hdr;
    int        n;
    beat_t     data;
  } xfer_t;

  logic clk = 1'b0, rst_n = 1'b0, cfg_start = 1'b0, cfg_ready;
  logic req_valid = 1'b0, req_ready, rsp_valid, rsp_ready = 1'b1, model_check = 1'b0;
  xfer_hdr_t req_hdr = '0, rsp_hdr;
  logic [NW-1:0] req_n = NW'(1);
  beat_t req_data = '0, rsp_data;
  logic tmv, lmv, lvv, lvok, mvv, mvok;
  dir_e tmd;
  mac_t tm, lm;
  layer_t lmid, lvid;

  int checks = 0, failures = 0, cycle = 0;
  int throttle = 0;                 // percent of cycles the consumer is not ready
  // mechanism counters
  int n_enc = 0, n_dec = 0, n_stall_out = 0, n_stall_mac = 0, n_tile = 0, n_multibeat = 0;
  int n_layer_ok = 0, n_flip = 0, n_repa = 0, n_replay = 0, n_unknown = 0;
  int n_model_ok = 0, n_model_bad = 0;
  int lanes_used [int];

  mac_t layer_macs[$], tile_macs[$];
  logic verdicts[$], model_verdicts[$];
  xfer_t rsp_q[$];

  beat_t mem [pa_t];                // untrusted off-chip memory

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  protection_unit dut (
    .clk, .rst_n, .cfg_start, .cfg_enc_key(KE), .cfg_mac_key(KH), .cfg_seed(SEED), .cfg_ready,
    .req_valid, .req_ready, .req_hdr, .req_n, .req_data,
    .rsp_valid, .rsp_ready, .rsp_hdr, .rsp_data,
    .model_check,
    .tile_mac_valid(tmv), .tile_mac_dir(tmd), .tile_mac(tm),
    .layer_mac_valid(lmv), .layer_mac_id(lmid), .layer_mac(lm),
    .layer_ver_valid(lvv), .layer_ver_ok(lvok), .layer_ver_id(lvid),
    .model_ver_valid(mvv), .model_ver_ok(mvok)
  );

  // consumer: random back-pressure, collects responses
  always @(negedge clk) rsp_ready = ($urandom_range(0, 99) >= throttle);
  always @(posedge clk) if (rst_n) begin
    if (rsp_valid && !rsp_ready) n_stall_out++;
    if (dut.c_rsp_valid && !dut.i_beat_ready) n_stall_mac++;
    if (rsp_valid && rsp_ready) begin
      xfer_t x;
      x.hdr = rsp_hdr; x.n = 0; x.data = rsp_data;
      rsp_q.push_back(x);
    end
    if (tmv) begin tile_macs.push_back(tm); n_tile++; end
    if (lmv) layer_macs.push_back(lm);
    if (lvv) verdicts.push_back(lvok);
    if (mvv) model_verdicts.push_back(mvok);
  end

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Sends the beats back to back and waits for all responses.
  task automatic stream(input xfer_t xs[$], output xfer_t out[$]);
    int want;
    want = rsp_q.size() + xs.size();
    foreach (xs[k]) begin
      @(negedge clk);
      req_hdr = xs[k].hdr; req_n = NW'(xs[k].n); req_data = xs[k].data; req_valid = 1'b1;
      lanes_used[xs[k].n] = 1;
      if (xs[k].hdr.dir == DIR_WRITE) n_enc++; else n_dec++;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 1'b0;
    end
    while (rsp_q.size() < want) @(negedge clk);
    repeat (40) @(negedge clk);        // let the last MACs and checks finish
    out = rsp_q;
    rsp_q.delete();
  endtask

  // A layer of `nblk` authentication blocks, `beats` beats each, `n` lanes.
  typedef struct {
    layer_t layer;
    int     nblk, beats, n, tile;
    vn_t    vn;
    logic   weight;
    beat_t  pt [$];              // one entry per beat
  } layer_img_t;

  function automatic pa_t beat_pa(layer_t l, int k);
    return 64'h1_0000_0000 + (64'(l) << 20) + 64'(k) * 64'(N * 16);
  endfunction

  function automatic xfer_hdr_t hdr_of(layer_img_t li, dir_e d, int b, int j);
    xfer_hdr_t h;
    h.dir = d; h.weight = li.weight;
    h.blk_first = (j == 0); h.blk_last = (j == li.beats - 1);
    h.tile_last = h.blk_last && ((b % li.tile) == li.tile - 1);
    h.layer_last = h.blk_last && (b == li.nblk - 1);
    h.pa = beat_pa(li.layer, b * li.beats + j); h.vn = li.vn; h.layer = li.layer;
    h.idx = blkidx_t'(b);
    return h;
  endfunction

  // Write the layer through the unit, store the ciphertext in memory, check
  // ciphertext and the layer MAC.
  task automatic write_layer(input layer_img_t li);
    xfer_t xs[$], out[$];
    mac_t exp_layer = '0;
    int lm0 = layer_macs.size();
    for (int b = 0; b < li.nblk; b++)
      for (int j = 0; j < li.beats; j++) begin
        xfer_t x;
        x.hdr = hdr_of(li, DIR_WRITE, b, j); x.n = li.n; x.data = li.pt[b * li.beats + j];
        xs.push_back(x);
      end
    stream(xs, out);
    check("write responses", 128'(out.size()), 128'(xs.size()));
    for (int b = 0; b < li.nblk; b++) begin
      blk_t ch[$];
      for (int j = 0; j < li.beats; j++) begin
        int k = b * li.beats + j;
        mem[out[k].hdr.pa] = out[k].data;
        for (int i = 0; i < li.n; i++) begin
          blk_t exp_ct = li.pt[k][i] ^ ref_block_otp(KE, SEED, out[k].hdr.pa, li.vn, i);
          check($sformatf("L%0d beat %0d lane %0d ciphertext", li.layer, k, i), out[k].data[i], exp_ct);
          ch.push_back(exp_ct);
        end
      end
      if (li.beats > 1) n_multibeat++;
      exp_layer ^= ref_mac(KH, beat_pa(li.layer, b * li.beats), li.vn, li.layer, blkidx_t'(b), ch);
    end
    if (!li.weight) begin
      check($sformatf("L%0d layer MAC stored", li.layer), 128'(layer_macs.size()), 128'(lm0 + 1));
      if (layer_macs.size() == lm0 + 1)
        check($sformatf("L%0d layer MAC", li.layer), 128'(layer_macs[lm0]), 128'(exp_layer));
    end
  endtask

  // Read the layer from memory (blocks in reverse order), return the
  // verdict and whether all plaintext came back right.
  task automatic read_layer(input layer_img_t li, output logic ok, output logic pt_ok);
    xfer_t xs[$], out[$];
    int v0 = verdicts.size();
    for (int b = li.nblk - 1; b >= 0; b--)
      for (int j = 0; j < li.beats; j++) begin
        xfer_t x;
        x.hdr = hdr_of(li, DIR_READ, b, j);
        // the last block sent must close the layer
        x.hdr.layer_last = x.hdr.blk_last && (b == 0);
        x.n = li.n; x.data = mem[x.hdr.pa];
        xs.push_back(x);
      end
    stream(xs, out);
    pt_ok = 1'b1;
    foreach (out[k]) begin
      int b = li.nblk - 1 - k / li.beats, j = k % li.beats;
      for (int i = 0; i < li.n; i++)
        if (out[k].data[i] !== li.pt[b * li.beats + j][i]) pt_ok = 1'b0;
    end
    ok = 1'b0;
    if (li.weight) ok = 1'b1;
    else if (verdicts.size() == v0 + 1) ok = verdicts[v0];
    else begin
      failures++;
      $display("FAIL layer %0d: %0d verdicts", li.layer, verdicts.size() - v0);
    end
  endtask

  function automatic layer_img_t make_layer(layer_t l, int nblk, int beats, int n, int tile,
                                            vn_t vn, logic w);
    layer_img_t li;
    li.layer = l; li.nblk = nblk; li.beats = beats; li.n = n; li.tile = tile; li.vn = vn;
    li.weight = w;
    for (int k = 0; k < nblk * beats; k++) begin
      beat_t d;
      for (int i = 0; i < int'(N); i++)
        // DNN-like data: many zero sub-blocks
        d[i] = ($urandom_range(0, 2) == 0) ? '0 : {$urandom, $urandom, $urandom, $urandom};
      li.pt.push_back(d);
    end
    return li;
  endfunction

  task automatic pulse_model_check(output logic ok);
    int m0 = model_verdicts.size();
    @(negedge clk); model_check = 1'b1;
    @(negedge clk); model_check = 1'b0;
    repeat (3) @(negedge clk);
    ok = (model_verdicts.size() == m0 + 1) ? model_verdicts[m0] : 1'b0;
  endtask

  initial begin
    layer_img_t l1, l2, l1b, w;
    logic ok, pt_ok;
    beat_t saved, saved2, stale;
    int t0, t1, acc;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); cfg_start = 1'b1;
    @(negedge clk); cfg_start = 1'b0;
    while (!cfg_ready) @(negedge clk);

    // layer 1: 8 single-beat blocks of 8 sub-blocks, tiles of 4, consumer throttled
    throttle = 30;
    l1 = make_layer(16'd1, 8, 1, 8, 4, 64'd1, 1'b0);
    write_layer(l1);
    read_layer(l1, ok, pt_ok);
    check("L1 read verified", 128'(ok), 128'(1));
    check("L1 plaintext", 128'(pt_ok), 128'(1));
    if (ok) n_layer_ok++;

    // layer 2: 6 blocks of 2 beats at 4 lanes (another bandwidth setting)
    l2 = make_layer(16'd2, 6, 2, 4, 3, 64'd1, 1'b0);
    write_layer(l2);
    read_layer(l2, ok, pt_ok);
    check("L2 multi-beat read verified", 128'(ok), 128'(1));
    check("L2 plaintext", 128'(pt_ok), 128'(1));
    if (ok) n_layer_ok++;

    // attack 1: flip one ciphertext bit of layer 1
    saved = mem[beat_pa(16'd1, 3)];
    mem[beat_pa(16'd1, 3)][5][77] ^= 1'b1;
    read_layer(l1, ok, pt_ok);
    check("bit flip detected", 128'(ok), 128'(0));
    if (!ok) n_flip++;
    mem[beat_pa(16'd1, 3)] = saved;

    // attack 2: swap two blocks of layer 1 (re-permutation)
    saved = mem[beat_pa(16'd1, 1)]; saved2 = mem[beat_pa(16'd1, 6)];
    mem[beat_pa(16'd1, 1)] = saved2; mem[beat_pa(16'd1, 6)] = saved;
    read_layer(l1, ok, pt_ok);
    check("re-permutation detected", 128'(ok), 128'(0));
    check("re-permutation garbles plaintext", 128'(pt_ok), 128'(0));
    if (!ok) n_repa++;
    mem[beat_pa(16'd1, 1)] = saved; mem[beat_pa(16'd1, 6)] = saved2;

    // clean read still passes
    read_layer(l1, ok, pt_ok);
    check("L1 clean after restore", 128'(ok && pt_ok), 128'(1));
    if (ok) n_layer_ok++;

    // attack 3: layer 1 rewritten with version 2, one old block replayed
    stale = mem[beat_pa(16'd1, 5)];
    l1b = make_layer(16'd1, 8, 1, 8, 4, 64'd2, 1'b0);
    write_layer(l1b);
    mem[beat_pa(16'd1, 5)] = stale;
    read_layer(l1b, ok, pt_ok);
    check("replay detected", 128'(ok), 128'(0));
    if (!ok) n_replay++;

    // attack 4: a layer that was never produced
    l2.layer = 16'd77;
    for (int k = 0; k < 12; k++) mem[beat_pa(16'd77, k)] = mem[beat_pa(16'd2, k)];
    read_layer(l2, ok, pt_ok);
    check("unknown layer rejected", 128'(ok), 128'(0));
    if (!ok) n_unknown++;

    // weights under the model MAC, 2 lanes
    throttle = 0;
    w = make_layer(16'd0, 5, 1, 2, 5, 64'd1, 1'b1);
    write_layer(w);
    read_layer(w, ok, pt_ok);
    check("weights plaintext", 128'(pt_ok), 128'(1));
    pulse_model_check(ok);
    check("model MAC ok", 128'(ok), 128'(1));
    if (ok) n_model_ok++;
    mem[beat_pa(16'd0, 2)][1][0] ^= 1'b1;
    read_layer(w, ok, pt_ok);
    pulse_model_check(ok);
    check("tampered weights detected", 128'(ok), 128'(0));
    if (!ok) n_model_bad++;

    // rate: 10 single-beat blocks of 4 lanes, consumer always ready
    begin
      xfer_t xs[$], out[$];
      automatic layer_img_t r = make_layer(16'd9, 10, 1, 4, 10, 64'd1, 1'b0);
      for (int b = 0; b < 10; b++) begin
        xfer_t x;
        x.hdr = hdr_of(r, DIR_WRITE, b, 0); x.n = 4; x.data = r.pt[b];
        xs.push_back(x);
      end
      acc = 0; t0 = 0; t1 = 0;
      fork
        stream(xs, out);
        while (acc < 10) begin
          @(posedge clk);
          if (req_valid && req_ready) begin
            if (acc == 2) t0 = cycle;
            if (acc == 9) t1 = cycle;
            acc++;
          end
        end
      join
      check("one block per 11 cycles", 128'(t1 - t0), 128'(7 * 11));
    end

    // every mechanism must have happened
    check("encryptions", 128'(n_enc > 0), 128'(1));
    check("decryptions", 128'(n_dec > 0), 128'(1));
    check("bandwidth settings used", 128'(lanes_used.num() >= 3), 128'(1));
    check("consumer stalls", 128'(n_stall_out > 0), 128'(1));
    check("MAC engine stalls", 128'(n_stall_mac > 0), 128'(1));
    check("tile MACs", 128'(n_tile > 0), 128'(1));
    check("multi-beat blocks", 128'(n_multibeat > 0), 128'(1));
    check("layer passes", 128'(n_layer_ok > 0), 128'(1));
    check("bit flips caught", 128'(n_flip > 0), 128'(1));
    check("re-permutations caught", 128'(n_repa > 0), 128'(1));
    check("replays caught", 128'(n_replay > 0), 128'(1));
    check("unknown layers caught", 128'(n_unknown > 0), 128'(1));
    check("model passes", 128'(n_model_ok > 0), 128'(1));
    check("model tampering caught", 128'(n_model_bad > 0), 128'(1));
    $display("mechanisms: enc=%0d dec=%0d lane_settings=%0d stall_out=%0d stall_mac=%0d tiles=%0d multibeat=%0d layer_ok=%0d flip=%0d repa=%0d replay=%0d unknown=%0d model_ok=%0d model_bad=%0d",
             n_enc, n_dec, lanes_used.num(), n_stall_out, n_stall_mac, n_tile, n_multibeat,
             n_layer_ok, n_flip, n_repa, n_replay, n_unknown, n_model_ok, n_model_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
