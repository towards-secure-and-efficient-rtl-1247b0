// tb_mac_engine: sends authentication blocks of one beat (1..N_LANES chunks)
// and of several beats, with random data and metadata, and compares every
// MAC with the reference polynomial MAC; checks that changing only the index
// or only the layer changes the MAC, and that a single-beat block's MAC is
// ready n + 14 cycles after its first beat is taken, that the user tag comes
// back with its MAC, and that back-to-back blocks overlap hashing and AES.
module tb_mac_engine;
  import sec_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 8;
  localparam int unsigned NW = $clog2(N + 1);
  localparam blk_t KH = 128'hfeedc0de_0badf00d_13579bdf_2468ace0;

  logic clk = 1'b0, rst_n = 1'b0, cfg_start = 1'b0, cfg_ready;
  logic beat_valid = 1'b0, beat_ready, first = 1'b0, last = 1'b0;
  pa_t pa = '0;
  vn_t vn = '0;
  layer_t layer = '0;
  blkidx_t idx = '0;
  logic [NW-1:0] n = NW'(1);
  blk_t [N-1:0] data = '0;
  logic mac_valid, mac_ready = 1'b0;
  mac_t mac;
  logic [7:0] user = '0, mac_user;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  mac_engine #(.N_LANES(N)) dut (
    .clk, .rst_n, .cfg_start, .cfg_key(KH), .cfg_ready,
    .beat_valid, .beat_ready, .beat_first(first), .beat_last(last), .beat_pa(pa), .beat_vn(vn),
    .beat_layer(layer), .beat_idx(idx), .beat_user(user), .beat_n(n),
    .beat_data(data), .mac_valid, .mac_ready, .mac, .mac_user
  );

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // One authentication block made of beats with the given chunk counts.
  task automatic auth(input pa_t a, input vn_t v, input layer_t l, input blkidx_t k,
                      input int beats[$], input blk_t chunks[$], output mac_t m,
                      output int cycles);
    int c = 0, t0 = 0;
    for (int b = 0; b < beats.size(); b++) begin
      @(negedge clk);
      pa = a; vn = v; layer = l; idx = k; n = NW'(beats[b]);
      first = (b == 0); last = (b == beats.size() - 1); user = 8'(k);
      for (int i = 0; i < int'(N); i++) data[i] = (i < beats[b]) ? chunks[c + i] : {4{$urandom}};
      c += beats[b];
      beat_valid = 1'b1;
      @(posedge clk);
      while (!beat_ready) @(posedge clk);
      if (b == 0) t0 = cycle;
      @(negedge clk);
      beat_valid = 1'b0;
    end
    while (!mac_valid) @(negedge clk);
    cycles = cycle - t0;
    m = mac;
    check("user tag", 128'(mac_user), 128'(8'(k)));
    mac_ready = 1'b1;
    @(negedge clk);
    mac_ready = 1'b0;
  endtask

  initial begin
    blk_t ch[$];
    int beats[$];
    mac_t m, m2;
    int cyc;
    pa_t a;
    vn_t v;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); cfg_start = 1'b1;
    @(negedge clk); cfg_start = 1'b0;
    while (!cfg_ready) @(negedge clk);

    for (int nl = 1; nl <= int'(N); nl++) begin
      ch.delete();
      for (int i = 0; i < nl; i++) ch.push_back({$urandom, $urandom, $urandom, $urandom});
      beats = '{nl};
      a = {$urandom, $urandom}; v = 64'($urandom);
      auth(a, v, 16'(nl), 32'(nl * 3), beats, ch, m, cyc);
      check($sformatf("single beat n=%0d MAC", nl), 128'(m), 128'(ref_mac(KH, a, v, 16'(nl), 32'(nl * 3), ch)));
      check($sformatf("single beat n=%0d latency", nl), 128'(cyc), 128'(nl + 14));
      // same data, another index -> another MAC
      auth(a, v, 16'(nl), 32'(nl * 3 + 1), beats, ch, m2, cyc);
      check($sformatf("n=%0d index changes MAC", nl), 128'(m2 != m), 128'(1));
      check($sformatf("n=%0d index MAC", nl), 128'(m2), 128'(ref_mac(KH, a, v, 16'(nl), 32'(nl * 3 + 1), ch)));
      auth(a, v, 16'(nl + 100), 32'(nl * 3), beats, ch, m2, cyc);
      check($sformatf("n=%0d layer changes MAC", nl), 128'(m2 != m), 128'(1));
    end
    // multi-beat blocks
    for (int r = 0; r < 4; r++) begin
      ch.delete();
      beats = '{4, 2, 8, 1 + r};
      for (int i = 0; i < 15 + r; i++) ch.push_back({$urandom, $urandom, $urandom, $urandom});
      a = {$urandom, $urandom}; v = 64'($urandom);
      auth(a, v, 16'(7), 32'(r), beats, ch, m, cyc);
      check($sformatf("multi-beat %0d MAC", r), 128'(m), 128'(ref_mac(KH, a, v, 16'(7), 32'(r), ch)));
    end
    // back-to-back single-beat blocks of 4 chunks, MAC always taken: one
    // MAC every 11 cycles once the pipeline is full
    begin
      int t[$];
      mac_t got[$];
      blk_t chs[8][4];
      mac_ready = 1'b1;
      fork
        begin
          for (int k2 = 0; k2 < 8; k2++) begin
            @(negedge clk);
            pa = 64'(k2); vn = 64'h3; layer = 16'h2; idx = 32'(k2); n = NW'(4);
            first = 1'b1; last = 1'b1; user = 8'(k2);
            for (int i = 0; i < int'(N); i++) data[i] = {$urandom, $urandom, $urandom, $urandom};
            for (int i = 0; i < 4; i++) chs[k2][i] = data[i];
            beat_valid = 1'b1;
            @(posedge clk);
            while (!beat_ready) @(posedge clk);
            @(negedge clk);
            beat_valid = 1'b0;
          end
        end
        begin
          while (got.size() < 8) begin
            @(posedge clk);
            if (mac_valid) begin got.push_back(mac); t.push_back(cycle); end
          end
        end
      join
      mac_ready = 1'b0;
      for (int k2 = 0; k2 < 8; k2++) begin
        ch.delete();
        for (int i = 0; i < 4; i++) ch.push_back(chs[k2][i]);
        check($sformatf("stream MAC %0d", k2), 128'(got[k2]), 128'(ref_mac(KH, 64'(k2), 64'h3, 16'h2, 32'(k2), ch)));
      end
      check("stream rate", 128'(t[7] - t[3]), 128'(44));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
