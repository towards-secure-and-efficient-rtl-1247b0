// tb_crypt_engine: configures the engine, encrypts blocks with every lane
// count 1..N_LANES and compares each lane with plaintext ^ reference pad;
// decrypts the ciphertext back; checks that identical plaintext sub-blocks
// give distinct ciphertexts (the point of per-sub-block pads), that unused
// lanes are zero, that a block is accepted every 11 cycles when the output
// is always taken, and that a held-back response stays put.
module tb_crypt_engine;
  import sec_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 8;
  localparam int unsigned NW = $clog2(N + 1);
  localparam blk_t KEY = 128'h000102030405060708090a0b0c0d0e0f;
  localparam comb_mask_t SEED = 10'h155;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_start = 1'b0, cfg_ready;
  logic req_valid = 1'b0, req_ready, rsp_valid, rsp_ready = 1'b1;
  pa_t pa = '0;
  vn_t vn = '0;
  logic [NW-1:0] n = NW'(1);
  blk_t [N-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  crypt_engine #(.N_LANES(N)) dut (
    .clk, .rst_n, .cfg_start, .cfg_key(KEY), .cfg_seed(SEED), .cfg_ready,
    .req_valid, .req_ready, .req_pa(pa), .req_vn(vn), .req_n(n), .req_data(din),
    .rsp_valid, .rsp_ready, .rsp_data(dout)
  );

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Sends one block and waits for its response; returns the response.
  task automatic xfer(input pa_t a, input vn_t v, input int nl, input blk_t [N-1:0] d,
                      output blk_t [N-1:0] q);
    @(negedge clk);
    pa = a; vn = v; n = NW'(nl); din = d; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    q = dout;
  endtask

  initial begin
    blk_t [N-1:0] pt, ct, back;
    int t0, accepts;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); cfg_start = 1'b1;
    @(negedge clk); cfg_start = 1'b0;
    while (!cfg_ready) @(negedge clk);

    for (int nl = 1; nl <= int'(N); nl++) begin
      for (int i = 0; i < int'(N); i++) pt[i] = {$urandom, $urandom, $urandom, $urandom};
      xfer(64'h1000 + 64'(nl * 128), 64'(nl + 7), nl, pt, ct);
      for (int i = 0; i < int'(N); i++)
        if (i < nl)
          check($sformatf("n=%0d lane %0d ciphertext", nl, i), ct[i],
                pt[i] ^ ref_block_otp(KEY, SEED, 64'h1000 + 64'(nl * 128), 64'(nl + 7), i));
        else
          check($sformatf("n=%0d lane %0d idle", nl, i), ct[i], '0);
      xfer(64'h1000 + 64'(nl * 128), 64'(nl + 7), nl, ct, back);
      for (int i = 0; i < nl; i++)
        check($sformatf("n=%0d lane %0d decrypt", nl, i), back[i], pt[i]);
    end

    // all-zero plaintext (sparse DNN data): every sub-block must differ
    xfer(64'h4000, 64'h5, N, '0, ct);
    for (int i = 0; i < int'(N); i++)
      for (int j = 0; j < i; j++)
        check($sformatf("zero block lanes %0d/%0d differ", j, i), 128'(ct[i] != ct[j]), 128'(1));
    // a different VN for the same address gives a different pad
    xfer(64'h4000, 64'h6, N, '0, back);
    check("new VN new pad", 128'(back[0] != ct[0]), 128'(1));

    // throughput: keep a request offered and the response always taken
    @(negedge clk);
    rsp_ready = 1'b1; req_valid = 1'b1; n = NW'(N);
    accepts = 0; t0 = 0;
    while (accepts < 5) begin
      @(posedge clk);
      if (req_valid && req_ready) begin
        if (accepts == 0) t0 = cycle;
        accepts++;
      end
    end
    check("5 blocks in 4*11 cycles", 128'(cycle - t0), 128'(44));
    @(negedge clk); req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);

    // back-pressure: hold the response for 20 cycles
    @(negedge clk);
    check("last throughput response taken", 128'(rsp_valid), 128'(0));
    rsp_ready = 1'b0;
    pa = 64'h8000; vn = 64'h9; din = '0; din[0] = 128'h1234;
    req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    ct = dout;
    repeat (20) @(negedge clk);
    check("held response valid", 128'(rsp_valid), 128'(1));
    check("held response unchanged", dout[0], ct[0]);
    check("held response value", dout[0],
          128'h1234 ^ ref_block_otp(KEY, SEED, 64'h8000, 64'h9, 0));
    rsp_ready = 1'b1;
    @(negedge clk);
    check("response taken", 128'(rsp_valid), 128'(0));

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
