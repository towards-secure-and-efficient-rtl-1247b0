// tb_comb_key_gen: expands a key, builds the combination keys for two seeds
// and checks every lane's mask and key against the reference, that all
// masks and keys within a configuration are distinct and non-zero, and that
// `ready` rises N_LANES cycles after start.
module tb_comb_key_gen;
  import sec_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0, kstart = 1'b0, start = 1'b0;
  blk_t key = '0;
  comb_mask_t seed = '0;
  logic kready, ready;
  rk_array_t rk;
  comb_mask_t [N-1:0] masks;
  blk_t [N-1:0] ckeys;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expand u_ke (.clk, .rst_n, .start(kstart), .key, .ready(kready), .round_keys(rk));
  comb_key_gen #(.N_LANES(N)) dut (.clk, .rst_n, .start, .seed, .round_keys(rk), .ready,
                                   .masks, .comb_keys(ckeys));

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic run(input blk_t k, input comb_mask_t s);
    int cyc;
    @(negedge clk); key = k; kstart = 1'b1;
    @(negedge clk); kstart = 1'b0;
    while (!kready) @(negedge clk);
    seed = s; start = 1'b1;
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!ready) begin @(negedge clk); cyc++; end
    check("ready latency", 128'(cyc), 128'(N + 1));
    for (int i = 0; i < int'(N); i++) begin
      check($sformatf("mask %0d", i), 128'(masks[i]), 128'(ref_mask(s, i)));
      check($sformatf("comb key %0d", i), ckeys[i], ref_comb_key(k, ref_mask(s, i)));
      check($sformatf("mask %0d non-zero", i), 128'(masks[i] != 0), 128'(1));
      for (int j = 0; j < i; j++) begin
        check($sformatf("keys %0d/%0d distinct", j, i), 128'(ckeys[i] != ckeys[j]), 128'(1));
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 10'h2a5);
    run(128'h000102030405060708090a0b0c0d0e0f, 10'h000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
