// tb_aes_core: encrypts the FIPS-197 example blocks (Appendix B and C.1) with
// round keys from aes_key_expand and compares with the published ciphertexts;
// checks the 11-cycle latency and that a new block can start in the cycle
// `done` is high (one block per 11 cycles).
module tb_aes_core;
  import sec_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, kstart = 1'b0, start = 1'b0;
  blk_t key = '0, din = '0, dout;
  logic kready, busy, done;
  rk_array_t rk;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expand u_ke (.clk, .rst_n, .start(kstart), .key, .ready(kready), .round_keys(rk));
  aes_core dut (.clk, .rst_n, .round_keys(rk), .start, .din, .busy, .done, .dout);

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic load_key(input blk_t k);
    @(negedge clk); key = k; kstart = 1'b1;
    @(negedge clk); kstart = 1'b0;
    while (!kready) @(negedge clk);
  endtask

  // Starts one block and returns the number of cycles until done.
  task automatic encrypt(input blk_t pt, output blk_t ct, output int cycles);
    din = pt; start = 1'b1;
    @(negedge clk); start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    ct = dout;
  endtask

  initial begin
    blk_t ct;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_key(128'h2b7e151628aed2a6abf7158809cf4f3c);
    @(negedge clk);
    encrypt(128'h3243f6a8885a308d313198a2e0370734, ct, cyc);
    check("FIPS-197 App. B ciphertext", ct, 128'h3925841d02dc09fbdc118597196a0b32);
    check("latency", 128'(cyc), 128'(11));
    check("busy low with done", 128'(busy), 128'(0));
    // back to back: start again in the cycle done is high
    encrypt(128'h3243f6a8885a308d313198a2e0370734, ct, cyc);
    check("back-to-back ciphertext", ct, 128'h3925841d02dc09fbdc118597196a0b32);
    check("back-to-back interval", 128'(cyc), 128'(11));
    check("output held", dout, 128'h3925841d02dc09fbdc118597196a0b32);
    load_key(128'h000102030405060708090a0b0c0d0e0f);
    encrypt(128'h00112233445566778899aabbccddeeff, ct, cyc);
    check("FIPS-197 C.1 ciphertext", ct, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
