// tb_aes_key_expand: checks the AES-128 key schedule against the FIPS-197
// worked examples (Appendix A.1 key 2b7e1516..., Appendix C.1 key 00010203...)
// and checks that `ready` rises 11 cycles after `start`.
module tb_aes_key_expand;
  import sec_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  blk_t key = '0;
  logic ready;
  rk_array_t rk;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expand dut (.clk, .rst_n, .start, .key, .ready, .round_keys(rk));

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic expand(input blk_t k, output int cycles);
    @(negedge clk);
    key = k; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!ready) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check("ready low after reset", 128'(ready), 128'(0));
    expand(128'h2b7e151628aed2a6abf7158809cf4f3c, cyc);
    check("ready latency", 128'(cyc), 128'(11));
    check("k0", rk[0], 128'h2b7e151628aed2a6abf7158809cf4f3c);
    check("k1", rk[1], 128'ha0fafe1788542cb123a339392a6c7605);
    check("k2", rk[2], 128'hf2c295f27a96b9435935807a7359f67f);
    check("k10", rk[10], 128'hd014f9a8c9ee2589e13f0cc8b6630ca6);
    expand(128'h000102030405060708090a0b0c0d0e0f, cyc);
    check("ready latency 2", 128'(cyc), 128'(11));
    check("C.1 k10", rk[10], 128'h13111d7fe3944a17f307a78b4d2b30c5);
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
