// tb_layer_mac_table: writes random MACs to random layers, keeping a shadow
// copy, and reads every layer back: written layers must return their last
// value with the hit flag, unwritten ones must miss; checks the one-cycle
// read latency, read-during-write returning the old value, and that `clear`
// turns every entry into a miss.
module tb_layer_mac_table;
  import sec_pkg::*;

  localparam int unsigned D = 64;
  localparam int unsigned AW = $clog2(D);
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] wa = '0, ra = '0;
  mac_t wd = '0, rd;
  logic hit;
  int checks = 0, failures = 0;
  mac_t shadow [D];
  bit written [D];

  always #5 clk = ~clk;

  layer_mac_table #(.DEPTH(D)) dut (.clk, .rst_n, .clear, .wr_en, .wr_addr(wa), .wr_data(wd),
                                    .rd_en, .rd_addr(ra), .rd_data(rd), .rd_hit(hit));

  task automatic check(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic read_all();
    for (int a = 0; a < int'(D); a++) begin
      @(negedge clk); rd_en = 1'b1; ra = AW'(a);
      @(negedge clk); rd_en = 1'b0;
      check($sformatf("hit %0d", a), 128'(hit), 128'(written[a]));
      if (written[a]) check($sformatf("data %0d", a), 128'(rd), 128'(shadow[a]));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      wr_en = 1'b1; wa = AW'($urandom_range(0, D - 1)); wd = {$urandom, $urandom};
      shadow[wa] = wd; written[wa] = 1'b1;
    end
    @(negedge clk); wr_en = 1'b0;
    read_all();
    // read and write the same written address in one cycle: old value
    for (int a = 0; a < int'(D); a++) if (written[a]) begin
      @(negedge clk);
      wr_en = 1'b1; wa = AW'(a); wd = ~shadow[a]; rd_en = 1'b1; ra = AW'(a);
      @(negedge clk);
      wr_en = 1'b0; rd_en = 1'b0;
      check("read during write gives old value", 128'(rd), 128'(shadow[a]));
      shadow[a] = ~shadow[a];
      break;
    end
    read_all();
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    for (int a = 0; a < int'(D); a++) written[a] = 1'b0;
    read_all();
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
