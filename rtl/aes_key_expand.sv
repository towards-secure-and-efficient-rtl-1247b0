// aes_key_expand: AES-128 KeyExpansion, the source of the round-key pool.
//
// A pulse on `start` loads `key` as round key k0; the following ten cycles
// derive k1..k10 one per cycle with the FIPS-197 key schedule (RotWord,
// SubWord, round constant, then the chained word XORs). `ready` rises in the
// cycle after k10 is written and stays high until the next `start`; the round
// keys are held in registers and presented together on `round_keys` so that
// the AES round datapath and the combination-key generator can both read them.
//
// Timing: start sampled at edge 0, ready visible 11 cycles after the start
// cycle. The paper names KeyExpansion as the block whose round keys feed both
// the AES engine and the combination-key pool (AES-128: ten round keys); the
// one-key-per-cycle schedule and the reset behaviour (all keys zero, ready low)
// are this design's choices.
module aes_key_expand
  import sec_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  blk_t      key,
  output logic      ready,
  output rk_array_t round_keys
);

  logic [3:0] idx;     // index of the next round key to compute, 1..10
  logic [7:0] rcon;
  logic       busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      round_keys <= '0;
      idx        <= '0;
      rcon       <= 8'h01;
      busy       <= 1'b0;
      ready      <= 1'b0;
    end else if (start) begin
      round_keys    <= '0;
      round_keys[0] <= key;
      idx           <= 4'd1;
      rcon          <= 8'h01;
      busy          <= 1'b1;
      ready         <= 1'b0;
    end else if (busy) begin
      round_keys[idx] <= key_step(round_keys[idx - 4'd1], rcon);
      rcon            <= xtime(rcon);
      idx             <= idx + 4'd1;
      if (idx == 4'(NR)) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end
    end
  end

endmodule
