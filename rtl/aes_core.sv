// aes_core: iterative AES-128 encryption datapath, one round per clock.
//
// This is the "parallel" AES organisation (16 S-boxes working on the whole
// state at once, one round per cycle), which the paper picks as the best
// area/throughput compromise and lists at 11 cycles per 128-bit block. The
// round keys come from an aes_key_expand instance; in counter mode the input
// is the counter block (PA || VN) and the output is the one-time pad.
//
// Interface: `start` is accepted when `busy` is low. Edge 0 does the initial
// AddRoundKey with k0, edges 1..10 do rounds 1..10 (round 10 without
// MixColumns). `done` is a one-cycle pulse in the cycle after edge 10, i.e.
// 11 cycles after the start cycle, and `busy` is already low then, so a
// start in that cycle begins the next block: one block per 11 cycles.
// `dout` holds the result until the next start.
module aes_core
  import sec_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  rk_array_t round_keys,
  input  logic      start,
  input  blk_t      din,
  output logic      busy,
  output logic      done,
  output blk_t      dout
);

  blk_t       state;
  logic [3:0] rnd;   // round to execute next, 1..10

  assign dout = state;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= '0;
      rnd   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        state <= din ^ round_keys[0];
        rnd   <= 4'd1;
        busy  <= 1'b1;
      end else if (busy) begin
        state <= aes_round(state, round_keys[rnd], rnd == 4'(NR));
        rnd   <= rnd + 4'd1;
        if (rnd == 4'(NR)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // A start while busy would be dropped: the user must wait for !busy.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));

endmodule
