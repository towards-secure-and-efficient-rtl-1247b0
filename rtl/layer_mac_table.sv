// layer_mac_table: on-chip memory holding one reference layer_mac per layer.
//
// Keeping the aggregated layer MACs on chip is what removes the off-chip MAC
// traffic: when a producer layer writes its output feature map, the XOR of
// its block MACs is stored here under its layer number; when a consumer
// reads that data back, the recomputed value is compared with this entry.
//
// One synchronous write port and one read port with one cycle of latency.
// Each entry has a valid bit, cleared by reset and by `clear`, so that a
// layer that was never written reads back as a miss (`rd_hit` low) and fails
// verification instead of matching stale contents. A read and a write of the
// same address in the same cycle return the old entry.
//
// The paper places layer MACs in on-chip SRAM but gives no size; DEPTH = 256
// layers and the valid bits are this design's choices.
module layer_mac_table
  import sec_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  mac_t                     wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output mac_t                     rd_data,
  output logic                     rd_hit
);

  mac_t             mem [DEPTH];
  logic [DEPTH-1:0] valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      valid  <= '0;
      rd_hit <= 1'b0;
    end else begin
      if (wr_en) valid[wr_addr] <= 1'b1;
      if (rd_en) rd_hit <= valid[rd_addr];
    end
  end

endmodule
