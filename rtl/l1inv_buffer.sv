// l1inv_buffer: the 1 MB on-controller SRAM holding the level-1 (content-based)
// inverted index. Entry d describes dimension d: how many clusters its level-2
// list has and the beat address, in the L2Inv DIMM, of its first silhouette.
//
// 256K entries of 32 bits, as in the paper. The entry layout (l1_entry_t in
// spanns_pkg) and the single write port used by the host to load the index
// are this design's choices. The paper's LRU page replacement for
// vocabularies larger than the buffer is not included.
//
// Timing: rd_en with rd_dim in cycle t gives rd_valid and rd_entry in t+1.
// A write and a read in the same cycle to the same entry return the old value.
module l1inv_buffer
  import spanns_pkg::*;
#(
  parameter int unsigned ENTRIES = L1_ENTRIES,
  parameter int unsigned AW      = L1_AW
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_dim,
  input  l1_entry_t       wr_entry,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_dim,
  output logic            rd_valid,
  output l1_entry_t       rd_entry
);
  l1_entry_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_dim] <= wr_entry;
    if (rd_en) rd_entry <= mem[rd_dim];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
