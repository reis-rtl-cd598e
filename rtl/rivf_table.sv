// rivf_table: R-IVF, the record of IVF clusters.
//
// One record per cluster (reis_pkg::rivf_t): the mini-page address of the
// cluster centroid, the indices of the first and last embedding of the
// cluster and its 8-bit tag - 13 bytes of the about 15 bytes per cluster
// the design budgets.  Written once per cluster at deployment, read during
// IVF search after the coarse step has chosen the nearest centroids.
// Synchronous single-port-read memory: the record at rd_idx appears on
// rd_rec one cycle after rd_en.  ENTRIES (8192) is this implementation's
// choice, sized for the square-root-of-N cluster counts usual for IVF on
// the multi-million-entry datasets evaluated.
module rivf_table
  import reis_pkg::*;
#(
  parameter int ENTRIES = 8192
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [15:0] wr_idx,
  input  rivf_t       wr_rec,
  input  logic        rd_en,
  input  logic [15:0] rd_idx,
  output rivf_t       rd_rec
);
  localparam int AW = $clog2(ENTRIES);
  rivf_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx[AW-1:0]] <= wr_rec;
    if (rd_en) rd_rec <= mem[rd_idx[AW-1:0]];
  end
endmodule
