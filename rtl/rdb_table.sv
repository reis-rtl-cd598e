// rdb_table: R-DB, the record of deployed databases.
//
// Coarse-grained access replaces the page-level mapping of a database by
// one small record: the database's integer index (D_id) and the first and
// last pages of its embedding and document regions.  This table keeps
// ENTRIES such records (reis_pkg::rdb_t, which also holds the bases of the
// centroid/binary/INT8 sub-regions of an IVF database and its first R-IVF
// record).  A write replaces the record with the same D_id, else fills the
// first free entry; `full` reports that no entry is free.  Lookup by D_id is
// a fully associative, combinational match.  Records survive until reset.
// The table lives in the controller's DRAM in the design; here it is a
// register array.  ENTRIES is this implementation's choice.
module rdb_table
  import reis_pkg::*;
#(
  parameter int ENTRIES = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  rdb_t       wr_rec,
  output logic       full,
  input  logic [7:0] lk_did,
  output logic       lk_hit,
  output rdb_t       lk_rec
);
  rdb_t tab [ENTRIES];

  logic signed [31:0] hit_i, free_i;
  always_comb begin
    hit_i  = -1;
    free_i = -1;
    lk_hit = 1'b0;
    lk_rec = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tab[i].valid && tab[i].did == lk_did) begin
        lk_hit = 1'b1;
        lk_rec = tab[i];
      end
      if (tab[i].valid && tab[i].did == wr_rec.did) hit_i = i;
      if (!tab[i].valid) free_i = i;
    end
    full = (free_i < 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
    end else if (wr_en) begin
      if (hit_i >= 0)       tab[hit_i]  <= wr_rec;
      else if (free_i >= 0) tab[free_i] <= wr_rec;
    end
  end
endmodule
