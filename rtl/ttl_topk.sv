// ttl_topk: Temporal Top List with top-M selection.
//
// During a scan the TTL collects the entries (DIST, EMB and EADR/TAG or
// RADR/DADR) that the dies send and keeps only the M closest to the query:
// M = number of probed clusters for the coarse search (TTL-C) and 10k for
// the fine search (TTL-E).  The design runs a quickselect kernel on an
// embedded core after every page; this block gives the same result - the M
// smallest distances, unordered - as streaming hardware: while fewer than M
// entries are held an entry is appended; afterwards it replaces the current
// maximum when its distance is strictly smaller (ties keep the older entry).
// The maximum is found by a combinational scan over the held distances, so
// one entry is accepted every cycle: in_ready is a constant 1, kept as a
// port so that a slower list (e.g. a multi-cycle selection) can stall the
// channel controllers without changing them.
// `clear` empties the list and loads the capacity `m` (1..M_MAX).  Entries
// are read back by index 0..count-1 through rd_idx/rd_entry (combinational).
module ttl_topk
  import reis_pkg::*;
#(
  parameter int M_MAX = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [15:0] m,
  input  logic        in_valid,
  input  ttl_t        in_entry,
  output logic        in_ready,
  output logic [15:0] count,
  output logic [31:0] n_replaced,
  input  logic [15:0] rd_idx,
  output ttl_t        rd_entry
);
  localparam int IW = $clog2(M_MAX);
  dist_t       d   [M_MAX];
  ttl_t        ent [M_MAX];
  logic [15:0] cap;

  dist_t maxd;
  logic signed [31:0]    maxi;
  always_comb begin
    maxd = '0;
    maxi = 0;
    for (int i = 0; i < M_MAX; i++) begin
      if (i < int'(count) && d[i] >= maxd) begin
        maxd = d[i];
        maxi = i;
      end
    end
  end

  assign in_ready = 1'b1;

  logic full;
  assign full = (count >= cap);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count      <= '0;
      cap        <= 16'(M_MAX);
      n_replaced <= '0;
      for (int i = 0; i < M_MAX; i++) d[i] <= '1;
    end else if (clear) begin
      count <= '0;
      cap   <= (m == 0) ? 16'd1 : ((int'(m) > M_MAX) ? 16'(M_MAX) : m);
    end else if (in_valid) begin
      if (!full) begin
        d[count[IW-1:0]] <= in_entry.hdist;
        count            <= count + 1'b1;
      end else if (in_entry.hdist < maxd) begin
        d[maxi]    <= in_entry.hdist;
        n_replaced <= n_replaced + 1;
      end
    end
  end

  // entry payload (the DRAM-resident part of the list)
  always_ff @(posedge clk) begin
    if (!clear && in_valid) begin
      if (!full) ent[count[IW-1:0]] <= in_entry;
      else if (in_entry.hdist < maxd) ent[maxi] <= in_entry;
    end
  end

  assign rd_entry = ent[rd_idx[IW-1:0]];
endmodule
