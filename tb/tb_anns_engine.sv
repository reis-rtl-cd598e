// Test of the ANNS engine in its system context: the engine drives two
// channel controllers with two dies of two planes each, and the host model
// deploys an IVF database of 1024 entries in 8 clusters, runs an IVF search
// with all optimisations, one without, a brute-force search and an erroneous
// request. It checks the top-k entries and INT8 distances, the returned
// document chunks, and the counts of distances, filtered entries, IBC
// transfers and TTL replacements (see reis_host_model).
module tb_anns_engine;
  import reis_pkg::*;
  localparam int CH = 2, DI = 2, PL = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, df_en, pl_en, mpibc_en, hcmd_valid, hcmd_ready, hdata_valid, hdata_ready;
  logic hres_valid, hdone, hack, hdoc_valid, hdoc_ready, err;
  dist_t thr; hcmd_t hcmd; slot_t hdata, hdoc; oob_t hoob; hres_t hres;
  logic [31:0] n_queries, n_ttl_replaced, n_dist, n_sent, n_filtered, n_pl_reads, n_ibc_xfers;

  reis_top #(.CHANNELS(CH), .DIES(DI), .PLANES(PL), .ROWS(64), .T_R(300), .T_PROG(500)) dut (.*);
  reis_host_model #(.CHANNELS(CH), .DIES(DI), .PLANES(PL), .N(1024), .NLIST(8), .K(3),
                    .NPROBE(2), .D_NEAR(40)) host (.*);
endmodule
