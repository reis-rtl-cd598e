// Full-size test: reis_top with its default (SSD1) configuration, 8
// channels x 16 dies x 2 planes, tR of 22.5 us at 150 MHz, and the default
// top-k of 10. The host model deploys an IVF database of 4096 entries in 16
// clusters and runs one IVF search with distance filtering, pipelining and
// multi-plane input broadcasting on, checking the top-10 results, their INT8
// distances and documents, and the filtering/IBC/TTL counters.
module tb_reis_full;
  import reis_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, df_en, pl_en, mpibc_en, hcmd_valid, hcmd_ready, hdata_valid, hdata_ready;
  logic hres_valid, hdone, hack, hdoc_valid, hdoc_ready, err;
  dist_t thr; hcmd_t hcmd; slot_t hdata, hdoc; oob_t hoob; hres_t hres;
  logic [31:0] n_queries, n_ttl_replaced, n_dist, n_sent, n_filtered, n_pl_reads, n_ibc_xfers;

  reis_top dut (.*);
  reis_host_model #(.CHANNELS(8), .DIES(16), .PLANES(2), .N(4096), .NLIST(16), .K(10),
                    .NPROBE(3), .RUN_ALL(0), .WATCHDOG(50000000)) host (.*);
endmodule
