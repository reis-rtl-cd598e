// End-to-end test of reis_top at a reduced size (2 channels x 2 dies x 2
// planes, short tR/tPROG): deployment, IVF search with and without the
// optimisations, brute-force search and an error case (see
// reis_host_model for the data set and the expected results).
module tb_reis_top;
  import reis_pkg::*;
  localparam int CH = 2, DI = 2, PL = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, df_en, pl_en, mpibc_en, hcmd_valid, hcmd_ready, hdata_valid, hdata_ready;
  logic hres_valid, hdone, hack, hdoc_valid, hdoc_ready, err;
  dist_t thr; hcmd_t hcmd; slot_t hdata, hdoc; oob_t hoob; hres_t hres;
  logic [31:0] n_queries, n_ttl_replaced, n_dist, n_sent, n_filtered, n_pl_reads, n_ibc_xfers;

  reis_top #(.CHANNELS(CH), .DIES(DI), .PLANES(PL), .ROWS(128), .T_R(400), .T_PROG(600)) dut (.*);
  reis_host_model #(.CHANNELS(CH), .DIES(DI), .PLANES(PL), .N(2048), .NLIST(16), .K(4)) host (.*);
endmodule
