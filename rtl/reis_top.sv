// reis_top: the REIS retrieval SSD - ANNS engine, one flash controller per
// channel and DIES flash dies on each channel.
//
// The host issues the REIS API commands and data on hcmd/hdata and gets the
// top-k results on hres, `hdone`, and after `hack` the document chunks on
// hdoc (see anns_engine).  The PCIe/NVMe front end, the SSD DRAM chip and
// the embedded cores are not part of this RTL: the API arrives here already
// decoded, and the structures the design keeps in DRAM (R-DB, R-IVF, TTL)
// are on-chip arrays inside the engine.
//
// Each channel is a broadcast command bus from its flash_ctrl to its dies;
// the addressed die answers on its response beat, which are ORed (an
// unaddressed die drives zero).  Default parameters are the cost-oriented
// configuration: 8 channels, 16 dies per channel, 2 planes per die,
// 1.2 GB/s per channel (8 bytes per cycle at an assumed 150 MHz) and
// tR = 22.5 us for SLC reads.  The performance-oriented configuration is
// CHANNELS=16, DIES=8, PLANES=4, CH_BYTES=13 (2.0 GB/s at 150 MHz).
// ROWS (pages per plane) is scaled far down from a real plane.
// The activity counters summed over the channels are brought out for
// performance accounting.
module reis_top
  import reis_pkg::*;
#(
  parameter int CHANNELS = 8,
  parameter int DIES     = 16,
  parameter int PLANES   = 2,
  parameter int ROWS     = 32,
  parameter int T_R      = 3375,
  parameter int T_PROG   = 30000,
  parameter int CH_BYTES = 8,
  parameter int CMD_CYC  = 2,
  parameter int K_MAX    = 10
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   df_en,
  input  logic   pl_en,
  input  logic   mpibc_en,
  input  dist_t  thr,
  input  logic   hcmd_valid,
  input  hcmd_t  hcmd,
  output logic   hcmd_ready,
  input  logic   hdata_valid,
  input  slot_t  hdata,
  input  oob_t   hoob,
  output logic   hdata_ready,
  output logic   hres_valid,
  output hres_t  hres,
  output logic   hdone,
  input  logic   hack,
  output logic   hdoc_valid,
  output slot_t  hdoc,
  input  logic   hdoc_ready,
  output logic   err,
  output logic [31:0] n_queries,
  output logic [31:0] n_ttl_replaced,
  output logic [31:0] n_dist,
  output logic [31:0] n_sent,
  output logic [31:0] n_filtered,
  output logic [31:0] n_pl_reads,
  output logic [31:0] n_ibc_xfers
);
  logic  f_op_valid [CHANNELS];
  fop_t  f_op;
  logic  f_op_ready [CHANNELS];
  logic  f_done     [CHANNELS];
  logic  f_wr_valid [CHANNELS];
  slot_t f_wr_data;
  oob_t  f_wr_oob;
  logic  f_wr_ready [CHANNELS];
  logic  f_ttl_valid [CHANNELS];
  ttl_t  f_ttl       [CHANNELS];
  logic  f_ttl_ready [CHANNELS];
  logic  f_rd_valid  [CHANNELS];
  slot_t f_rd_data   [CHANNELS];
  logic  f_rd_ready  [CHANNELS];
  logic [31:0] c_dist [CHANNELS], c_sent [CHANNELS], c_filt [CHANNELS],
               c_plrd [CHANNELS], c_ibc [CHANNELS];

  anns_engine #(
    .CHANNELS(CHANNELS), .DIES(DIES), .PLANES(PLANES), .ROWS(ROWS), .K_MAX(K_MAX)
  ) u_engine (
    .clk, .rst_n, .df_en, .pl_en, .mpibc_en, .thr,
    .hcmd_valid, .hcmd, .hcmd_ready, .hdata_valid, .hdata, .hoob, .hdata_ready,
    .hres_valid, .hres, .hdone, .hack, .hdoc_valid, .hdoc, .hdoc_ready,
    .err, .n_queries, .n_ttl_replaced,
    .f_op_valid, .f_op, .f_op_ready, .f_done, .f_wr_valid, .f_wr_data, .f_wr_oob,
    .f_wr_ready, .f_ttl_valid, .f_ttl, .f_ttl_ready, .f_rd_valid, .f_rd_data, .f_rd_ready
  );

  for (genvar ch = 0; ch < CHANNELS; ch++) begin : g_ch
    logic                   cmd_valid;
    fcmd_t                  cmd;
    fresp_t                 resp;
    fresp_t                 dresp [DIES];
    logic [DIES*PLANES-1:0] busy, dl_stable;

    flash_ctrl #(
      .CH_ID(ch), .CHANNELS(CHANNELS), .DIES(DIES), .PLANES(PLANES),
      .CH_BYTES(CH_BYTES), .CMD_CYC(CMD_CYC)
    ) u_fc (
      .clk, .rst_n,
      .op_valid(f_op_valid[ch]), .op(f_op), .op_ready(f_op_ready[ch]), .done(f_done[ch]),
      .wr_valid(f_wr_valid[ch]), .wr_data(f_wr_data), .wr_oob(f_wr_oob), .wr_ready(f_wr_ready[ch]),
      .ttl_valid(f_ttl_valid[ch]), .ttl(f_ttl[ch]), .ttl_ready(f_ttl_ready[ch]),
      .rd_valid(f_rd_valid[ch]), .rd_data(f_rd_data[ch]), .rd_ready(f_rd_ready[ch]),
      .cmd_valid, .cmd, .resp, .busy, .dl_stable,
      .n_dist(c_dist[ch]), .n_sent(c_sent[ch]), .n_filtered(c_filt[ch]),
      .n_pl_reads(c_plrd[ch]), .n_ibc_xfers(c_ibc[ch])
    );

    for (genvar d = 0; d < DIES; d++) begin : g_die
      flash_die #(
        .DIE_ID(d), .PLANES(PLANES), .ROWS(ROWS), .T_R(T_R), .T_PROG(T_PROG)
      ) u_die (
        .clk, .rst_n, .cmd_valid, .cmd, .resp(dresp[d]),
        .busy(busy[d*PLANES +: PLANES]), .dl_stable(dl_stable[d*PLANES +: PLANES])
      );
    end

    always_comb begin
      resp = '0;
      for (int d = 0; d < DIES; d++) resp = resp | dresp[d];
    end
  end

  always_comb begin
    n_dist = '0; n_sent = '0; n_filtered = '0; n_pl_reads = '0; n_ibc_xfers = '0;
    for (int ch = 0; ch < CHANNELS; ch++) begin
      n_dist      = n_dist      + c_dist[ch];
      n_sent      = n_sent      + c_sent[ch];
      n_filtered  = n_filtered  + c_filt[ch];
      n_pl_reads  = n_pl_reads  + c_plrd[ch];
      n_ibc_xfers = n_ibc_xfers + c_ibc[ch];
    end
  end
endmodule
