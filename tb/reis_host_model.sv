// reis_host_model: host-side driver and checker for the REIS SSD.
//
// Deploys an IVF database through the host API, then runs searches in
// several configurations and checks the returned top-k results and document
// chunks against values worked out here from how the data was generated.
//
// Data set (all derived from the entry index, nothing read from files):
//   N entries in NLIST equal clusters; binary query qb random, INT8 query q8
//   random with lane 0 forced to 0.
//   Centroids of clusters TC0 and TC1 lie 8 and 12 bits from qb, that of
//   cluster TC2 60 bits away; all other centroids are random (about 512).
//   K "planted" entries (j = 0..K-1, half in TC0, half in TC1) lie 20+j
//   bits from qb; their INT8 embedding equals q8 except lane 0 = K-j, so
//   the INT8 distance is (K-j)^2: reranking must reverse the Hamming order.
//   D_NEAR decoys in TC2 and TC0 lie 100..(100+D_NEAR) bits away, enough to
//   overflow the candidate list; three of them lie only 5 bits away but
//   have no INT8 page written (an erased page, every byte -1), so only
//   reranking removes them.  Every other entry is random.
//   Only the INT8 and document pages holding planted or close entries are
//   written; the rest stay erased.
// Expected answer for every search: the K planted entries in order
// j = K-1 .. 0, INT8 distances 1, 4, 9, ..., and their document chunks.
//
// Runs: (A) IVF search with filtering, pipelining and multi-plane IBC on;
// (B) the same with all three off; (C) brute-force search, options on;
// (D) search of an unknown database, which must raise err.  Each mechanism
// is counted and a check fails if it never happened.
module reis_host_model
  import reis_pkg::*;
#(
  parameter int CHANNELS = 2,
  parameter int DIES     = 2,
  parameter int PLANES   = 2,
  parameter int N        = 2048,
  parameter int NLIST    = 16,
  parameter int K        = 4,
  parameter int NPROBE   = 3,
  parameter int D_NEAR   = 60,
  parameter int THR      = 300,
  parameter int WATCHDOG = 20000000,
  parameter bit RUN_ALL  = 1
) (
  input  logic   clk,
  output logic   rst_n,
  output logic   df_en,
  output logic   pl_en,
  output logic   mpibc_en,
  output dist_t  thr,
  output logic   hcmd_valid,
  output hcmd_t  hcmd,
  input  logic   hcmd_ready,
  output logic   hdata_valid,
  output slot_t  hdata,
  output oob_t   hoob,
  input  logic   hdata_ready,
  input  logic   hres_valid,
  input  hres_t  hres,
  input  logic   hdone,
  output logic   hack,
  input  logic   hdoc_valid,
  input  slot_t  hdoc,
  output logic   hdoc_ready,
  input  logic   err,
  input  logic [31:0] n_queries,
  input  logic [31:0] n_ttl_replaced,
  input  logic [31:0] n_dist,
  input  logic [31:0] n_sent,
  input  logic [31:0] n_filtered,
  input  logic [31:0] n_pl_reads,
  input  logic [31:0] n_ibc_xfers
);
  localparam int CSZ = N / NLIST;               // entries per cluster
  localparam int TC0 = 2 % NLIST, TC1 = 9 % NLIST, TC2 = 13 % NLIST;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- data set ---------------------------------------------------------
  slot_t qb;
  slot_t q8 [INT8_SLOTS];

  function automatic slot_t flip(slot_t v, int seed, int h);
    for (int t = 0; t < h; t++) v[(seed * 37 + t * 131) % EMB_BITS] ^= 1'b1;
    return v;
  endfunction
  function automatic slot_t rnd_slot(int seed);
    slot_t v;
    int unsigned x = 32'h9E3779B9 * (seed + 1);
    for (int w = 0; w < EMB_BITS / 32; w++) begin
      x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
      v[w*32 +: 32] = x;
    end
    return v;
  endfunction

  // entry e is planted (returns j) or not (-1)
  function automatic int planted(int e);
    for (int j = 0; j < K; j++) begin
      int c = (j % 2 == 0) ? TC0 : TC1;
      if (e == c * CSZ + 3 + 5 * j) return j;
    end
    return -1;
  endfunction
  // close decoys: index 0..D_NEAR-1, or -1
  function automatic int decoy(int e);
    int c = e / CSZ, o = e % CSZ;
    if (planted(e) >= 0) return -1;
    if (c == TC2 && o < D_NEAR / 2) return o;
    if (c == TC0 && o >= CSZ - (D_NEAR - D_NEAR / 2)) return D_NEAR / 2 + (o - (CSZ - (D_NEAR - D_NEAR / 2)));
    return -1;
  endfunction
  function automatic slot_t bin_emb(int e);
    int j = planted(e), d = decoy(e);
    if (j >= 0) return flip(qb, e, 20 + j);
    if (d >= 0) return flip(qb, e, (d < 3) ? 5 : 100 + d);
    return rnd_slot(e + 1000);
  endfunction
  function automatic slot_t cent(int c);
    if (c == TC0) return flip(qb, 7, 8);
    if (c == TC1) return flip(qb, 11, 12);
    if (c == TC2) return flip(qb, 13, 60);
    return rnd_slot(c + 500000);
  endfunction
  function automatic slot_t int8_beat(int e, int b);
    int j = planted(e);
    slot_t v;
    if (j >= 0) begin
      v = q8[b];
      if (b == 0) v[7:0] = 8'(K - j);
      return v;
    end
    return rnd_slot(e * 8 + b + 900000);
  endfunction
  function automatic slot_t doc_word(int e, int w);
    slot_t v;
    for (int t = 0; t < EMB_BITS / 64; t++) v[t*64 +: 64] = {32'(e), 16'(w), 16'(t) ^ 16'hA5C3};
    return v;
  endfunction

  // ---- host API drivers -------------------------------------------------
  task automatic cmd(hcmd_t c);
    @(posedge clk); #1;
    hcmd = c;
    hcmd_valid = 1'b1;
    // inputs change after a rising edge; sample ready at the falling edge
    do @(negedge clk); while (!hcmd_ready);
    @(posedge clk); #1 hcmd_valid = 1'b0;
  endtask
  task automatic beat(slot_t d, oob_t o);
    hdata = d; hoob = o; hdata_valid = 1'b1;
    do @(negedge clk); while (!hdata_ready);
    @(posedge clk); #1 hdata_valid = 1'b0;
  endtask
  task automatic write_page(logic [7:0] did, logic [1:0] rg, int pg);
    hcmd_t c = '0;
    c.op = H_DB_WRITE; c.did = did; c.region = rg; c.n = ADDR_W'(pg);
    cmd(c);
    for (int s = 0; s < SLOTS; s++) begin
      int x = pg * SLOTS + s;
      unique case (rg)
        RG_CENT: beat(x < NLIST ? cent(x) : '0, oob_t'(x & 8'hFF) ^ 64'h5A);
        RG_BIN:  beat(x < N ? bin_emb(x) : '0, '0);
        RG_INT8: beat(int8_beat(x / INT8_SLOTS, x % INT8_SLOTS), '0);
        default: beat(doc_word(x / DOC_SLOTS, x % DOC_SLOTS), '0);
      endcase
    end
    while (!hcmd_ready) @(negedge clk);
  endtask

  addr_t doc_base_addr;
  int exp_e [K];   // expected entries by rank
  int rank_cnt;
  int got_e [K];
  int got_d [K];
  int doc_ok;

  // one search; returns cycles taken until hdone
  task automatic search(hop_e op, logic [7:0] did, int qid, output int cycles);
    hcmd_t c = '0;
    int t0, nres;
    c.op = op; c.did = did; c.qid = 16'(qid); c.k = 8'(K); c.nprobe = 16'(NPROBE);
    t0 = cyc;
    cmd(c);
    beat(qb, '0);
    for (int b = 0; b < INT8_SLOTS; b++) beat(q8[b], '0);
    nres = 0;
    while (!hdone) begin
      @(negedge clk);
      if (hres_valid) begin
        if (nres < K) begin
          got_e[nres] = int'((hres.dadr - doc_base_addr) / DOC_SLOTS);
          got_d[nres] = int'(hres.rdist);
        end
        check(int'(hres.rank) == nres && int'(hres.qid) == qid, "result rank/qid");
        nres++;
      end
    end
    cycles = cyc - t0;
    check(nres == K, $sformatf("%0d results, expected %0d", nres, K));
    for (int r = 0; r < K; r++) begin
      check(got_e[r] == exp_e[r], $sformatf("rank %0d: entry %0d expected %0d", r, got_e[r], exp_e[r]));
      check(got_d[r] == (r + 1) * (r + 1), $sformatf("rank %0d: INT8 distance %0d expected %0d", r, got_d[r], (r + 1) * (r + 1)));
    end
    // documents
    @(posedge clk); #1 hack = 1'b1;
    @(posedge clk); #1 hack = 1'b0;
    doc_ok = 1;
    for (int r = 0; r < K; r++)
      for (int w = 0; w < DOC_SLOTS; w++) begin
        do @(negedge clk); while (!hdoc_valid);
        if (hdoc != doc_word(exp_e[r], w)) doc_ok = 0;
      end
    check(doc_ok == 1, "document chunks");
    while (!hcmd_ready) @(negedge clk);
  endtask

  initial begin
    int ca, cb, cc;
    int f0, p0, i0, s0, r0, d0;
    hcmd_t c;
    rst_n = 0; df_en = 1; pl_en = 1; mpibc_en = 1; thr = dist_t'(THR);
    hcmd_valid = 0; hcmd = '0; hdata_valid = 0; hdata = '0; hoob = '0; hack = 0; hdoc_ready = 1;
    qb = rnd_slot(77);
    for (int b = 0; b < INT8_SLOTS; b++) q8[b] = rnd_slot(88 + b) & {(EMB_BITS/8){8'h3F}};
    q8[0][7:0] = 8'd0;
    for (int r = 0; r < K; r++)
      for (int e = 0; e < N; e++) if (planted(e) == K - 1 - r) exp_e[r] = e;
    repeat (5) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- deployment ---------------------------------------------------------
    c = '0; c.op = H_IVF_DEPLOY; c.did = 8'd3; c.n = ADDR_W'(N); c.nlist = 16'(NLIST);
    cmd(c);
    for (int cl = 0; cl < NLIST; cl++) begin
      c = '0; c.op = H_IVF_CI; c.did = 8'd3; c.n = ADDR_W'(cl);
      c.ci.first = ADDR_W'(cl * CSZ); c.ci.last = ADDR_W'(cl * CSZ + CSZ - 1);
      c.ci.tag = 8'(cl & 8'hFF) ^ 8'h5A;
      cmd(c);
    end
    for (int p = 0; p < (NLIST + SLOTS - 1) / SLOTS; p++) write_page(8'd3, RG_CENT, p);
    for (int p = 0; p < (N + SLOTS - 1) / SLOTS; p++) write_page(8'd3, RG_BIN, p);
    // INT8 and document pages of the planted entries only
    for (int r = 0; r < K; r++) begin
      write_page(8'd3, RG_INT8, exp_e[r] * INT8_SLOTS / SLOTS);
      write_page(8'd3, RG_DOC,  exp_e[r] * DOC_SLOTS / SLOTS);
    end
    // the document region starts right after the INT8 region
    doc_base_addr = ADDR_W'(((NLIST + SLOTS - 1) / SLOTS + (N + SLOTS - 1) / SLOTS
                    + (N * INT8_SLOTS + SLOTS - 1) / SLOTS) * SLOTS);
    check(!err, "deployment without error");
    $display("deployment done at cycle %0d", cyc);

    // ---- (A) IVF search, all optimisations ------------------------------------
    f0 = n_filtered; p0 = n_pl_reads; i0 = n_ibc_xfers; r0 = n_ttl_replaced; d0 = n_dist;
    search(H_IVF_SEARCH, 8'd3, 11, ca);
    $display("A: IVF search, DF+PL+MPIBC: %0d cycles, filtered %0d, sent %0d, ibc %0d, replaced %0d",
             ca, n_filtered - f0, n_sent, n_ibc_xfers - i0, n_ttl_replaced - r0);
    check(n_filtered > f0, "distance filtering discarded entries");
    check(n_ibc_xfers - i0 == CHANNELS * DIES, "multi-plane IBC: one transfer per die");
    check(n_ttl_replaced > r0, "TTL-E overflow replaced entries");
    check(n_dist - d0 == NLIST + NPROBE * CSZ, "distances computed = centroids + probed clusters");

    if (RUN_ALL) begin
      // ---- (B) same, no optimisation -------------------------------------------
      df_en = 0; pl_en = 0; mpibc_en = 0;
      f0 = n_filtered; i0 = n_ibc_xfers; s0 = n_sent;
      search(H_IVF_SEARCH, 8'd3, 12, cb);
      $display("B: IVF search, no optimisation: %0d cycles, sent %0d, ibc %0d", cb, n_sent - s0, n_ibc_xfers - i0);
      check(n_filtered == f0, "no filtering when disabled");
      check(n_sent - s0 == NLIST + NPROBE * CSZ, "every entry transferred without filtering");
      check(n_ibc_xfers - i0 == CHANNELS * DIES * PLANES, "single-plane IBC: one transfer per plane");
      check(cb > ca, "the optimisations make the search faster");

      // ---- (C) brute-force search ----------------------------------------------
      df_en = 1; pl_en = 1; mpibc_en = 1;
      p0 = n_pl_reads; d0 = n_dist;
      search(H_SEARCH, 8'd3, 13, cc);
      $display("C: brute-force search: %0d cycles, pipelined reads %0d", cc, n_pl_reads - p0);
      check(n_dist - d0 == N, "brute force computes every distance");
      if ((N + SLOTS - 1) / SLOTS > CHANNELS * DIES * PLANES)
        check(n_pl_reads > p0, "pipelined page reads happened");

      // ---- (D) unknown database -----------------------------------------------------
      c = '0; c.op = H_SEARCH; c.did = 8'd99; c.k = 8'(K);
      cmd(c);
      repeat (3) @(posedge clk);
      check(err, "search of an unknown database flags an error");
    end
    check(n_queries >= 1, "queries counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
