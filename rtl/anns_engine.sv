// anns_engine: the controller side of REIS - host API, database records and
// the in-storage ANNS execution flow.
//
// Host API (vendor NVMe opcodes, reis_pkg::hop_e) on hcmd/hdata:
//   DB_DEPLOY(did, n)         reserve contiguous regions for an n-entry
//   IVF_DEPLOY(did, n, nlist) database (centroids, binary and INT8
//                             embeddings, 4 KB document chunks) with a bump
//                             allocator over logical pages and record them in
//                             R-DB (and reserve nlist R-IVF records);
//   DB_WRITE(did, region, n)  one page of content: SLOTS beats on hdata.
//                             For binary-embedding pages the engine writes
//                             the embedding-document linkage itself: slot e
//                             gets OOB = {DADR, RADR} of entry e; centroid
//                             pages take the tag from the beat's OOB;
//   IVF_CI(did, n, ci)        R-IVF record of cluster n;
//   SEARCH(did, qid, k)       brute-force search over all embeddings;
//   IVF_SEARCH(did, qid, k, nprobe)  IVF search probing nprobe clusters
//                             (the host's recall target R expressed as the
//                             number of clusters to probe).
// A search takes 1 + INT8_SLOTS beats: the binary query, then the INT8 query.
//
// Search flow (steps of the design's execution flow):
//   1 IBC      OP_IBC to every channel: query copied into all cache latches;
//   2-5 coarse (IVF only) scan of the centroid region; the TTL-C keeps the
//              nprobe nearest centroids; each is mapped to its R-IVF record
//              (index = centroid offset in the region, tag checked);
//   2-6 fine   scan of every chosen cluster's embedding range (or of the
//              whole database); the TTL-E keeps the 10k nearest (DIST, EMB,
//              RADR, DADR), with distance filtering in the dies if enabled;
//   7 rerank   per TTL-E entry: read its INT8 embedding at RADR, squared L2
//              against the INT8 query;
//   8 sort     reranked candidates into distance order, keep k;
//   9 return   k results (rank, INT8 distance, DADR) on hres, then `hdone`;
//              after the host's `hack` the k document chunks (DOC_SLOTS
//              beats each) stream out on hdoc.
// Mode inputs: df_en (distance filtering), pl_en (pipelining), mpibc_en
// (multi-plane IBC) and thr, so the unoptimised configuration can be run.
// TTL entries from the channels are merged by a round-robin arbiter.
//
// The flow, the record contents and the API follow the design; the beat
// formats, the allocator, error handling (`err` stays set until reset) and
// doing selection/rerank/sort in hardware instead of on an embedded core are
// this implementation's choices.
//
// f_wr_data is the host data word wired straight to every channel's write
// bus (only f_wr_valid selects the channel), so those 1024 output bits are
// a direct copy of hdata by design: a slot is written to flash unchanged.
module anns_engine
  import reis_pkg::*;
#(
  parameter int CHANNELS     = 8,
  parameter int DIES         = 16,
  parameter int PLANES       = 2,
  parameter int ROWS         = 32,
  parameter int K_MAX        = 10,
  parameter int CAND         = 10,     // candidates kept = CAND * k
  parameter int NPROBE_MAX   = 64,
  parameter int RDB_ENTRIES  = 16,
  parameter int RIVF_ENTRIES = 8192
) (
  input  logic   clk,
  input  logic   rst_n,
  // configuration
  input  logic   df_en,
  input  logic   pl_en,
  input  logic   mpibc_en,
  input  dist_t  thr,
  // host
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
  // flash controllers
  output logic   f_op_valid [CHANNELS],
  output fop_t   f_op,
  input  logic   f_op_ready [CHANNELS],
  input  logic   f_done     [CHANNELS],
  output logic   f_wr_valid [CHANNELS],
  output slot_t  f_wr_data,
  output oob_t   f_wr_oob,
  input  logic   f_wr_ready [CHANNELS],
  input  logic   f_ttl_valid [CHANNELS],
  input  ttl_t   f_ttl       [CHANNELS],
  output logic   f_ttl_ready [CHANNELS],
  input  logic   f_rd_valid  [CHANNELS],
  input  slot_t  f_rd_data   [CHANNELS],
  output logic   f_rd_ready  [CHANNELS]
);
  localparam int M_MAX    = CAND * K_MAX;
  localparam int CAPACITY = CHANNELS * DIES * PLANES * ROWS;   // pages
  localparam int CW       = $clog2(CHANNELS > 1 ? CHANNELS : 2);

  typedef enum logic [4:0] {
    E_IDLE, E_WR_LK, E_WR, E_WR_WAIT, E_Q, E_IBC, E_IBCW,
    E_CSCAN, E_CSCANW, E_CSEL, E_CSEL2, E_FSCAN, E_FSCANW,
    E_RR, E_RRW, E_RRN, E_RES, E_ACK, E_DOC, E_DOCW
  } est_e;
  est_e st;

  hcmd_t c;                         // command being executed
  rdb_t  db;                        // its database record
  slot_t qb;                        // binary query
  slot_t q8 [INT8_SLOTS];           // INT8 query
  logic [LPAGE_W-1:0] next_page;    // allocator
  logic [15:0]        next_rivf;
  logic [15:0]        i, n_cl, cl;  // loop indices
  logic [ADDR_W-1:0]  cl_first [NPROBE_MAX];
  logic [ADDR_W-1:0]  cl_last  [NPROBE_MAX];
  logic [CHANNELS-1:0] pend;        // channels still busy with an operation
  logic [CW-1:0]      tch;          // target channel of READ/PROG
  logic [SLOT_W:0]    beat;
  logic               sent;

  // ---- R-DB -------------------------------------------------------------
  logic rdb_wr, rdb_full, lk_hit;
  rdb_t rdb_new, lk_rec;
  rdb_table #(.ENTRIES(RDB_ENTRIES)) u_rdb (
    .clk, .rst_n, .wr_en(rdb_wr), .wr_rec(rdb_new), .full(rdb_full),
    .lk_did(hcmd_valid && st == E_IDLE ? hcmd.did : c.did), .lk_hit, .lk_rec);

  // ---- R-IVF ------------------------------------------------------------
  logic        rivf_wr, rivf_rd;
  logic [15:0] rivf_widx, rivf_ridx;
  rivf_t       rivf_wrec, rivf_q;
  rivf_table #(.ENTRIES(RIVF_ENTRIES)) u_rivf (
    .clk, .wr_en(rivf_wr), .wr_idx(rivf_widx), .wr_rec(rivf_wrec),
    .rd_en(rivf_rd), .rd_idx(rivf_ridx), .rd_rec(rivf_q));

  // ---- TTL (coarse and fine) ----------------------------------------------
  logic        ttl_clear, ttl_in_valid, ttl_in_ready;
  logic [15:0] ttl_m, ttl_count;
  ttl_t        ttl_in, ttl_rd;
  ttl_topk #(.M_MAX(M_MAX > NPROBE_MAX ? M_MAX : NPROBE_MAX)) u_ttl (
    .clk, .rst_n, .clear(ttl_clear), .m(ttl_m), .in_valid(ttl_in_valid),
    .in_entry(ttl_in), .in_ready(ttl_in_ready), .count(ttl_count),
    .n_replaced(n_ttl_replaced), .rd_idx(i), .rd_entry(ttl_rd));

  // round-robin merge of the channels' TTL streams
  logic [CW-1:0] rr_ptr;
  logic signed [31:0]            gnt;
  always_comb begin
    gnt = -1;
    for (int k = CHANNELS - 1; k >= 0; k--) begin
      logic [31:0] cidx;
      cidx = (int'(rr_ptr) + k) % CHANNELS;
      if (f_ttl_valid[cidx]) gnt = cidx;
    end
    for (int k = 0; k < CHANNELS; k++) f_ttl_ready[k] = ttl_in_ready && (gnt == k);
    ttl_in_valid = (gnt >= 0);
    ttl_in       = (gnt >= 0) ? f_ttl[gnt] : '0;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_ptr <= '0;
    else if (gnt >= 0) rr_ptr <= CW'((gnt + 1) % CHANNELS);
  end

  // ---- rerank and sort ------------------------------------------------------
  logic               rr_start, rr_beat_valid, rr_done;
  logic [RDIST_W-1:0] rr_dist;
  rerank_unit u_rr (
    .clk, .rst_n, .q_int8(q8), .start(rr_start), .beat_valid(rr_beat_valid),
    .beat(f_rd_data[tch]), .done(rr_done), .rdist(rr_dist));

  logic               so_clear;
  logic [15:0]        so_count;
  logic [RDIST_W-1:0] so_key;
  addr_t              so_pay, cur_dadr;
  topk_sorter #(.N_MAX(M_MAX)) u_sort (
    .clk, .rst_n, .clear(so_clear), .in_valid(rr_done), .in_key(rr_dist),
    .in_pay(cur_dadr), .count(so_count), .rd_idx(i), .rd_key(so_key), .rd_pay(so_pay));

  // ---- helpers ------------------------------------------------------------------
  function automatic logic [LPAGE_W-1:0] cdiv(logic [ADDR_W-1:0] n, int unsigned per);
    return LPAGE_W'((n + ADDR_W'(per) - 1) / ADDR_W'(per));
  endfunction

  // R-DB record of a database being deployed: region sizes in pages
  rdb_t               nr;
  logic [LPAGE_W-1:0] pc, pb, p8, pd;
  always_comb begin
    pc = (hcmd.op == H_IVF_DEPLOY) ? cdiv(ADDR_W'(hcmd.nlist), SLOTS) : '0;
    pb = cdiv(hcmd.n, SLOTS);
    p8 = cdiv(hcmd.n * INT8_SLOTS, SLOTS);
    pd = cdiv(hcmd.n * DOC_SLOTS, SLOTS);
    nr = '0;
    nr.valid     = 1'b1;
    nr.ivf       = (hcmd.op == H_IVF_DEPLOY);
    nr.did       = hcmd.did;
    nr.n         = hcmd.n;
    nr.nlist     = hcmd.nlist;
    nr.emb_first = next_page;
    nr.bin_base  = next_page + pc;
    nr.int8_base = next_page + pc + pb;
    nr.emb_last  = next_page + pc + pb + p8 - 1'b1;
    nr.doc_first = next_page + pc + pb + p8;
    nr.doc_last  = next_page + pc + pb + p8 + pd - 1'b1;
    nr.rivf_base = next_rivf;
  end

  logic [LPAGE_W-1:0] wr_page;
  always_comb begin
    unique case (c.region)
      RG_CENT: wr_page = db.emb_first + LPAGE_W'(c.n);
      RG_BIN:  wr_page = db.bin_base  + LPAGE_W'(c.n);
      RG_INT8: wr_page = db.int8_base + LPAGE_W'(c.n);
      default: wr_page = db.doc_first + LPAGE_W'(c.n);
    endcase
  end

  // linkage written into the OOB word of binary-embedding slots
  logic [ADDR_W-1:0] e_idx;
  oob_t              link_oob;
  always_comb begin
    e_idx    = c.n * SLOTS + ADDR_W'(beat);
    link_oob = {ADDR_W'(db.doc_first) * SLOTS + e_idx * DOC_SLOTS,
                ADDR_W'(db.int8_base) * SLOTS + e_idx * INT8_SLOTS};
  end

  fop_t op_base;
  always_comb begin
    op_base          = '0;
    op_base.df_en    = df_en;
    op_base.pl_en    = pl_en;
    op_base.mpibc_en = mpibc_en;
    op_base.thr      = thr;
  end

  assign hcmd_ready  = (st == E_IDLE);
  assign hdata_ready = (st == E_Q) || (st == E_WR && f_wr_ready[tch]);
  assign f_wr_data   = hdata;
  assign f_wr_oob    = (c.region == RG_BIN) ? link_oob : (c.region == RG_CENT ? hoob : '0);
  always_comb for (int k = 0; k < CHANNELS; k++) begin
    f_wr_valid[k] = (st == E_WR) && hdata_valid && (tch == CW'(k));
    f_rd_ready[k] = (tch == CW'(k)) && ((st == E_RRW) || (st == E_DOCW && hdoc_ready));
  end
  assign rr_beat_valid = (st == E_RRW) && f_rd_valid[tch];
  assign hdoc_valid    = (st == E_DOCW) && f_rd_valid[tch];
  assign hdoc          = f_rd_data[tch];

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int k = 0; k < CHANNELS; k++) if (pend[k] && !f_done[k]) all_done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; c <= '0; db <= '0; qb <= '0;
      for (int k = 0; k < INT8_SLOTS; k++) q8[k] <= '0;
      next_page <= '0; next_rivf <= '0; i <= '0; n_cl <= '0; cl <= '0;
      pend <= '0; tch <= '0; beat <= '0; sent <= 1'b0;
      err <= 1'b0; n_queries <= '0;
      rdb_wr <= 1'b0; rdb_new <= '0; rivf_wr <= 1'b0; rivf_widx <= '0; rivf_wrec <= '0;
      rivf_rd <= 1'b0; rivf_ridx <= '0; ttl_clear <= 1'b0; ttl_m <= '0;
      rr_start <= 1'b0; so_clear <= 1'b0; cur_dadr <= '0;
      hres_valid <= 1'b0; hres <= '0; hdone <= 1'b0;
      for (int k = 0; k < CHANNELS; k++) f_op_valid[k] <= 1'b0;
      f_op <= '0;
      for (int k = 0; k < NPROBE_MAX; k++) begin cl_first[k] <= '0; cl_last[k] <= '0; end
    end else begin
      rdb_wr <= 1'b0; rivf_wr <= 1'b0; rivf_rd <= 1'b0; ttl_clear <= 1'b0;
      rr_start <= 1'b0; so_clear <= 1'b0; hres_valid <= 1'b0; hdone <= 1'b0;
      for (int k = 0; k < CHANNELS; k++) begin
        if (f_op_valid[k] && f_op_ready[k]) f_op_valid[k] <= 1'b0;
        if (f_done[k]) pend[k] <= 1'b0;
      end

      unique case (st)
        E_IDLE: if (hcmd_valid) begin
          c  <= hcmd;
          db <= lk_rec;
          beat <= '0;
          i <= '0;
          unique case (hcmd.op)
            H_DB_DEPLOY, H_IVF_DEPLOY: begin
              if ((int'(next_page) + int'(pc + pb + p8 + pd) > CAPACITY) ||
                  (rdb_full && !lk_hit) ||
                  (nr.ivf && int'(next_rivf) + int'(hcmd.nlist) > RIVF_ENTRIES))
                err <= 1'b1;
              else begin
                rdb_new   <= nr;
                rdb_wr    <= 1'b1;
                next_page <= nr.doc_last + 1'b1;
                if (nr.ivf) next_rivf <= next_rivf + hcmd.nlist;
              end
            end
            H_IVF_CI: begin
              if (!lk_hit) err <= 1'b1;
              else begin
                rivf_wr        <= 1'b1;
                rivf_widx      <= lk_rec.rivf_base + 16'(hcmd.n);
                rivf_wrec      <= hcmd.ci;
                rivf_wrec.cent <= ADDR_W'(lk_rec.emb_first) * SLOTS + hcmd.n;
              end
            end
            H_DB_WRITE: if (!lk_hit) err <= 1'b1; else st <= E_WR_LK;
            H_SEARCH, H_IVF_SEARCH: begin
              if (!lk_hit || (hcmd.op == H_IVF_SEARCH && !lk_rec.ivf)) err <= 1'b1;
              else begin
                st <= E_Q;
                n_queries <= n_queries + 1;
              end
            end
            default: err <= 1'b1;
          endcase
        end

        // ---- page write (deployment) ----------------------------------------
        E_WR_LK: begin
          tch <= CW'(int'(wr_page) % CHANNELS);
          f_op_valid[int'(wr_page) % CHANNELS] <= 1'b1;
          f_op        <= op_base;
          f_op.op     <= OP_PROG;
          f_op.lpage  <= wr_page;
          pend[int'(wr_page) % CHANNELS] <= 1'b1;
          st <= E_WR;
        end
        E_WR: if (hdata_valid && hdata_ready) begin
          if (int'(beat) == SLOTS - 1) st <= E_WR_WAIT;
          beat <= beat + 1'b1;
        end
        E_WR_WAIT: if (all_done) st <= E_IDLE;

        // ---- search ----------------------------------------------------------------
        E_Q: if (hdata_valid) begin
          if (beat == 0) qb <= hdata;
          else q8[int'(beat) - 1] <= hdata;
          if (int'(beat) == INT8_SLOTS) st <= E_IBC;
          beat <= beat + 1'b1;
        end
        E_IBC: begin
          f_op      <= op_base;
          f_op.op   <= OP_IBC;
          f_op.data <= qb;
          for (int k = 0; k < CHANNELS; k++) begin f_op_valid[k] <= 1'b1; pend[k] <= 1'b1; end
          st <= E_IBCW;
        end
        E_IBCW: if (all_done && pend == '0) begin
          if (c.op == H_IVF_SEARCH) st <= E_CSCAN;
          else begin
            n_cl <= 16'd1;
            cl_first[0] <= '0;
            cl_last[0]  <= db.n - 1'b1;
            cl <= '0;
            ttl_clear <= 1'b1;
            ttl_m <= 16'(CAND) * 16'(c.k);
            st <= E_FSCAN;
          end
        end
        E_CSCAN: begin
          ttl_clear <= 1'b1;
          ttl_m <= (int'(c.nprobe) > NPROBE_MAX) ? 16'(NPROBE_MAX) : c.nprobe;
          f_op       <= op_base;
          f_op.op    <= OP_SCAN;
          f_op.lpage <= db.emb_first;
          f_op.first <= '0;
          f_op.last  <= ADDR_W'(db.nlist) - 1'b1;
          f_op.fine  <= 1'b0;
          f_op.df_en <= 1'b0;        // every centroid competes for the TTL-C
          for (int k = 0; k < CHANNELS; k++) begin f_op_valid[k] <= 1'b1; pend[k] <= 1'b1; end
          st <= E_CSCANW;
        end
        E_CSCANW: if (all_done && pend == '0) begin
          i <= '0; n_cl <= '0; st <= E_CSEL;
        end
        E_CSEL: begin
          if (i >= ttl_count) begin
            cl <= '0;
            ttl_clear <= 1'b1;
            ttl_m <= 16'(CAND) * 16'(c.k);
            st <= E_FSCAN;
          end else begin
            rivf_rd   <= 1'b1;
            rivf_ridx <= db.rivf_base + 16'(ttl_rd.eadr - ADDR_W'(db.emb_first) * SLOTS);
            st <= E_CSEL2;
          end
        end
        E_CSEL2: if (!rivf_rd) begin
          if (rivf_q.tag != ttl_rd.tag || rivf_q.cent != ttl_rd.eadr) err <= 1'b1;
          cl_first[n_cl] <= rivf_q.first;
          cl_last[n_cl]  <= rivf_q.last;
          n_cl <= n_cl + 1'b1;
          i <= i + 1'b1;
          st <= E_CSEL;
        end
        E_FSCAN: begin
          if (cl >= n_cl) begin
            i <= '0; so_clear <= 1'b1; st <= E_RR;
          end else begin
            f_op       <= op_base;
            f_op.op    <= OP_SCAN;
            f_op.lpage <= db.bin_base;
            f_op.first <= cl_first[cl];
            f_op.last  <= cl_last[cl];
            f_op.fine  <= 1'b1;
            for (int k = 0; k < CHANNELS; k++) begin f_op_valid[k] <= 1'b1; pend[k] <= 1'b1; end
            st <= E_FSCANW;
          end
        end
        E_FSCANW: if (all_done && pend == '0) begin
          cl <= cl + 1'b1; st <= E_FSCAN;
        end
        E_RR: begin
          if (i >= ttl_count) begin i <= '0; sent <= 1'b0; st <= E_RES; end
          else begin
            tch         <= CW'(int'(ttl_rd.radr >> SLOT_W) % CHANNELS);
            f_op        <= op_base;
            f_op.op     <= OP_READ;
            f_op.lpage  <= LPAGE_W'(ttl_rd.radr >> SLOT_W);
            f_op.slot   <= ttl_rd.radr[SLOT_W-1:0];
            f_op.nslots <= (SLOT_W+1)'(INT8_SLOTS);
            f_op_valid[int'(ttl_rd.radr >> SLOT_W) % CHANNELS] <= 1'b1;
            pend[int'(ttl_rd.radr >> SLOT_W) % CHANNELS] <= 1'b1;
            cur_dadr <= ttl_rd.dadr;
            rr_start <= 1'b1;
            st <= E_RRW;
          end
        end
        E_RRW: if (rr_done) st <= E_RRN;
        E_RRN: if (all_done && pend == '0) begin i <= i + 1'b1; st <= E_RR; end
        E_RES: begin
          if (i >= 16'(c.k) || i >= so_count) begin
            hdone <= 1'b1; st <= E_ACK;
          end else begin
            hres_valid <= 1'b1;
            hres.qid   <= c.qid;
            hres.rank  <= 8'(i);
            hres.rdist <= so_key;
            hres.dadr  <= so_pay;
            i <= i + 1'b1;
          end
        end
        E_ACK: if (hack) begin i <= '0; st <= E_DOC; end
        E_DOC: begin
          if (i >= 16'(c.k) || i >= so_count) st <= E_IDLE;
          else begin
            tch         <= CW'(int'(so_pay >> SLOT_W) % CHANNELS);
            f_op        <= op_base;
            f_op.op     <= OP_READ;
            f_op.lpage  <= LPAGE_W'(so_pay >> SLOT_W);
            f_op.slot   <= so_pay[SLOT_W-1:0];
            f_op.nslots <= (SLOT_W+1)'(DOC_SLOTS);
            f_op_valid[int'(so_pay >> SLOT_W) % CHANNELS] <= 1'b1;
            pend[int'(so_pay >> SLOT_W) % CHANNELS] <= 1'b1;
            st <= E_DOCW;
          end
        end
        E_DOCW: if (all_done && pend == '0) begin i <= i + 1'b1; st <= E_DOC; end
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
