// flash_ctrl: flash controller of one channel, the command sequencer that
// drives the REIS search steps on the dies of its channel.
//
// Database pages are spread over the SSD with parallelism-first allocation:
// logical page L lives on channel L % CHANNELS, die (L / CHANNELS) % DIES,
// plane (L / (CHANNELS*DIES)) % PLANES, row L / STRIDE.  A region is
// therefore addressed by its first page alone and the next page is found by
// incrementing (coarse-grained access, no page-level L2P lookup).  Each
// controller serves the pages of its own channel.
//
// Operations (reis_pkg::fop_t, one at a time, op_valid/op_ready):
//   OP_IBC   input broadcasting of the query: one IBC per die carrying a
//            mask of all planes (multi-plane IBC) or one IBC per plane;
//   OP_SCAN  distance scan of embeddings [first, last] of a region.  Pages
//            are handled in rounds of one page per (die, plane): READ every
//            page of the round, then per page XOR, and per slot GEN_DIST;
//            a slot whose distance passes the threshold (or every slot when
//            distance filtering is off) is fetched with RD_TTL and sent out
//            as a TTL entry.  With pipelining on, the READ of the plane's
//            next page is issued right after its XOR, so the array read
//            overlaps distance generation and TTL transfer (read page cache
//            sequential); with it off the next round's reads wait until the
//            whole round is transferred;
//   OP_READ  ordinary read of nslots slots of one page (INT8 embeddings for
//            reranking, document chunks);
//   OP_PROG  programs one page from SLOTS beats on wr_* (DIN then PROG).
// done pulses when an operation ends.
//
// Channel timing: a command occupies the channel CMD_CYC cycles, a 128-byte
// slot EMB_BITS/8/CH_BYTES cycles, a status byte one cycle and a TTL entry
// (embedding, 2-byte DIST, 8-byte DADR+RADR or 1-byte tag) its size divided
// by CH_BYTES.  CH_BYTES = 8 at the assumed 150 MHz clock gives the
// 1.2 GB/s channel of the cost-oriented configuration.  The round-based
// scheduling and all cycle counts are this implementation's choices.
module flash_ctrl
  import reis_pkg::*;
#(
  parameter int CH_ID    = 0,
  parameter int CHANNELS = 8,
  parameter int DIES     = 16,
  parameter int PLANES   = 2,
  parameter int CH_BYTES = 8,
  parameter int CMD_CYC  = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  // operation from the ANNS engine
  input  logic  op_valid,
  input  fop_t  op,
  output logic  op_ready,
  output logic  done,
  // program data
  input  logic  wr_valid,
  input  slot_t wr_data,
  input  oob_t  wr_oob,
  output logic  wr_ready,
  // scan results
  output logic  ttl_valid,
  output ttl_t  ttl,
  input  logic  ttl_ready,
  // read data
  output logic  rd_valid,
  output slot_t rd_data,
  input  logic  rd_ready,
  // channel
  output logic  cmd_valid,
  output fcmd_t cmd,
  input  fresp_t resp,
  input  logic [DIES*PLANES-1:0] busy,
  input  logic [DIES*PLANES-1:0] dl_stable,
  // activity counters (for performance accounting)
  output logic [31:0] n_dist,       // distances generated in the dies
  output logic [31:0] n_sent,       // TTL entries sent over the channel
  output logic [31:0] n_filtered,   // entries discarded in the dies
  output logic [31:0] n_pl_reads,   // reads overlapped with DL readout
  output logic [31:0] n_ibc_xfers   // query transfers for IBC
);
  localparam int M        = DIES * PLANES;
  localparam int STRIDE   = CHANNELS * DIES * PLANES;
  localparam int WORD_CYC = (EMB_BITS / 8 + CH_BYTES - 1) / CH_BYTES;
  localparam int TTLF_CYC = (EMB_BITS / 8 + 2 + 8 + CH_BYTES - 1) / CH_BYTES;
  localparam int TTLC_CYC = (EMB_BITS / 8 + 2 + 1 + CH_BYTES - 1) / CH_BYTES;

  typedef enum logic [4:0] {
    S_IDLE, S_IBC, S_THR, S_RISSUE, S_PROC, S_WAITRD, S_XOR, S_WAITX, S_PLRD,
    S_GEN, S_GENW, S_TTL, S_TTLW, S_PUSH, S_NEXTM,
    S_RD, S_RDW, S_DOUT, S_DOUTW, S_RPUSH,
    S_PG, S_DIN, S_PROG, S_DONE
  } st_e;
  st_e st;

  fop_t  o;              // operation being executed
  logic [31:0] tmr;      // channel occupancy timer
  logic [31:0] r, rl;    // current and last round
  logic [31:0] m;        // member (die, plane) index in the round
  logic [31:0] d_i, p_i; // IBC loop
  logic [SLOT_W:0] s;    // slot
  logic [ADDR_W-1:0] af, al;  // first/last slot address of the scan
  ttl_t  ent;
  slot_t rword;

  // ---- address helpers ------------------------------------------------
  function automatic logic [ADDR_W-1:0] page_of(int unsigned rr, int unsigned mm);
    int unsigned d = mm % DIES, p = mm / DIES;
    return ADDR_W'(rr * STRIDE + p * CHANNELS * DIES + d * CHANNELS + CH_ID);
  endfunction
  function automatic logic member_valid(int unsigned rr, int unsigned mm);
    logic [ADDR_W-1:0] L = page_of(rr, mm);
    return (L >= (af >> SLOT_W)) && (L <= (al >> SLOT_W));
  endfunction

  logic [ADDR_W-1:0] cur_page;
  logic [SLOT_W:0]   s_first, s_last;
  logic [31:0]       cur_d, cur_p, bidx;
  always_comb begin
    cur_page = page_of(r, m);
    cur_d    = m % DIES;
    cur_p    = m / DIES;
    bidx     = cur_d * PLANES + cur_p;
    s_first  = (cur_page == (af >> SLOT_W)) ? {1'b0, af[SLOT_W-1:0]} : '0;
    s_last   = (cur_page == (al >> SLOT_W)) ? {1'b0, al[SLOT_W-1:0]} : (SLOT_W+1)'(SLOTS - 1);
  end

  // READ/PROG target of OP_READ / OP_PROG
  logic [ADDR_W-1:0] L1;
  logic [31:0]       t_d, t_p, t_row, t_bidx;
  always_comb begin
    L1     = ADDR_W'(o.lpage);
    t_d    = (int'(L1) / CHANNELS) % DIES;
    t_p    = (int'(L1) / (CHANNELS * DIES)) % PLANES;
    t_row  = int'(L1) / STRIDE;
    t_bidx = t_d * PLANES + t_p;
  end

  function automatic fcmd_t mk(fcmd_e opc, int unsigned d, int unsigned p, int unsigned row,
                               logic [SLOT_W-1:0] sl);
    fcmd_t c = '0;
    c.op    = opc;
    c.die   = DIE_W'(d);
    c.plane = PLANE_W'(p);
    c.row   = ROW_W'(row);
    c.slot  = sl;
    return c;
  endfunction

  assign op_ready = (st == S_IDLE);
  assign wr_ready = (st == S_DIN) && (tmr == 0) && !busy[t_bidx];
  assign ttl_valid = (st == S_PUSH) && (tmr == 0);
  assign ttl       = ent;
  assign rd_valid  = (st == S_RPUSH) && (tmr == 0);
  assign rd_data   = rword;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; o <= '0; tmr <= 0; r <= 0; rl <= 0; m <= 0; d_i <= 0; p_i <= 0;
      s <= '0; af <= '0; al <= '0; ent <= '0; rword <= '0;
      cmd_valid <= 1'b0; cmd <= '0; done <= 1'b0;
      n_dist <= '0; n_sent <= '0; n_filtered <= '0; n_pl_reads <= '0; n_ibc_xfers <= '0;
    end else begin
      cmd_valid <= 1'b0;
      done      <= 1'b0;
      if (tmr != 0) tmr <= tmr - 1;
      unique case (st)
        S_IDLE: if (op_valid) begin
          o <= op;
          d_i <= 0; p_i <= 0; m <= 0;
          af <= ADDR_W'(op.lpage) * SLOTS + op.first;
          al <= ADDR_W'(op.lpage) * SLOTS + op.last;
          unique case (op.op)
            OP_IBC:  st <= S_IBC;
            OP_SCAN: st <= S_THR;
            OP_READ: st <= S_RD;
            default: st <= S_PG;
          endcase
        end

        // ---- input broadcasting ----------------------------------------
        S_IBC: if (tmr == 0) begin
          if (!busy[d_i*PLANES + p_i] && (!o.mpibc_en || busy[d_i*PLANES +: PLANES] == '0)) begin
            cmd_valid <= 1'b1;
            cmd <= mk(FC_IBC, d_i, p_i, 0, '0);
            cmd.data <= o.data;
            cmd.plane_mask <= o.mpibc_en ? PL_MAX'((1 << PLANES) - 1) : PL_MAX'(1 << p_i);
            tmr <= CMD_CYC + WORD_CYC;
            n_ibc_xfers <= n_ibc_xfers + 1;
            if (o.mpibc_en || p_i == PLANES - 1) begin
              p_i <= 0;
              if (d_i == DIES - 1) st <= S_DONE; else d_i <= d_i + 1;
            end else p_i <= p_i + 1;
          end
        end

        // ---- scan ----------------------------------------------------------
        S_THR: if (tmr == 0) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_SET_THR, d_i, 0, 0, '0);
          cmd.data <= EMB_BITS'(o.thr);
          tmr <= CMD_CYC;
          if (d_i == DIES - 1) begin
            r  <= int'(af >> SLOT_W) / STRIDE;
            rl <= int'(al >> SLOT_W) / STRIDE;
            m  <= 0;
            st <= S_RISSUE;
          end else d_i <= d_i + 1;
        end
        S_RISSUE: if (tmr == 0) begin
          if (!member_valid(r, m)) begin
            if (m == M - 1) begin m <= 0; st <= S_PROC; end else m <= m + 1;
          end else if (!busy[bidx]) begin
            cmd_valid <= 1'b1;
            cmd <= mk(FC_READ, cur_d, cur_p, r, '0);
            tmr <= CMD_CYC;
            if (m == M - 1) begin m <= 0; st <= S_PROC; end else m <= m + 1;
          end
        end
        S_PROC: begin
          if (member_valid(r, m)) st <= S_WAITRD;
          else st <= S_PLRD;
        end
        S_WAITRD: if (tmr == 0 && !busy[bidx]) st <= S_XOR;
        S_XOR: begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_XOR, cur_d, cur_p, r, '0);
          tmr <= CMD_CYC;
          st <= S_WAITX;
        end
        S_WAITX: if (tmr == 0 && !busy[bidx]) st <= S_PLRD;
        S_PLRD: begin
          // read page cache sequential: start the next page of this plane
          if (o.pl_en && r < rl && member_valid(r + 1, m)) begin
            if (tmr == 0 && !busy[bidx]) begin
              cmd_valid <= 1'b1;
              cmd <= mk(FC_READ, cur_d, cur_p, r + 1, '0);
              tmr <= CMD_CYC;
              n_pl_reads <= n_pl_reads + 1;
              s <= s_first;
              st <= member_valid(r, m) ? S_GEN : S_NEXTM;
            end
          end else begin
            s <= s_first;
            st <= member_valid(r, m) ? S_GEN : S_NEXTM;
          end
        end
        S_GEN: if (tmr == 0 && dl_stable[bidx]) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_GEN_DIST, cur_d, cur_p, r, s[SLOT_W-1:0]);
          tmr <= CMD_CYC;
          st <= S_GENW;
        end
        S_GENW: if (resp.valid) begin
          ent       <= '0;
          ent.hdist <= resp.hdist;
          ent.eadr  <= cur_page * SLOTS + ADDR_W'(s);
          n_dist    <= n_dist + 1;
          tmr       <= (tmr > 1) ? tmr : 1;   // status byte on the channel
          if (resp.pass || !o.df_en) st <= S_TTL;
          else begin
            n_filtered <= n_filtered + 1;
            st <= S_NEXTM;
          end
        end
        S_TTL: if (tmr == 0) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_RD_TTL, cur_d, cur_p, r, s[SLOT_W-1:0]);
          tmr <= CMD_CYC;
          st <= S_TTLW;
        end
        S_TTLW: if (resp.valid) begin
          ent.emb <= resp.data;
          if (o.fine) begin
            ent.dadr <= resp.oob[63:32];
            ent.radr <= resp.oob[31:0];
          end else ent.tag <= resp.oob[7:0];
          tmr <= o.fine ? TTLF_CYC : TTLC_CYC;
          st  <= S_PUSH;
        end
        S_PUSH: if (tmr == 0 && ttl_ready) begin
          n_sent <= n_sent + 1;
          st <= S_NEXTM;
        end
        S_NEXTM: begin
          // next slot of this page, else next member, else next round
          if (member_valid(r, m) && s < s_last) begin
            s  <= s + 1'b1;
            st <= S_GEN;
          end else if (m != M - 1) begin
            m  <= m + 1;
            st <= S_PROC;
          end else if (r >= rl) begin
            st <= S_DONE;
          end else begin
            r  <= r + 1;
            m  <= 0;
            st <= o.pl_en ? S_PROC : S_RISSUE;
          end
        end

        // ---- ordinary read ---------------------------------------------------
        S_RD: if (tmr == 0 && !busy[t_bidx]) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_READ, t_d, t_p, t_row, '0);
          tmr <= CMD_CYC;
          s <= {1'b0, o.slot};
          st <= S_RDW;
        end
        S_RDW: if (tmr == 0 && !busy[t_bidx]) st <= S_DOUT;
        S_DOUT: if (tmr == 0) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_DOUT, t_d, t_p, t_row, s[SLOT_W-1:0]);
          tmr <= CMD_CYC;
          st <= S_DOUTW;
        end
        S_DOUTW: if (resp.valid) begin
          rword <= resp.data;
          tmr <= WORD_CYC;
          st <= S_RPUSH;
        end
        S_RPUSH: if (tmr == 0 && rd_ready) begin
          if (s + 1'b1 >= {1'b0, o.slot} + o.nslots) st <= S_DONE;
          else begin
            s  <= s + 1'b1;
            st <= S_DOUT;
          end
        end

        // ---- program ---------------------------------------------------------
        S_PG: begin s <= '0; st <= S_DIN; end
        S_DIN: if (wr_valid && wr_ready) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_DIN, t_d, t_p, t_row, s[SLOT_W-1:0]);
          cmd.data <= wr_data;
          cmd.oob  <= wr_oob;
          tmr <= CMD_CYC + WORD_CYC;
          if (s == SLOTS - 1) st <= S_PROG;
          else s <= s + 1'b1;
        end
        S_PROG: if (tmr == 0) begin
          cmd_valid <= 1'b1;
          cmd <= mk(FC_PROG, t_d, t_p, t_row, '0);
          tmr <= CMD_CYC;
          st <= S_DONE;
        end

        S_DONE: if (tmr == 0) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (CMD_CYC >= 2) else $error("flash_ctrl: CMD_CYC must be at least 2");
endmodule
