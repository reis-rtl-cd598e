// flash_die: one NAND flash die with the REIS in-die search logic.
//
// Contents: PLANES planes (each a nand_array behind a plane_page_buffer),
// the die's peripheral logic - one fail_bit_counter and one
// pass_fail_checker shared by the planes - and the die control logic that
// decodes the channel commands (reis_pkg::fcmd_e):
//   READ/PROG/DIN  start the addressed plane's sequencer;
//   IBC            input broadcasting; the plane-select multiplexer raises
//                  the select of every plane in plane_mask, so with
//                  multi-plane IBC all planes take the query from one
//                  transfer, otherwise the controller sends it per plane;
//   XOR            DL = SL ^ CL in the addressed plane;
//   GEN_DIST       counts the ones of one DL slot (distance) and compares it
//                  with the threshold; the response carries DIST and pass;
//   RD_TTL         returns the TTL entry of one slot: the embedding (rebuilt
//                  as DL ^ CL, CL still holding the query), the last
//                  distance and the slot's OOB word (tag or DADR/RADR);
//   DOUT           returns one SL slot and its OOB word (ordinary read-out);
//   SET_THR        loads the pass/fail reference (filtering threshold).
// A command is taken when `die` equals DIE_ID; a response beat follows one
// cycle later on resp.  The controller must respect busy/dl_stable, which
// the die reports per plane (the die's ready/busy status).
//
// The command list follows the design's extended flash command set; the
// encodings, the single shared counter and the one-cycle response are this
// implementation's choices.
module flash_die
  import reis_pkg::*;
#(
  parameter int DIE_ID = 0,
  parameter int PLANES = 2,
  parameter int ROWS   = 32,
  parameter int T_R    = 3375,
  parameter int T_PROG = 30000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  fcmd_t             cmd,
  output fresp_t            resp,
  output logic [PLANES-1:0] busy,
  output logic [PLANES-1:0] dl_stable
);
  logic mine;
  assign mine = cmd_valid && (cmd.die == DIE_ID[DIE_W-1:0]);

  // plane-select multiplexer
  logic [PLANES-1:0] psel;
  always_comb begin
    psel = '0;
    if (mine) begin
      if (cmd.op == FC_IBC) psel = cmd.plane_mask[PLANES-1:0];
      else if (cmd.op inside {FC_READ, FC_PROG, FC_DIN, FC_XOR})
        psel[cmd.plane[$clog2(PLANES > 1 ? PLANES : 2)-1:0]] = 1'b1;
    end
  end

  slot_t sl_q [PLANES];
  slot_t dl_q [PLANES];
  slot_t cl_q [PLANES];
  oob_t  sl_oob_q [PLANES];
  oob_t  dl_oob_q [PLANES];

  for (genvar p = 0; p < PLANES; p++) begin : g_pl
    logic              a_rd_req, a_rd_valid, a_wr_req, a_wr_valid, a_busy;
    logic [ROW_W-1:0]  a_rd_row, a_wr_row;
    logic [SLOT_W-1:0] a_rd_slot, a_wr_slot;
    slot_t             a_rd_data, a_wr_data;
    oob_t              a_rd_oob, a_wr_oob;

    plane_page_buffer u_pb (
      .clk, .rst_n,
      .cmd_valid (psel[p]),
      .cmd_op    (cmd.op),
      .cmd_row   (cmd.row),
      .cmd_slot  (cmd.slot),
      .cmd_data  (cmd.data),
      .cmd_oob   (cmd.oob),
      .busy      (busy[p]),
      .dl_stable (dl_stable[p]),
      .rd_slot   (cmd.slot),
      .sl_q      (sl_q[p]),
      .sl_oob_q  (sl_oob_q[p]),
      .dl_q      (dl_q[p]),
      .dl_oob_q  (dl_oob_q[p]),
      .cl_q      (cl_q[p]),
      .arr_rd_req   (a_rd_req),
      .arr_rd_row   (a_rd_row),
      .arr_rd_valid (a_rd_valid),
      .arr_rd_slot  (a_rd_slot),
      .arr_rd_data  (a_rd_data),
      .arr_rd_oob   (a_rd_oob),
      .arr_wr_req   (a_wr_req),
      .arr_wr_row   (a_wr_row),
      .arr_wr_valid (a_wr_valid),
      .arr_wr_slot  (a_wr_slot),
      .arr_wr_data  (a_wr_data),
      .arr_wr_oob   (a_wr_oob),
      .arr_busy     (a_busy)
    );

    nand_array #(.ROWS(ROWS), .T_R(T_R), .T_PROG(T_PROG)) u_arr (
      .clk, .rst_n,
      .rd_req   (a_rd_req),
      .rd_row   (a_rd_row),
      .rd_valid (a_rd_valid),
      .rd_slot  (a_rd_slot),
      .rd_data  (a_rd_data),
      .rd_oob   (a_rd_oob),
      .wr_req   (a_wr_req),
      .wr_row   (a_wr_row),
      .wr_valid (a_wr_valid),
      .wr_slot  (a_wr_slot),
      .wr_data  (a_wr_data),
      .wr_oob   (a_wr_oob),
      .busy     (a_busy)
    );
  end

  // peripheral logic: fail-bit counter and pass/fail checker
  logic  cnt_start, cnt_done, pass;
  dist_t cnt_val, thr;
  slot_t sel_dl, sel_cl, sel_sl;
  oob_t  sel_dl_oob, sel_sl_oob;
  logic signed [31:0]    pidx;

  always_comb begin
    pidx       = int'(cmd.plane) % PLANES;
    sel_dl     = dl_q[pidx];
    sel_cl     = cl_q[pidx];
    sel_sl     = sl_q[pidx];
    sel_dl_oob = dl_oob_q[pidx];
    sel_sl_oob = sl_oob_q[pidx];
  end

  assign cnt_start = mine && (cmd.op == FC_GEN_DIST);

  fail_bit_counter u_fbc (
    .clk, .rst_n, .start(cnt_start), .bits(sel_dl), .done(cnt_done), .count(cnt_val)
  );

  pass_fail_checker u_pfc (.hdist(cnt_val), .thr, .pass);

  // response register
  typedef enum logic [1:0] {R_NONE, R_TTL, R_DOUT} rk_e;
  rk_e   rk;
  slot_t r_data;
  oob_t  r_oob;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr    <= '0;
      rk     <= R_NONE;
      r_data <= '0;
      r_oob  <= '0;
    end else begin
      rk <= R_NONE;
      if (mine) begin
        unique case (cmd.op)
          FC_SET_THR: thr <= cmd.data[DIST_W-1:0];
          FC_RD_TTL: begin
            rk     <= R_TTL;
            r_data <= sel_dl ^ sel_cl;
            r_oob  <= sel_dl_oob;
          end
          FC_DOUT: begin
            rk     <= R_DOUT;
            r_data <= sel_sl;
            r_oob  <= sel_sl_oob;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    // every field is zero unless valid: the channel ORs the dies' responses
    resp = '0;
    if (cnt_done) begin
      resp.valid = 1'b1;
      resp.hdist = cnt_val;
      resp.pass  = pass;
    end
    if (rk != R_NONE) begin
      resp.valid = 1'b1;
      resp.data  = r_data;
      resp.oob   = r_oob;
    end
  end

  // GEN_DIST / RD_TTL read the data latch: it must not be changing
  a_dl_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mine && cmd.op inside {FC_GEN_DIST, FC_RD_TTL}) |-> dl_stable[pidx]);
endmodule
