// plane_page_buffer: the page buffer of one NAND plane with its latch logic.
//
// Three latches, each one page of SLOTS slots plus their OOB words:
//   SL  sensing latch  - filled by a page read from the array;
//   CL  cache latch    - holds the query after input broadcasting (IBC), or
//                        the data to be programmed (DIN);
//   DL  data latch     - receives SL ^ CL on XOR, i.e. per slot the bitwise
//                        difference of query and database embedding.  The
//                        OOB words of SL move into DL with the data so that
//                        each slot's document/rescoring addresses (or tag)
//                        stay with its distance.
// A small sequencer walks the slots one per cycle: IBC writes the query word
// into every CL slot (SLOTS copies, N = page size / embedding size), XOR
// fills DL, PROG streams CL to the array.  READ hands the row to the array
// and collects its beats into SL.
//
// Read-page-cache pipelining: once XOR has moved a page to DL, the die may
// start the next READ into SL while the controller is still counting and
// transferring slots out of DL.  `busy` covers every sequencer operation;
// `dl_stable` is low only while XOR or IBC rewrite DL/CL, so distance
// generation and TTL readout may proceed during an array read.
//
// Latch names and the XOR between SL and CL follow the design; slot-serial
// sequencing (one slot per cycle) is this implementation's choice.
module plane_page_buffer
  import reis_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // command from die control logic (one-cycle strobe, accepted when !busy,
  // except DIN which is accepted whenever the sequencer is idle)
  input  logic              cmd_valid,
  input  fcmd_e             cmd_op,
  input  logic [ROW_W-1:0]  cmd_row,
  input  logic [SLOT_W-1:0] cmd_slot,
  input  slot_t             cmd_data,
  input  oob_t              cmd_oob,
  output logic              busy,
  output logic              dl_stable,
  // random-access read of one slot for GEN_DIST / RD_TTL / DOUT
  input  logic [SLOT_W-1:0] rd_slot,
  output slot_t             sl_q,
  output oob_t              sl_oob_q,
  output slot_t             dl_q,
  output oob_t              dl_oob_q,
  output slot_t             cl_q,
  // NAND array side
  output logic              arr_rd_req,
  output logic [ROW_W-1:0]  arr_rd_row,
  input  logic              arr_rd_valid,
  input  logic [SLOT_W-1:0] arr_rd_slot,
  input  slot_t             arr_rd_data,
  input  oob_t              arr_rd_oob,
  output logic              arr_wr_req,
  output logic [ROW_W-1:0]  arr_wr_row,
  output logic              arr_wr_valid,
  output logic [SLOT_W-1:0] arr_wr_slot,
  output slot_t             arr_wr_data,
  output oob_t              arr_wr_oob,
  input  logic              arr_busy
);
  slot_t sl [SLOTS];
  slot_t cl [SLOTS];
  slot_t dl [SLOTS];
  oob_t  sl_oob [SLOTS];
  oob_t  cl_oob [SLOTS];
  oob_t  dl_oob [SLOTS];

  typedef enum logic [2:0] {P_IDLE, P_READ, P_XOR, P_IBC, P_PROG, P_PWAIT} pst_e;
  pst_e st;
  logic [SLOT_W:0] i;
  slot_t q_word;
  logic  rd_started;
  logic [ROW_W-1:0] cmd_row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= P_IDLE;
      i          <= '0;
      q_word     <= '0;
      rd_started <= 1'b0;
    end else begin
      case (st)
        P_IDLE: if (cmd_valid) begin
          i <= '0;
          unique case (cmd_op)
            FC_READ:  begin st <= P_READ; rd_started <= 1'b0; end
            FC_XOR:   st <= P_XOR;
            FC_IBC:   begin st <= P_IBC; q_word <= cmd_data; end
            FC_PROG:  st <= P_PROG;
            default:  st <= P_IDLE;   // DIN is written below
          endcase
        end
        P_READ: begin
          if (arr_busy) rd_started <= 1'b1;
          if (rd_started && !arr_busy) st <= P_IDLE;
        end
        P_XOR, P_IBC, P_PROG: begin
          i <= i + 1'b1;
          if (i == SLOTS - 1) st <= (st == P_PROG) ? P_PWAIT : P_IDLE;
        end
        P_PWAIT: if (!arr_busy) st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end

  // latch contents (not reset: every latch is written before it is read)
  always_ff @(posedge clk) begin
    if (arr_rd_valid) begin
      sl[arr_rd_slot]     <= arr_rd_data;
      sl_oob[arr_rd_slot] <= arr_rd_oob;
    end
    if (st == P_IDLE && cmd_valid && cmd_op == FC_DIN) begin
      cl[cmd_slot]     <= cmd_data;
      cl_oob[cmd_slot] <= cmd_oob;
    end
    if (st == P_IBC) begin
      cl[i[SLOT_W-1:0]]     <= q_word;
      cl_oob[i[SLOT_W-1:0]] <= '0;
    end
    if (st == P_XOR) begin
      dl[i[SLOT_W-1:0]]     <= sl[i[SLOT_W-1:0]] ^ cl[i[SLOT_W-1:0]];
      dl_oob[i[SLOT_W-1:0]] <= sl_oob[i[SLOT_W-1:0]];
    end
  end

  assign busy      = (st != P_IDLE);
  assign dl_stable = (st != P_XOR) && (st != P_IBC);

  assign sl_q     = sl[rd_slot];
  assign sl_oob_q = sl_oob[rd_slot];
  assign dl_q     = dl[rd_slot];
  assign dl_oob_q = dl_oob[rd_slot];
  assign cl_q     = cl[rd_slot];

  // array side
  assign arr_rd_req   = (st == P_READ) && !rd_started && !arr_busy;
  assign arr_rd_row   = cmd_row_q;
  assign arr_wr_req   = (st == P_PROG) && (i == 0);
  assign arr_wr_row   = cmd_row_q;
  assign arr_wr_valid = (st == P_PROG);
  assign arr_wr_slot  = i[SLOT_W-1:0];
  assign arr_wr_data  = cl[i[SLOT_W-1:0]];
  assign arr_wr_oob   = cl_oob[i[SLOT_W-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd_row_q <= '0;
    else if (st == P_IDLE && cmd_valid) cmd_row_q <= cmd_row;
  end

  // commands arrive only while the sequencer is idle
  a_no_cmd_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> !busy);
endmodule
