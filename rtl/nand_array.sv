// nand_array: behavioural model of the NAND cell array of one flash plane.
//
// This is a behavioural model, not synthesizable flash: the real part is an
// analog array of floating-gate/charge-trap cells with sense amplifiers.  It
// stands in for the SLC (Enhanced SLC programming) and TLC partitions alike
// and is error-free, which is what Enhanced SLC programming provides for the
// embeddings; TLC data would go through the controller's ECC, not modelled.
//
// A page is SLOTS slots of user data plus one OOB word per slot.  A read
// request for `rd_row` occupies the array for T_R cycles and delivers the
// page to the page buffer as SLOTS beats, one per cycle, in the last SLOTS
// cycles of tR.  A program takes SLOTS beats from the page buffer (one per
// cycle, wr_valid) followed by the remainder of T_PROG.  Erased pages read
// as all ones, as NAND does.  `busy` is high while an operation is active.
//
// ROWS, the pages per plane, is far below a real plane (a 512 Gb die in SLC
// mode holds about a million 16 KB pages per plane); see the README.
module nand_array
  import reis_pkg::*;
#(
  parameter int ROWS   = 32,
  parameter int T_R    = 3375,    // 22.5 us at the assumed 150 MHz clock
  parameter int T_PROG = 30000    // 200 us, assumed
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_req,
  input  logic [ROW_W-1:0] rd_row,
  output logic             rd_valid,
  output logic [SLOT_W-1:0] rd_slot,
  output slot_t            rd_data,
  output oob_t             rd_oob,
  input  logic             wr_req,     // start of a program
  input  logic [ROW_W-1:0] wr_row,
  input  logic             wr_valid,   // data beats, slot order
  input  logic [SLOT_W-1:0] wr_slot,
  input  slot_t            wr_data,
  input  oob_t             wr_oob,
  output logic             busy
);
  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1;

  slot_t mem     [ROWS*SLOTS];
  oob_t  mem_oob [ROWS*SLOTS];

  logic  programmed [ROWS];   // a page never programmed reads as erased

  typedef enum logic [1:0] {A_IDLE, A_READ, A_PROG} ast_e;
  ast_e st;
  logic [31:0] cnt;
  logic [RW-1:0] row_q;

  function automatic int unsigned idx(logic [RW-1:0] r, int unsigned s);
    return int'(r) * SLOTS + s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= A_IDLE;
      cnt      <= 0;
      row_q    <= '0;
      rd_valid <= 1'b0;
      rd_slot  <= '0;
      rd_data  <= '0;
      rd_oob   <= '0;
      for (int r = 0; r < ROWS; r++) programmed[r] <= 1'b0;
    end else begin
      rd_valid <= 1'b0;
      case (st)
        A_IDLE: begin
          if (rd_req) begin
            st    <= A_READ;
            cnt   <= 0;
            row_q <= RW'(rd_row);
          end else if (wr_req) begin
            st    <= A_PROG;
            cnt   <= 1;
            row_q <= RW'(wr_row);
            if (wr_valid) begin
              mem[idx(RW'(wr_row), wr_slot)]     <= wr_data;
              mem_oob[idx(RW'(wr_row), wr_slot)] <= wr_oob;
              programmed[RW'(wr_row)]            <= 1'b1;
            end
          end
        end
        A_READ: begin
          cnt <= cnt + 1;
          if (cnt >= T_R - SLOTS && cnt < T_R) begin
            rd_valid <= 1'b1;
            rd_slot  <= SLOT_W'(cnt - (T_R - SLOTS));
            rd_data  <= programmed[row_q] ? mem[idx(row_q, cnt - (T_R - SLOTS))] : '1;
            rd_oob   <= programmed[row_q] ? mem_oob[idx(row_q, cnt - (T_R - SLOTS))] : '1;
          end
          if (cnt == T_R - 1) st <= A_IDLE;
        end
        A_PROG: begin
          cnt <= cnt + 1;
          if (wr_valid) begin
            mem[idx(row_q, wr_slot)]     <= wr_data;
            mem_oob[idx(row_q, wr_slot)] <= wr_oob;
            programmed[row_q]            <= 1'b1;
          end
          if (cnt == T_PROG - 1) st <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  assign busy = (st != A_IDLE);

  initial begin
    assert (T_R > SLOTS && T_PROG > SLOTS)
      else $error("nand_array: T_R and T_PROG must exceed the slots per page");
  end
endmodule
