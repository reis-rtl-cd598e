// Self-checking test of one plane's page buffer (SL, CL, DL latches and
// their sequencer) in front of a behavioural NAND array: loads a page into
// CL with DIN and programs it, broadcasts a query into CL (IBC), reads the
// page into SL, runs the in-plane XOR and checks SL, CL, DL and the OOB path
// slot by slot, plus busy and dl_stable during the sequences.
module tb_plane_page_buffer;
  import reis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, busy, dl_stable;
  fcmd_e cmd_op = FC_NOP;
  logic [ROW_W-1:0] cmd_row = '0;
  logic [SLOT_W-1:0] cmd_slot = '0, rd_slot = '0;
  slot_t cmd_data = '0, sl_q, dl_q, cl_q;
  oob_t cmd_oob = '0, sl_oob_q, dl_oob_q;
  logic arr_rd_req, arr_rd_valid, arr_wr_req, arr_wr_valid, arr_busy;
  logic [ROW_W-1:0] arr_rd_row, arr_wr_row;
  logic [SLOT_W-1:0] arr_rd_slot, arr_wr_slot;
  slot_t arr_rd_data, arr_wr_data;
  oob_t arr_rd_oob, arr_wr_oob;
  int checks = 0, failures = 0;

  plane_page_buffer dut (.*);
  nand_array #(.ROWS(4), .T_R(200), .T_PROG(300)) u_arr (
    .clk, .rst_n, .rd_req(arr_rd_req), .rd_row(arr_rd_row), .rd_valid(arr_rd_valid),
    .rd_slot(arr_rd_slot), .rd_data(arr_rd_data), .rd_oob(arr_rd_oob),
    .wr_req(arr_wr_req), .wr_row(arr_wr_row), .wr_valid(arr_wr_valid), .wr_slot(arr_wr_slot),
    .wr_data(arr_wr_data), .wr_oob(arr_wr_oob), .busy(arr_busy));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #300000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
  function automatic slot_t pat(int s);
    slot_t v;
    for (int w = 0; w < EMB_BITS / 32; w++) v[w*32 +: 32] = 32'((s + 1) * 2654435761 + w * 40503);
    return v;
  endfunction

  task automatic issue(fcmd_e op, int row, int slot, slot_t d, oob_t o);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_row = ROW_W'(row); cmd_slot = SLOT_W'(slot); cmd_data = d; cmd_oob = o;
    @(negedge clk);
    cmd_valid = 0;
  endtask
  task automatic wait_idle(output int n);
    n = 0;
    while (busy) begin
      if (!dl_stable) n++;
      @(negedge clk);
    end
  endtask

  initial begin
    slot_t q;
    int ns;
    q = pat(999);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < SLOTS; s++) issue(FC_DIN, 0, s, pat(s), oob_t'(64'h1000 + s));
    rd_slot = 7; #1;
    check(cl_q == pat(7), "DIN wrote the cache latch");
    issue(FC_PROG, 2, 0, '0, '0);
    check(busy, "busy while programming");
    wait_idle(ns);
    issue(FC_IBC, 0, 0, q, '0);
    wait_idle(ns);
    check(ns == SLOTS - 1 || ns == SLOTS, $sformatf("dl_stable low during IBC (%0d cycles)", ns));
    issue(FC_READ, 2, 0, '0, '0);
    wait_idle(ns);
    issue(FC_XOR, 0, 0, '0, '0);
    wait_idle(ns);
    check(ns >= SLOTS - 1, "dl_stable low during XOR");
    for (int s = 0; s < SLOTS; s++) begin
      rd_slot = SLOT_W'(s); #1;
      check(cl_q == q, $sformatf("slot %0d: CL holds the broadcast query", s));
      check(sl_q == pat(s), $sformatf("slot %0d: SL holds the page", s));
      check(sl_oob_q == oob_t'(64'h1000 + s), "SL OOB");
      check(dl_q == (pat(s) ^ q), $sformatf("slot %0d: DL = SL xor CL", s));
      check(dl_oob_q == oob_t'(64'h1000 + s), "DL OOB");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
