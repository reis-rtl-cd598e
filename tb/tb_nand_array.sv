// Self-checking test of the behavioural NAND plane array: programs two rows
// with known slot data and OOB words, reads them back and checks data, OOB,
// the slot order of the read stream, the read latency tR, the program time
// tPROG (busy length) and that an unprogrammed row reads as erased (all ones).
module tb_nand_array;
  import reis_pkg::*;
  localparam int ROWS = 4, TR = 200, TP = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_req = 0, wr_req = 0, wr_valid = 0, rd_valid, busy;
  logic [ROW_W-1:0] rd_row = '0, wr_row = '0;
  logic [SLOT_W-1:0] rd_slot, wr_slot = '0;
  slot_t rd_data, wr_data = '0;
  oob_t rd_oob, wr_oob = '0;
  int checks = 0, failures = 0;

  nand_array #(.ROWS(ROWS), .T_R(TR), .T_PROG(TP)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic slot_t pat(int r, int s);
    return {(EMB_BITS/32){32'(r * 1000 + s) ^ 32'hC3A5_0F1E}};
  endfunction

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic program_row(int r);
    int t = 0;
    @(negedge clk);
    wr_req = 1; wr_row = ROW_W'(r);
    for (int s = 0; s < SLOTS; s++) begin
      wr_valid = 1; wr_slot = SLOT_W'(s); wr_data = pat(r, s); wr_oob = oob_t'(r * 256 + s);
      @(negedge clk); wr_req = 0;
    end
    wr_valid = 0;
    t = SLOTS;
    while (busy) begin @(negedge clk); t++; end
    check(t == TP, $sformatf("program time %0d, expected %0d", t, TP));
  endtask

  task automatic read_row(int r, bit erased);
    int t = 0, n = 0;
    @(negedge clk);
    rd_req = 1; rd_row = ROW_W'(r);
    @(negedge clk); rd_req = 0; t = 1;
    while (busy || rd_valid) begin
      if (rd_valid) begin
        if (n == 0) check(t == TR - SLOTS + 2, $sformatf("first slot after %0d cycles", t));
        check(int'(rd_slot) == n, "slot order");
        check(rd_data == (erased ? '1 : pat(r, n)), $sformatf("row %0d slot %0d data", r, n));
        check(rd_oob == (erased ? '1 : oob_t'(r * 256 + n)), "oob word");
        n++;
      end
      @(negedge clk); t++;
    end
    check(n == SLOTS, $sformatf("%0d slots read", n));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_row(1);
    program_row(3);
    read_row(1, 0);
    read_row(3, 0);
    read_row(2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
