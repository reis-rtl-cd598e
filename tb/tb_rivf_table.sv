// Self-checking test of the R-IVF table: writes records at scattered
// indices and checks the one-cycle synchronous read of each, including
// overwrites.
module tb_rivf_table;
  import reis_pkg::*;
  localparam int E = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [15:0] wr_idx = '0, rd_idx = '0;
  rivf_t wr_rec = '0, rd_rec;
  int checks = 0, failures = 0;
  rivf_t model [E];

  rivf_table #(.ENTRIES(E)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    rivf_t r;
    int ix;
    for (int k = 0; k < 3 * E; k++) begin
      ix = (k * 37 + 11) % E;
      r.cent = ADDR_W'(k * 7); r.first = ADDR_W'(k * 100); r.last = ADDR_W'(k * 100 + 99); r.tag = 8'(k);
      @(negedge clk); wr_en = 1; wr_idx = 16'(ix); wr_rec = r;
      model[ix] = r;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < E; k++) begin
      ix = (k * 53) % E;
      @(negedge clk); rd_en = 1; rd_idx = 16'(ix);
      @(negedge clk); rd_en = 0;
      check(rd_rec == model[ix], $sformatf("record %0d", ix));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
