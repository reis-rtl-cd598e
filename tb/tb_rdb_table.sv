// Self-checking test of the R-DB table: writes records, looks them up by
// database ID, replaces a record with the same ID, fills the table and checks
// the full flag and that a lookup of an absent ID misses.
module tb_rdb_table;
  import reis_pkg::*;
  localparam int E = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, full, lk_hit;
  rdb_t wr_rec = '0, lk_rec;
  logic [7:0] lk_did = '0;
  int checks = 0, failures = 0;

  rdb_table #(.ENTRIES(E)) dut (.*);

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
  function automatic rdb_t mkrec(int did, int n);
    rdb_t r = '0;
    r.valid = 1; r.did = 8'(did); r.n = ADDR_W'(n); r.emb_first = LPAGE_W'(n * 3);
    r.doc_last = LPAGE_W'(n * 7 + 1); r.rivf_base = 16'(did * 5);
    return r;
  endfunction
  task automatic wr(rdb_t r);
    @(negedge clk); wr_en = 1; wr_rec = r;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic look(int did, bit hit, rdb_t exp);
    @(negedge clk); lk_did = 8'(did); #1;
    check(lk_hit == hit, $sformatf("hit for did %0d", did));
    if (hit) check(lk_rec == exp, $sformatf("record for did %0d", did));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    look(7, 0, '0);
    check(!full, "empty table not full");
    wr(mkrec(7, 100));
    wr(mkrec(9, 200));
    look(7, 1, mkrec(7, 100));
    look(9, 1, mkrec(9, 200));
    look(8, 0, '0);
    wr(mkrec(7, 300));                    // same ID: replaced, not added
    look(7, 1, mkrec(7, 300));
    check(!full, "two records, not full");
    wr(mkrec(1, 10));
    wr(mkrec(2, 20));
    @(negedge clk);
    check(full, "four records fill the table");
    look(1, 1, mkrec(1, 10));
    look(2, 1, mkrec(2, 20));
    look(9, 1, mkrec(9, 200));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
