// Self-checking test of the TTL-E/TTL-C list: random distances are offered
// with capacity m; once full, an entry replaces the current maximum only if
// its distance is smaller. The final contents must be exactly the m smallest
// distances (as a multiset) and the replacement count must match a model.
module tb_ttl_topk;
  import reis_pkg::*;
  localparam int MM = 16, NIN = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, in_ready;
  logic [15:0] m = 16'(MM), count, rd_idx = '0;
  logic [31:0] n_replaced;
  ttl_t in_entry = '0, rd_entry;
  int checks = 0, failures = 0;

  ttl_topk #(.M_MAX(MM)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  int d [NIN];
  int mdl [$];
  int got [$];
  int rep;

  task automatic run(int cap);
    int mx, mi;
    mdl.delete(); rep = 0;
    @(negedge clk); clear = 1; m = 16'(cap);
    @(negedge clk); clear = 0;
    check(count == 0, "cleared");
    for (int k = 0; k < NIN; k++) begin
      d[k] = $urandom_range(0, 1023);
      in_valid = 1; in_entry = '0; in_entry.hdist = dist_t'(d[k]); in_entry.eadr = ADDR_W'(k);
      in_entry.emb = {(EMB_BITS/32){32'(k)}};
      @(negedge clk);
      // model
      if (mdl.size() < cap) mdl.push_back(d[k]);
      else begin
        mx = -1; mi = 0;
        foreach (mdl[j]) if (mdl[j] > mx) begin mx = mdl[j]; mi = j; end
        if (d[k] < mx) begin mdl[mi] = d[k]; rep++; end
      end
    end
    in_valid = 0;
    @(negedge clk);
    check(int'(count) == cap, $sformatf("count %0d, expected %0d", count, cap));
    got.delete();
    for (int j = 0; j < cap; j++) begin
      rd_idx = 16'(j); #1;
      got.push_back(int'(rd_entry.hdist));
      check(rd_entry.emb == {(EMB_BITS/32){rd_entry.eadr}}, "entry fields travel together");
      check(d[int'(rd_entry.eadr)] == int'(rd_entry.hdist), "distance belongs to its entry");
    end
    got.sort(); mdl.sort();
    check(got == mdl, "list holds the m smallest distances");
  endtask

  initial begin
    int r0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(in_ready, "always ready");
    r0 = n_replaced;
    run(MM);
    check(int'(n_replaced - r0) == rep, $sformatf("replacements %0d, model %0d", n_replaced - r0, rep));
    run(5);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
