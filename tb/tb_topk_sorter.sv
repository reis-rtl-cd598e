// Self-checking test of the final top-k sorter: random keys with payloads
// (many duplicates) are inserted; the read-out must be in ascending key order,
// stable for equal keys (insertion order), and equal to a sorted model.
module tb_topk_sorter;
  import reis_pkg::*;
  localparam int N = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic [31:0] in_key = '0, in_pay = '0, rd_key, rd_pay;
  logic [15:0] count, rd_idx = '0;
  int checks = 0, failures = 0;

  topk_sorter #(.N_MAX(N)) dut (.*);

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

  initial begin
    int keys [$];
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      n = (t == 3) ? N : 5 + t * 9;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      check(count == 0, "cleared");
      keys.delete();
      for (int k = 0; k < n; k++) begin
        keys.push_back($urandom_range(0, 15));
        in_valid = 1; in_key = 32'(keys[k]); in_pay = 32'(k);
        @(negedge clk);
        in_valid = 0;
        if (k % 3 == 0) @(negedge clk);
      end
      @(negedge clk);
      check(int'(count) == n, "count");
      for (int j = 0; j < n; j++) begin
        int exp_pay, rk;
        exp_pay = -1; rk = 0;
        rd_idx = 16'(j); #1;
        // the j-th element of a stable sort: smallest key, then lowest index
        for (int key = 0; key < 16 && exp_pay < 0; key++)
          for (int k = 0; k < n; k++) if (keys[k] == key) begin
            if (rk == j) begin exp_pay = k; break; end
            rk++;
          end
        check(int'(rd_pay) == exp_pay && int'(rd_key) == keys[exp_pay],
              $sformatf("position %0d: key %0d pay %0d, expected pay %0d", j, rd_key, rd_pay, exp_pay));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
