// Self-checking test of the INT8 reranking unit: for random signed INT8
// queries and candidates it streams the 8 beats of a candidate (with idle
// cycles in between) and checks the squared-L2 distance against a
// lane-by-lane software model, and that done is a single pulse.
module tb_rerank_unit;
  import reis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  slot_t q_int8 [INT8_SLOTS];
  logic start = 0, beat_valid = 0, done;
  slot_t beat = '0;
  logic [RDIST_W-1:0] rdist;
  int checks = 0, failures = 0;

  rerank_unit dut (.*);

  int ndone = 0;
  logic [RDIST_W-1:0] got;
  always @(posedge clk) if (done) begin ndone++; got = rdist; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #500000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
  function automatic slot_t rnd(int lim);
    slot_t v;
    for (int l = 0; l < EMB_BITS / 8; l++) v[l*8 +: 8] = 8'($urandom_range(0, 2 * lim) - lim);
    return v;
  endfunction

  initial begin
    slot_t cand [INT8_SLOTS];
    longint exp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int lim;
      lim = (t < 10) ? 3 : 127;
      for (int b = 0; b < INT8_SLOTS; b++) begin q_int8[b] = rnd(lim); cand[b] = rnd(lim); end
      if (t == 0) for (int b = 0; b < INT8_SLOTS; b++) cand[b] = q_int8[b];
      exp = 0;
      for (int b = 0; b < INT8_SLOTS; b++)
        for (int l = 0; l < EMB_BITS / 8; l++) begin
          longint df;
          df = longint'($signed(cand[b][l*8 +: 8])) - longint'($signed(q_int8[b][l*8 +: 8]));
          exp += df * df;
        end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      ndone = 0;
      for (int b = 0; b < INT8_SLOTS; b++) begin
        beat_valid = 1; beat = cand[b];
        @(negedge clk);
        beat_valid = 0;
        repeat (t % 3) @(negedge clk);
      end
      repeat (3) @(negedge clk);
      check(longint'(got) == exp, $sformatf("test %0d: %0d expected %0d", t, got, exp));
      check(ndone == 1, $sformatf("test %0d: done pulses %0d", t, ndone));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
