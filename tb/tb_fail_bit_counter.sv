// Self-checking test of fail_bit_counter: random and corner-case slots,
// population count computed independently bit by bit, one-cycle latency.
module tb_fail_bit_counter;
  import reis_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  slot_t bits;
  dist_t count;
  int checks = 0, failures = 0;
  fail_bit_counter dut (.clk, .rst_n, .start, .bits, .done, .count);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic int ref_count(slot_t b);
    int c = 0;
    for (int i = 0; i < EMB_BITS; i++) if (b[i]) c++;
    return c;
  endfunction
  initial begin
    bits = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int exp;
      if (t == 0) bits = '0;
      else if (t == 1) bits = '1;
      else if (t == 2) bits = {{(EMB_BITS-1){1'b0}}, 1'b1};
      else begin
        for (int w = 0; w < EMB_BITS/32; w++) bits[w*32 +: 32] = $urandom;
        if (t % 3 == 0) for (int w = 0; w < EMB_BITS/32; w++) bits[w*32 +: 32] &= $urandom;
      end
      exp = ref_count(bits);
      start = 1;
      @(posedge clk); #1;
      start = 0;
      checks++;
      if (!done || count != dist_t'(exp)) begin
        failures++;
        $display("mismatch t=%0d got %0d exp %0d done=%0b", t, count, exp, done);
      end
      @(posedge clk); #1;
      checks++;
      if (done) begin failures++; $display("done not a pulse"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
