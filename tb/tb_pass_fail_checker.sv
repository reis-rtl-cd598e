// Self-checking test of pass_fail_checker: exhaustive over small values,
// random over the full range, including the equality boundary.
module tb_pass_fail_checker;
  import reis_pkg::*;
  dist_t hdist, thr;
  logic pass;
  int checks = 0, failures = 0;
  pass_fail_checker dut (.hdist, .thr, .pass);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(int d, int t);
    hdist = dist_t'(d); thr = dist_t'(t); #1;
    checks++;
    if (pass !== (d < t)) begin failures++; $display("d=%0d t=%0d pass=%0b", d, t, pass); end
  endtask
  initial begin
    for (int d = 0; d < 40; d++) for (int t = 0; t < 40; t++) chk(d, t);
    for (int i = 0; i < 2000; i++) chk($urandom_range(0, 65535), $urandom_range(0, 65535));
    chk(65535, 65535); chk(0, 0); chk(65534, 65535);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
