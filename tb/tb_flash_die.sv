// Self-checking test of a flash die with its REIS commands: programs two
// pages in different planes (DIN + PROG), reads one back with READ/DOUT,
// broadcasts a query to both planes at once (multi-plane IBC), XORs, and
// checks GEN_DIST (Hamming distance and pass/fail against the threshold set
// with SET_THR) and RD_TTL (embedding and OOB) for every slot of both planes.
// Commands addressed to another die must be ignored.
module tb_flash_die;
  import reis_pkg::*;
  localparam int PL = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0;
  fcmd_t cmd = '0;
  fresp_t resp;
  logic [PL-1:0] busy, dl_stable;
  int checks = 0, failures = 0;

  flash_die #(.DIE_ID(3), .PLANES(PL), .ROWS(4), .T_R(200), .T_PROG(300)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
  slot_t q;
  function automatic slot_t ent(int p, int s);
    slot_t v = q;
    for (int t = 0; t < (s * 7 + p * 3) % 200; t++) v[(s * 31 + t * 17 + p) % EMB_BITS] ^= 1'b1;
    return v;
  endfunction
  function automatic int hd(int p, int s);
    return $countones(ent(p, s) ^ q);
  endfunction

  task automatic issue(fcmd_e op, int die, int pl, int row, int slot, slot_t d, oob_t o, int mask);
    @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.die = DIE_W'(die); cmd.plane = PLANE_W'(pl);
    cmd.row = ROW_W'(row); cmd.slot = SLOT_W'(slot); cmd.data = d; cmd.oob = o; cmd.plane_mask = PL_MAX'(mask);
    @(negedge clk);
    cmd_valid = 0;
  endtask
  task automatic wait_idle();
    while (busy != '0) @(negedge clk);
  endtask
  task automatic get_resp(output fresp_t r);
    int n = 0;
    while (!resp.valid && n < 10) begin @(negedge clk); n++; end
    r = resp;
    check(resp.valid, "response arrives");
  endtask

  initial begin
    fresp_t r;
    q = '0;
    for (int w = 0; w < EMB_BITS / 32; w++) q[w*32 +: 32] = 32'(w * 2246822519 + 7);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < PL; p++) begin
      for (int s = 0; s < SLOTS; s++) issue(FC_DIN, 3, p, 0, s, ent(p, s), {32'(p * 1000 + s), 32'(s)}, 0);
      issue(FC_PROG, 3, p, 1, 0, '0, '0, 0);
      wait_idle();
    end
    // a command for another die must not disturb this one
    issue(FC_SET_THR, 2, 0, 0, 0, EMB_BITS'(5), '0, 0);
    issue(FC_SET_THR, 3, 0, 0, 0, EMB_BITS'(100), '0, 0);
    issue(FC_READ, 3, 1, 1, 0, '0, '0, 0);
    wait_idle();
    for (int s = 0; s < SLOTS; s += 9) begin
      issue(FC_DOUT, 3, 1, 1, s, '0, '0, 0);
      get_resp(r);
      check(r.data == ent(1, s), $sformatf("DOUT slot %0d", s));
    end
    issue(FC_IBC, 3, 0, 0, 0, q, '0, 3);       // both planes in one transfer
    wait_idle();
    issue(FC_READ, 3, 0, 1, 0, '0, '0, 0);
    wait_idle();
    for (int p = 0; p < PL; p++) begin
      issue(FC_XOR, 3, p, 0, 0, '0, '0, 0);
      wait_idle();
    end
    for (int p = 0; p < PL; p++)
      for (int s = 0; s < SLOTS; s++) begin
        issue(FC_GEN_DIST, 3, p, 0, s, '0, '0, 0);
        get_resp(r);
        check(int'(r.hdist) == hd(p, s), $sformatf("plane %0d slot %0d: distance %0d expected %0d", p, s, r.hdist, hd(p, s)));
        check(r.pass == (hd(p, s) < 100), "pass/fail against the threshold");
        if (s % 5 == 0) begin
          issue(FC_RD_TTL, 3, p, 0, s, '0, '0, 0);
          get_resp(r);
          check(r.data == ent(p, s), "RD_TTL returns the embedding");
          check(r.oob == {32'(p * 1000 + s), 32'(s)}, "RD_TTL returns the OOB word");
        end
      end
    issue(FC_GEN_DIST, 1, 0, 0, 0, '0, '0, 0);
    repeat (3) begin @(negedge clk); check(!resp.valid, "other die's command ignored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
