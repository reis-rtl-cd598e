// Self-checking test of one channel's flash controller driving two dies of
// two planes: programs eight pages (stripe over dies and planes, two rounds),
// broadcasts a query (single- and multi-plane IBC), then scans all 1024
// embeddings with distance filtering and read-page-cache pipelining and
// checks that exactly the entries under the threshold come back with their
// distance, embedding and OOB linkage. It repeats the scan with filtering
// off (every entry sent), checks an ordinary slot read, the tR wait before
// the first read word, and that the pipelined scan is faster.
module tb_flash_ctrl;
  import reis_pkg::*;
  localparam int DI = 2, PL = 2, NPG = 8, TR = 400, TP = 500, THR = 480;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid = 0, op_ready, done, wr_valid = 0, wr_ready, ttl_valid, ttl_ready = 1;
  logic rd_valid, rd_ready = 1, cmd_valid;
  fop_t op = '0;
  slot_t wr_data = '0, rd_data;
  oob_t wr_oob = '0;
  ttl_t ttl;
  fcmd_t cmd;
  fresp_t resp, dresp [DI];
  logic [DI*PL-1:0] busy, dl_stable;
  logic [31:0] n_dist, n_sent, n_filtered, n_pl_reads, n_ibc_xfers;
  int checks = 0, failures = 0;

  flash_ctrl #(.CH_ID(0), .CHANNELS(1), .DIES(DI), .PLANES(PL)) dut (.*);
  for (genvar d = 0; d < DI; d++) begin : g_die
    flash_die #(.DIE_ID(d), .PLANES(PL), .ROWS(4), .T_R(TR), .T_PROG(TP)) u_die (
      .clk, .rst_n, .cmd_valid, .cmd, .resp(dresp[d]),
      .busy(busy[d*PL +: PL]), .dl_stable(dl_stable[d*PL +: PL]));
  end
  assign resp = dresp[0] | dresp[1];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  slot_t q;
  function automatic slot_t ent(int e);
    slot_t v = q;
    for (int t = 0; t < (e * 13) % 1000; t++) v[(e * 29 + t * 7) % EMB_BITS] ^= 1'b1;
    return v;
  endfunction
  function automatic int hd(int e);
    return $countones(ent(e) ^ q);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;
  int seen [NPG*SLOTS];
  int nttl = 0;
  always @(posedge clk) if (ttl_valid && ttl_ready) begin
    int e;
    e = int'(ttl.eadr);
    nttl++;
    if (e < NPG * SLOTS) begin
      seen[e]++;
      if (int'(ttl.hdist) != hd(e) || ttl.emb != ent(e) || ttl.radr != ADDR_W'(e * 8) || ttl.dadr != ADDR_W'(e * 32 + 5)) begin
        failures++; $display("FAIL: TTL entry %0d fields", e);
      end
    end else begin failures++; $display("FAIL: bad eadr %0d", e); end
  end

  task automatic run_op(fop_t o);
    @(negedge clk);
    op = o; op_valid = 1;
    while (!op_ready) @(negedge clk);
    @(negedge clk); op_valid = 0;
  endtask
  task automatic wait_done();
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic scan(bit df, bit pl, output int cycles);
    fop_t o = '0;
    int t0;
    foreach (seen[e]) seen[e] = 0;
    nttl = 0;
    o.op = OP_SCAN; o.lpage = '0; o.first = 0; o.last = NPG * SLOTS - 1; o.fine = 1;
    o.df_en = df; o.pl_en = pl; o.thr = dist_t'(THR);
    t0 = cyc;
    run_op(o);
    wait_done();
    cycles = cyc - t0;
    for (int e = 0; e < NPG * SLOTS; e++)
      check(seen[e] == ((!df || hd(e) < THR) ? 1 : 0), $sformatf("entry %0d (distance %0d) sent %0d times", e, hd(e), seen[e]));
  endtask

  initial begin
    fop_t o;
    int d0, f0, p0, s0, ca, cb, t0, tfirst;
    q = '0;
    for (int w = 0; w < EMB_BITS / 32; w++) q[w*32 +: 32] = 32'(w * 747796405 + 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program pages
    for (int pg = 0; pg < NPG; pg++) begin
      o = '0; o.op = OP_PROG; o.lpage = LPAGE_W'(pg);
      run_op(o);
      for (int s = 0; s < SLOTS; s++) begin
        int e;
        e = pg * SLOTS + s;
        wr_valid = 1; wr_data = ent(e); wr_oob = {32'(e * 32 + 5), 32'(e * 8)};
        do @(negedge clk); while (!wr_ready);
        @(posedge clk); #1;
      end
      wr_valid = 0;
      wait_done();
    end
    // single-plane IBC: one transfer per plane
    o = '0; o.op = OP_IBC; o.data = q; o.mpibc_en = 0;
    s0 = n_ibc_xfers;
    run_op(o); wait_done();
    check(n_ibc_xfers - s0 == DI * PL, "single-plane IBC transfers");
    o.mpibc_en = 1;
    s0 = n_ibc_xfers;
    run_op(o); wait_done();
    check(n_ibc_xfers - s0 == DI, "multi-plane IBC: one transfer per die");
    // scans
    d0 = n_dist; f0 = n_filtered; p0 = n_pl_reads; s0 = n_sent;
    scan(1, 1, ca);
    check(n_dist - d0 == NPG * SLOTS, "every embedding gets a distance");
    check(n_filtered - f0 + n_sent - s0 == NPG * SLOTS, "each entry is either sent or filtered");
    check(n_filtered > f0, "some entries filtered");
    check(n_pl_reads > p0, "pipelined reads used");
    scan(0, 0, cb);
    check(cb > ca, $sformatf("pipelined+filtered scan (%0d) faster than plain (%0d)", ca, cb));
    // ordinary read of 8 slots
    o = '0; o.op = OP_READ; o.lpage = LPAGE_W'(5); o.slot = SLOT_W'(40); o.nslots = 8;
    t0 = cyc; tfirst = -1;
    run_op(o);
    for (int k = 0; k < 8; k++) begin
      do @(negedge clk); while (!rd_valid);
      if (k == 0) tfirst = cyc - t0;
      check(rd_data == ent(5 * SLOTS + 40 + k), $sformatf("read word %0d", k));
      @(posedge clk);
    end
    wait_done();
    check(tfirst >= TR, $sformatf("first read word after %0d cycles (tR %0d)", tfirst, TR));
    $display("scan with DF+PL %0d cycles, plain %0d cycles", ca, cb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
