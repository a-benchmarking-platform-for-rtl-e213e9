// tb_traffic_generator -- self-checking test of one traffic generator against
// the behavioural AXI4 memory model.
//
// Runs write-then-read batches with data checking in every burst type,
// addressing mode and signaling mode, plus a mixed batch, and checks:
// transaction and beat counts seen by the memory, the memory contents
// against the data pattern computed here, zero check errors on clean data
// and a non-zero count after a word is corrupted, the blocking mode's single
// outstanding transaction, the ready behaviour of each signaling mode, and
// the cycle counts of long bursts (one beat per cycle when aggressive, one
// per two cycles otherwise).
module tb_traffic_generator;
  import tg_pkg::*;

  localparam int LAT = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  tg_cfg_t   cfg;
  logic      start, busy, done;
  tg_stats_t stats;
  axi_req_t  req;
  axi_resp_t resp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  traffic_generator dut (.clk, .rst_n, .cfg, .start, .busy, .done, .stats,
                         .m_axi_req(req), .m_axi_resp(resp));
  axi_mem_model #(.LATENCY(LAT), .WORDS_LOG2(12)) mdl (.clk, .rst_n, .req, .resp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // expected data, computed independently of the design
  function automatic logic [31:0] exp_word(addr_t a, int i, bit p, logic [31:0] s);
    logic [31:0] w, rs;
    w  = a + 32'(4 * i);
    rs = (i == 0) ? s : ((s << i) | (s >> (32 - i)));
    if (p) w ^= rs;
    return w | 32'h1;
  endfunction

  task automatic run(tg_cfg_t c);
    @(negedge clk);
    cfg = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    $display("%0t batch op=%0d rd_cyc=%0d wr_cyc=%0d rd=%0d wr=%0d err=%0d lat=%0d", $time, c.op, stats.rd_cycles, stats.wr_cycles, stats.rd_txn, stats.wr_txn, stats.err_count, stats.rd_lat_sum);
  endtask

  function automatic tg_cfg_t mk(op_e op, addr_mode_e am, burst_e b, sig_e sg,
                                 int beats, int batch, bit pat, logic [31:0] seed);
    tg_cfg_t c;
    c = '0;
    c.op = op; c.addr_mode = am; c.burst = b; c.sig = sg; c.check_en = 1'b1;
    c.pattern = pat; c.len = 8'(beats - 1); c.batch = cnt_t'(batch); c.seed = seed;
    c.base = 32'h0001_0000; c.span_mask = 32'h0003_FFFF;  // 256 KiB = 4096 beats
    return c;
  endfunction

  task automatic wr_rd(string name, addr_mode_e am, burst_e b, sig_e sg,
                       int beats, int batch, bit pat, logic [31:0] seed);
    tg_cfg_t c;
    int aw0, w0, ar0, r0;
    aw0 = mdl.aw_count; w0 = mdl.w_beats; ar0 = mdl.ar_count; r0 = mdl.r_beats;
    c = mk(OP_WRITE, am, b, sg, beats, batch, pat, seed);
    run(c);
    check(mdl.aw_count - aw0 == batch, {name, ": AW bursts"});
    check(mdl.w_beats - w0 == batch * beats, {name, ": W beats"});
    check(stats.wr_txn == cnt_t'(batch), {name, ": wr_txn counter"});
    check(stats.wr_cycles >= cnt_t'(batch), {name, ": wr_cycles"});
    check(stats.err_count == 0, {name, ": write errors"});
    c.op = OP_READ;
    run(c);
    check(mdl.ar_count - ar0 == batch, {name, ": AR bursts"});
    check(mdl.r_beats - r0 == batch * beats, {name, ": R beats"});
    check(stats.rd_txn == cnt_t'(batch), {name, ": rd_txn counter"});
    check(stats.err_count == 0, $sformatf("%s: read check errors %0d", name, stats.err_count));
    check(stats.rd_lat_sum >= cnt_t'(batch * LAT), {name, ": latency sum"});
  endtask

  initial begin
    tg_cfg_t c;
    int nz, bad;
    cfg = '0; start = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    wr_rd("seq incr nb",   ADDR_SEQ, BURST_INCR,  SIG_NONBLOCKING, 4, 16, 1'b0, 32'h0);
    // memory contents of the first burst, against the formula
    bad = 0;
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < AXI_DATA_W / 32; i++)
        if (mdl.mem[((32'h1_0000 >> BEAT_SHIFT) + b) % 4096][i*32 +: 32] !=
            exp_word(32'h1_0000 + 32'(b * BEAT_BYTES), i, 1'b0, 32'h0)) bad++;
    check(bad == 0, "memory holds the address pattern");
    check(mdl.r_wait_seen && mdl.b_wait_seen, "non-blocking: ready follows valid");

    wr_rd("rnd wrap aggr", ADDR_RND, BURST_WRAP,  SIG_AGGRESSIVE,  4, 20, 1'b1, 32'hC0FFEE11);
    mdl.max_rd_out = 0; mdl.max_wr_out = 0;
    wr_rd("rnd incr blk",  ADDR_RND, BURST_INCR,  SIG_BLOCKING,    8, 10, 1'b1, 32'h1234_5678);
    check(mdl.max_rd_out == 1 && mdl.max_wr_out == 1,
          $sformatf("blocking: one burst outstanding (r=%0d w=%0d)", mdl.max_rd_out, mdl.max_wr_out));
    wr_rd("seq fixed nb",  ADDR_SEQ, BURST_FIXED, SIG_NONBLOCKING, 2, 12, 1'b0, 32'h0);
    wr_rd("seq single",    ADDR_SEQ, BURST_INCR,  SIG_NONBLOCKING, 1, 30, 1'b1, 32'hA5A5_0001);

    // blocking: at most one read and one write outstanding
    mdl.max_rd_out = 0; mdl.max_wr_out = 0;
    c = mk(OP_MIXED, ADDR_SEQ, BURST_INCR, SIG_BLOCKING, 4, 10, 1'b0, 32'h0);
    c.check_en = 1'b0;
    run(c);
    check(mdl.max_rd_out <= 1 && mdl.max_wr_out <= 1,
          $sformatf("blocking outstanding r=%0d w=%0d", mdl.max_rd_out, mdl.max_wr_out));
    check(stats.rd_txn == 10 && stats.wr_txn == 10, "mixed blocking counts");

    // non-blocking reaches several outstanding bursts
    mdl.max_rd_out = 0;
    c = mk(OP_READ, ADDR_SEQ, BURST_INCR, SIG_AGGRESSIVE, 1, 16, 1'b0, 32'h0);
    run(c);
    check(mdl.max_rd_out > 1, "pipelined reads outstanding");

    // mixed batch: reads and writes overlap
    c = mk(OP_MIXED, ADDR_SEQ, BURST_INCR, SIG_AGGRESSIVE, 16, 8, 1'b0, 32'h0);
    c.check_en = 1'b0;
    run(c);
    check(stats.rd_txn == 8 && stats.wr_txn == 8, "mixed counts");
    check(stats.rd_cycles > 0 && stats.wr_cycles > 0, "mixed cycle counters");

    // rate: 4 x 128-beat reads, aggressive -> one beat per cycle
    c = mk(OP_READ, ADDR_SEQ, BURST_INCR, SIG_AGGRESSIVE, 128, 4, 1'b0, 32'h0);
    c.check_en = 1'b0;
    run(c);
    check(stats.rd_cycles >= 512 && stats.rd_cycles <= 512 + LAT + 4,
          $sformatf("aggressive read cycles %0d", stats.rd_cycles));
    c.sig = SIG_NONBLOCKING;
    run(c);
    check(stats.rd_cycles >= 1024 && stats.rd_cycles <= 1024 + LAT + 8,
          $sformatf("non-blocking read cycles %0d", stats.rd_cycles));

    // error detection: corrupt one word, read it back
    c = mk(OP_WRITE, ADDR_SEQ, BURST_INCR, SIG_AGGRESSIVE, 4, 4, 1'b0, 32'h0);
    run(c);
    mdl.mem[(32'h1_0000 >> BEAT_SHIFT) % 4096 + 1] = '1;
    c.op = OP_READ;
    run(c);
    check(stats.err_count == 1, $sformatf("corrupted beat detected, err=%0d", stats.err_count));

    // write data is never zero
    nz = 0;
    for (int k = 0; k < 4096; k++) if (mdl.mem[k] != '0 && mdl.mem[k][31:0] == 0) nz++;
    check(nz == 0, "no zero words written");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
