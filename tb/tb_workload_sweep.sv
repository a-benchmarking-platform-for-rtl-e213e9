// tb_workload_sweep -- the evaluated pattern grid on one traffic generator:
// sequential and random addressing, burst lengths 1, 2, 4, ... 128, and for
// each a write batch, a checked read batch of the same addresses and a mixed
// batch, all with aggressive signaling. Every run must complete with the
// right transaction counts, no data errors, and a cycle count no lower than
// one beat per cycle allows. Bytes per cycle are printed per point. The
// testbench memory charges a fixed penalty for every change of open row
// (a crude stand-in for precharge plus activate, not DDR4 timing), so the
// sweep must also show the qualitative trend of the measurements: random
// addressing slower than sequential for single-beat transactions, with the
// gap closing at 128-beat bursts.
module tb_workload_sweep;
  import tg_pkg::*;

  localparam int LAT  = 20;
  localparam int MISS = 6;

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
  axi_mem_model #(.LATENCY(LAT), .WORDS_LOG2(12), .ROW_MISS(MISS)) mdl (.clk, .rst_n, .req, .resp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(tg_cfg_t c);
    @(negedge clk);
    cfg = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  function automatic real bpc(int txn, int beats, cnt_t cyc);
    return (cyc == 0) ? 0.0 : real'(txn * beats * BEAT_BYTES) / real'(cyc);
  endfunction

  initial begin
    tg_cfg_t c;
    int batch, bound;
    real w, r, mr, mw;
    real rd_bpc[2][8], wr_bpc[2][8];
    cfg = '0; start = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    $display("mode  len  write B/cyc  read B/cyc  mixed R+W B/cyc");
    for (int am = 0; am < 2; am++) begin
      for (int beats = 1; beats <= 128; beats *= 2) begin
        batch = (beats >= 64) ? 4 : 256 / beats;
        c = '0;
        c.addr_mode = addr_mode_e'(am); c.burst = BURST_INCR; c.sig = SIG_AGGRESSIVE;
        c.len = 8'(beats - 1); c.batch = cnt_t'(batch); c.seed = 32'h9E37_79B9 + 32'(beats);
        c.base = 32'h0; c.span_mask = 32'h0003_FFFF;
        c.op = OP_WRITE; run(c);
        check(stats.wr_txn == cnt_t'(batch) && stats.err_count == 0, "write batch");
        check(stats.wr_cycles >= cnt_t'(batch * beats), "write rate bound");
        w = bpc(batch, beats, stats.wr_cycles);
        c.op = OP_READ; c.check_en = 1'b1; run(c);
        check(stats.rd_txn == cnt_t'(batch), "read batch");
        check(stats.err_count == 0, $sformatf("read check %0d/%0d errors %0d", am, beats, stats.err_count));
        // bound: every burst pays a row miss on the data bus, or MAX_OUT (8)
        // bursts per round trip
        bound = batch * (beats + MISS);
        if (batch * (LAT + MISS + beats + 3) / 8 > bound) bound = batch * (LAT + MISS + beats + 3) / 8;
        check(stats.rd_cycles >= cnt_t'(batch * beats) &&
              stats.rd_cycles <= cnt_t'(bound + LAT + 8),
              $sformatf("read cycles %0d, bound %0d", stats.rd_cycles, bound + LAT + 8));
        r = bpc(batch, beats, stats.rd_cycles);
        rd_bpc[am][$clog2(beats)] = r; wr_bpc[am][$clog2(beats)] = w;
        c.op = OP_MIXED; c.check_en = 1'b0; run(c);
        check(stats.rd_txn == cnt_t'(batch) && stats.wr_txn == cnt_t'(batch), "mixed batch");
        mr = bpc(batch, beats, stats.rd_cycles);
        mw = bpc(batch, beats, stats.wr_cycles);
        $display("%s  %3d  %8.1f  %8.1f  %8.1f + %0.1f", (am != 0) ? "rnd" : "seq", beats, w, r, mr, mw);
      end
    end
    check(rd_bpc[1][0] < rd_bpc[0][0] && wr_bpc[1][0] < wr_bpc[0][0],
          "single transactions: random slower than sequential");
    check(rd_bpc[0][7] / rd_bpc[1][7] < rd_bpc[0][0] / rd_bpc[1][0],
          "read gap narrower at 128 beats than at 1");
    check(wr_bpc[0][7] / wr_bpc[1][7] < wr_bpc[0][0] / wr_bpc[1][0],
          "write gap narrower at 128 beats than at 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
