// tb_tg_perf_counters -- drives random event streams into tg_perf_counters
// and compares every counter with a reference count kept here; also checks
// clear and saturation.
module tb_tg_perf_counters;
  import tg_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, rd_busy, wr_busy, rd_done, wr_done, lat_valid, err;
  cnt_t lat_cycles;
  tg_stats_t stats;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tg_perf_counters dut (.clk, .rst_n, .clear, .rd_busy, .wr_busy, .rd_done,
                        .wr_done, .lat_valid, .lat_cycles, .err, .stats);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    longint e_rc, e_wc, e_rt, e_wt, e_lat, e_err;
    {clear, rd_busy, wr_busy, rd_done, wr_done, lat_valid, err} = '0;
    lat_cycles = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      check(stats == '0, "clear");
      e_rc = 0; e_wc = 0; e_rt = 0; e_wt = 0; e_lat = 0; e_err = 0;
      for (int k = 0; k < 500; k++) begin
        rd_busy = $urandom_range(0, 3) != 0; wr_busy = 1'($urandom_range(0, 1));
        rd_done = 1'($urandom_range(0, 1));     wr_done = $urandom_range(0, 2) == 0;
        lat_valid = 1'($urandom_range(0, 1));   lat_cycles = $urandom_range(0, 300);
        err = $urandom_range(0, 9) == 0;
        e_rc += rd_busy; e_wc += wr_busy; e_rt += rd_done; e_wt += wr_done;
        e_err += err; if (lat_valid) e_lat += longint'(lat_cycles);
        @(negedge clk);
      end
      {rd_busy, wr_busy, rd_done, wr_done, lat_valid, err} = '0;
      @(negedge clk);
      check(stats.rd_cycles == cnt_t'(e_rc), "rd_cycles");
      check(stats.wr_cycles == cnt_t'(e_wc), "wr_cycles");
      check(stats.rd_txn == cnt_t'(e_rt), "rd_txn");
      check(stats.wr_txn == cnt_t'(e_wt), "wr_txn");
      check(stats.rd_lat_sum == cnt_t'(e_lat), "rd_lat_sum");
      check(stats.err_count == cnt_t'(e_err), "err_count");
    end
    // saturation of the latency sum
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    lat_valid = 1'b1; lat_cycles = 32'hC000_0000;
    repeat (3) @(negedge clk);
    lat_valid = 1'b0;
    @(negedge clk);
    check(stats.rd_lat_sum == '1, "saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
