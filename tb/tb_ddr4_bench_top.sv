// tb_ddr4_bench_top -- end-to-end test of the benchmarking platform.
//
// Three channels, each with a behavioural AXI4 memory (the channel-1 memory
// throttles its ready signals at random). The testbench acts as the host PC
// over the UART line (sped up to 8 clock cycles per bit): it configures the
// traffic generators, starts batches on one or all channels, polls their
// status and reads back their counters, then checks them against what the
// memories saw. Across the runs every run-time option is used: read, write
// and mixed batches; sequential and random addressing; FIXED, INCR and WRAP
// bursts of 1 to 128 beats; non-blocking, blocking and aggressive signaling;
// single-channel and broadcast start; data checking passing on clean data
// and catching a corrupted word. Each use is counted and one that never
// happened is a failure.
module tb_ddr4_bench_top;
  import tg_pkg::*;
  localparam int N = 3;
  localparam int BIT_CLKS = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_txd = 1'b1, host_rxd;
  axi_req_t  req  [N];
  axi_resp_t resp [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ddr4_bench_top #(.N_CH(N), .BAUD(25_000_000)) dut (
    .clk, .rst_n, .uart_rxd(host_txd), .uart_txd(host_rxd),
    .m_axi_req(req), .m_axi_resp(resp));

  axi_mem_model #(.LATENCY(8),  .WORDS_LOG2(12), .STALL(1'b0)) mem0 (.clk, .rst_n, .req(req[0]), .resp(resp[0]));
  axi_mem_model #(.LATENCY(12), .WORDS_LOG2(12), .STALL(1'b1)) mem1 (.clk, .rst_n, .req(req[1]), .resp(resp[1]));
  axi_mem_model #(.LATENCY(5),  .WORDS_LOG2(12), .STALL(1'b0)) mem2 (.clk, .rst_n, .req(req[2]), .resp(resp[2]));

  `include "host_uart_tasks.svh"

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_op[3], n_addr[2], n_burst[3], n_sig[3], n_single, n_bcast, n_err_caught, n_len128;

  function automatic int unsigned mode_word(op_e op, addr_mode_e am, burst_e b, sig_e s,
                                            bit chk, bit pat, int beats);
    return {8'b0, 8'(beats - 1), 7'b0, pat, chk, s, b, am, op};
  endfunction

  task automatic cfg_ch(byte unsigned ch, op_e op, addr_mode_e am, burst_e b, sig_e s,
                        bit chk, int beats, int batch, int unsigned seed);
    bit ack;
    host_write(ch, 8'h01, mode_word(op, am, b, s, chk, seed[0], beats), ack); check(ack, "ack mode");
    host_write(ch, 8'h02, batch, ack);                                       check(ack, "ack batch");
    host_write(ch, 8'h03, seed, ack);                                        check(ack, "ack seed");
    host_write(ch, 8'h04, 32'h0010_0000, ack);                               check(ack, "ack base");
    host_write(ch, 8'h05, 32'h0003_FFFF, ack);                               check(ack, "ack span");
  endtask

  task automatic go(byte unsigned ch);
    bit ack;
    int unsigned st;
    int polls;
    host_write(ch, 8'h00, 32'h1, ack);
    check(ack, "ack start");
    if (ch == 8'hFF) n_bcast++; else n_single++;
    for (int c = 0; c < N; c++) begin
      if (ch == 8'hFF || ch == 8'(c)) begin
        polls = 0;
        do begin host_read(8'(c), 8'h00, st); polls++; end while (st != 2 && polls < 400);
        check(st == 2, $sformatf("channel %0d done", c));
      end
    end
  endtask

  task automatic stats_of(byte unsigned ch, output tg_stats_t s);
    int unsigned v;
    host_read(ch, 8'h10, v); s.rd_cycles  = v;
    host_read(ch, 8'h11, v); s.wr_cycles  = v;
    host_read(ch, 8'h12, v); s.rd_txn     = v;
    host_read(ch, 8'h13, v); s.wr_txn     = v;
    host_read(ch, 8'h14, v); s.rd_lat_sum = v;
    host_read(ch, 8'h15, v); s.err_count  = v;
  endtask

  // one write batch then the same reads with checking, on one channel
  task automatic wr_rd(byte unsigned ch, addr_mode_e am, burst_e b, sig_e s, int beats,
                       int batch, int unsigned seed);
    tg_stats_t st;
    cfg_ch(ch, OP_WRITE, am, b, s, 1'b0, beats, batch, seed);
    go(ch);
    stats_of(ch, st);
    check(st.wr_txn == batch && st.err_count == 0 && st.wr_cycles > 0,
          $sformatf("ch%0d write batch: txn %0d err %0d", ch, st.wr_txn, st.err_count));
    cfg_ch(ch, OP_READ, am, b, s, 1'b1, beats, batch, seed);
    go(ch);
    stats_of(ch, st);
    check(st.rd_txn == batch && st.err_count == 0 && st.rd_cycles > 0,
          $sformatf("ch%0d read batch: txn %0d err %0d", ch, st.rd_txn, st.err_count));
    n_op[OP_WRITE]++; n_op[OP_READ]++; n_addr[am]++; n_burst[b]++; n_sig[s]++;
    if (beats == 128) n_len128++;
  endtask

  initial begin
    tg_stats_t st;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // all channels at once: sequential INCR writes then checked reads
    cfg_ch(8'hFF, OP_WRITE, ADDR_SEQ, BURST_INCR, SIG_NONBLOCKING, 1'b0, 4, 8, 32'h2);
    go(8'hFF);
    check(mem0.aw_count == 8 && mem1.aw_count == 8 && mem2.aw_count == 8, "broadcast AW bursts");
    check(mem0.w_beats == 32 && mem1.w_beats == 32 && mem2.w_beats == 32, "broadcast W beats");
    cfg_ch(8'hFF, OP_READ, ADDR_SEQ, BURST_INCR, SIG_NONBLOCKING, 1'b1, 4, 8, 32'h2);
    go(8'hFF);
    for (int c = 0; c < N; c++) begin
      stats_of(8'(c), st);
      check(st.rd_txn == 8 && st.err_count == 0, $sformatf("broadcast read ch%0d", c));
      check(st.rd_lat_sum >= 8 * 5, "latency counted");
    end
    n_op[OP_WRITE]++; n_op[OP_READ]++; n_addr[ADDR_SEQ]++; n_burst[BURST_INCR]++;
    n_sig[SIG_NONBLOCKING]++;
    check(mem0.r_wait_seen, "non-blocking ready waits for valid");

    // per-channel patterns
    wr_rd(0, ADDR_RND, BURST_WRAP,  SIG_AGGRESSIVE, 8,   12, 32'h1357_9BDF);
    mem1.max_rd_out = 0; mem1.max_wr_out = 0;
    wr_rd(1, ADDR_SEQ, BURST_FIXED, SIG_BLOCKING,   2,   10, 32'h4);
    check(mem1.max_rd_out <= 1 && mem1.max_wr_out <= 1, "blocking keeps one outstanding");
    wr_rd(2, ADDR_RND, BURST_INCR,  SIG_NONBLOCKING, 1,  24, 32'hBEEF_0001);
    wr_rd(2, ADDR_SEQ, BURST_INCR,  SIG_AGGRESSIVE, 128, 3,  32'h6);

    // mixed batch on channel 0: reads and writes together
    cfg_ch(0, OP_MIXED, ADDR_SEQ, BURST_INCR, SIG_AGGRESSIVE, 1'b0, 16, 6, 32'h8);
    go(0);
    stats_of(0, st);
    check(st.rd_txn == 6 && st.wr_txn == 6 && st.rd_cycles > 0 && st.wr_cycles > 0, "mixed batch");
    n_op[OP_MIXED]++;

    // a corrupted word is caught by the read check
    mem2.mem[(32'h0010_0000 >> BEAT_SHIFT) % 4096 + 2] = '0;
    cfg_ch(2, OP_READ, ADDR_SEQ, BURST_INCR, SIG_AGGRESSIVE, 1'b1, 128, 1, 32'h6);
    go(2);
    stats_of(2, st);
    check(st.err_count == 1, $sformatf("corruption detected, errors %0d", st.err_count));
    if (st.err_count == 1) n_err_caught++;

    // every mechanism happened
    for (int i = 0; i < 3; i++) check(n_op[i] > 0,    $sformatf("op %0d used", i));
    for (int i = 0; i < 2; i++) check(n_addr[i] > 0,  $sformatf("addr mode %0d used", i));
    for (int i = 0; i < 3; i++) check(n_burst[i] > 0, $sformatf("burst %0d used", i));
    for (int i = 0; i < 3; i++) check(n_sig[i] > 0,   $sformatf("signaling %0d used", i));
    check(n_single > 0 && n_bcast > 0, "single and broadcast start");
    check(n_err_caught > 0, "error detection");
    check(n_len128 > 0, "128-beat bursts");
    $display("mechanisms: op %0d/%0d/%0d addr %0d/%0d burst %0d/%0d/%0d sig %0d/%0d/%0d single %0d bcast %0d err %0d len128 %0d",
             n_op[0], n_op[1], n_op[2], n_addr[0], n_addr[1], n_burst[0], n_burst[1], n_burst[2],
             n_sig[0], n_sig[1], n_sig[2], n_single, n_bcast, n_err_caught, n_len128);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
