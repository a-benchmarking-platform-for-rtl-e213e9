// tb_ddr4_bench_full -- one complete benchmark run on the platform with all
// parameters at their defaults: three channels, DDR4-1600 clocking
// (200 MHz AXI clock) and a 115200-baud UART, so every bit on the serial line
// lasts 1736 clock cycles. Over the UART the host configures all three
// traffic generators at once for 16 sequential 128-beat INCR bursts with
// aggressive signaling, runs a write batch and then a checked read batch,
// and reads back every counter. Checks: counts, zero errors, and cycle
// counts of one beat per clock cycle plus the memory latency.
module tb_ddr4_bench_full;
  import tg_pkg::*;
  localparam int N = 3;
  localparam int BIT_CLKS = 1736;
  localparam int LAT = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_txd = 1'b1, host_rxd;
  axi_req_t  req  [N];
  axi_resp_t resp [N];
  int checks = 0, failures = 0;

  always #2.5 clk = ~clk;   // 200 MHz

  ddr4_bench_top dut (.clk, .rst_n, .uart_rxd(host_txd), .uart_txd(host_rxd),
                      .m_axi_req(req), .m_axi_resp(resp));

  for (genvar c = 0; c < N; c++) begin : g_mem
    axi_mem_model #(.LATENCY(LAT), .WORDS_LOG2(12)) mem (.clk, .rst_n, .req(req[c]), .resp(resp[c]));
  end

  `include "host_uart_tasks.svh"

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_batch(op_e op, bit chk);
    bit ack;
    int unsigned st;
    // op, sequential, INCR, aggressive, len 128
    host_write(8'hFF, 8'h01, {8'h0, 8'd127, 7'b0, 1'b0, chk, SIG_AGGRESSIVE, BURST_INCR,
                              ADDR_SEQ, op}, ack);
    check(ack, "mode");
    host_write(8'hFF, 8'h00, 32'h1, ack);
    check(ack, "start");
    for (int c = 0; c < N; c++) begin
      host_read(8'(c), 8'h00, st);
      check(st == 2, $sformatf("channel %0d done", c));
    end
  endtask

  initial begin
    bit ack;
    int unsigned v;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    host_write(8'hFF, 8'h02, 32'd16, ack);          check(ack, "batch");
    host_write(8'hFF, 8'h04, 32'h0000_0000, ack);   check(ack, "base");
    run_batch(OP_WRITE, 1'b0);
    for (int c = 0; c < N; c++) begin
      host_read(8'(c), 8'h13, v); check(v == 16, "writes done");
      host_read(8'(c), 8'h11, v);
      check(v >= 16 * 128 && v <= 16 * 128 + 16,
            $sformatf("ch%0d write cycles %0d", c, v));
    end
    run_batch(OP_READ, 1'b1);
    for (int c = 0; c < N; c++) begin
      host_read(8'(c), 8'h12, v); check(v == 16, "reads done");
      host_read(8'(c), 8'h10, v);
      check(v >= 16 * 128 && v <= 16 * 128 + LAT + 4,
            $sformatf("ch%0d read cycles %0d", c, v));
      host_read(8'(c), 8'h14, v); check(v >= 16 * LAT, "latency sum");
      host_read(8'(c), 8'h15, v); check(v == 0, "no data errors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
