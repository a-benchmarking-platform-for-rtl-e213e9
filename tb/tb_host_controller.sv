// tb_host_controller -- talks to the host controller over its UART pins as a
// host PC would: writes configuration registers, starts a channel, reads
// back configuration, status and statistics, and checks every value.
module tb_host_controller;
  import tg_pkg::*;
  localparam int N = 2;
  localparam int BIT_CLKS = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_txd = 1'b1, host_rxd;
  tg_cfg_t cfg [N];
  logic start [N], busy [N], done [N];
  tg_stats_t stats [N];
  int checks = 0, failures = 0;
  int starts[N];

  always #5 clk = ~clk;

  host_controller #(.N_CH(N), .CLKS_PER_BIT(BIT_CLKS)) dut (
    .clk, .rst_n, .uart_rxd(host_txd), .uart_txd(host_rxd),
    .cfg, .start, .busy, .done, .stats);

  `include "host_uart_tasks.svh"

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) for (int i = 0; i < N; i++) if (rst_n && start[i]) starts[i]++;

  initial begin
    int unsigned v;
    bit ack;
    for (int i = 0; i < N; i++) begin
      busy[i] = 1'b0; done[i] = 1'b0; starts[i] = 0;
      stats[i] = '{rd_cycles: 32'h1111_0000 + i, wr_cycles: 32'h2222_0000 + i,
                   rd_txn: 7, wr_txn: 9, rd_lat_sum: 32'hABCD_EF01, err_count: 3};
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    host_write(1, 8'h01, 32'h007F_0009, ack);   // write, INCR, len 127
    check(ack, "ack 1");
    check(cfg[1].op == OP_WRITE && cfg[1].burst == BURST_INCR && cfg[1].len == 8'd127, "mode over uart");
    host_write(0, 8'h02, 32'd4096, ack);
    check(ack && cfg[0].batch == 4096, "batch over uart");
    host_read(1, 8'h01, v);
    check(v == 32'h007F_0009, $sformatf("mode read %h", v));
    host_write(0, 8'h00, 32'h1, ack);
    check(ack && starts[0] == 1 && starts[1] == 0, "start ch0");
    done[0] = 1'b1;
    host_read(0, 8'h00, v);   check(v == 2, "status done");
    host_read(0, 8'h10, v);   check(v == 32'h1111_0000, "rd_cycles ch0");
    host_read(1, 8'h11, v);   check(v == 32'h2222_0001, "wr_cycles ch1");
    host_read(1, 8'h14, v);   check(v == 32'hABCD_EF01, "latency sum");
    host_read(1, 8'h15, v);   check(v == 3, "errors");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
