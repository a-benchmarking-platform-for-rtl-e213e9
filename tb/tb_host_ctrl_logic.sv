// tb_host_ctrl_logic -- feeds command frames byte by byte into the control
// logic and checks the configuration it drives to each traffic generator,
// the start pulses (single channel and broadcast), the acknowledge byte and
// the four-byte little-endian replies of register reads, including the
// statistics and status inputs, a non-existent channel and a junk byte.
module tb_host_ctrl_logic;
  import tg_pkg::*;
  localparam int N = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] rx_data, tx_data;
  logic rx_valid, tx_valid, tx_ready;
  tg_cfg_t cfg [N];
  logic start [N], busy [N], done [N];
  tg_stats_t stats [N];
  int checks = 0, failures = 0;
  byte unsigned replies[$];
  int starts[N];
  int hold;

  always #5 clk = ~clk;

  host_ctrl_logic #(.N_CH(N)) dut (.clk, .rst_n, .rx_data, .rx_valid, .tx_data, .tx_valid,
                                   .tx_ready, .cfg, .start, .busy, .done, .stats);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // transmitter stand-in: busy for 5 cycles per byte
  always @(posedge clk) begin
    if (!rst_n) hold <= 0;
    else if (tx_valid && tx_ready) begin replies.push_back(tx_data); hold <= 5; end
    else if (hold > 0) hold <= hold - 1;
  end
  assign tx_ready = (hold == 0);

  always @(posedge clk) for (int i = 0; i < N; i++) if (rst_n && start[i]) starts[i]++;

  task automatic put(byte unsigned b);
    @(negedge clk) rx_data = b; rx_valid = 1'b1;
    @(negedge clk) rx_valid = 1'b0;
    repeat (3) @(negedge clk);
  endtask

  task automatic wait_bytes(int n);
    int t = 0;
    while (replies.size() < n && t < 1000) begin @(negedge clk); t++; end
  endtask

  task automatic wr(byte unsigned ch, byte unsigned rg, int unsigned v);
    put(8'h57); put(ch); put(rg);
    for (int i = 0; i < 4; i++) put(v[8*i +: 8]);
    wait_bytes(1);
    check(replies.size() == 1 && replies[0] == 8'h4B, "ack");
    replies.delete();
  endtask

  task automatic rd(byte unsigned ch, byte unsigned rg, output int unsigned v);
    put(8'h52); put(ch); put(rg);
    wait_bytes(4);
    check(replies.size() == 4, "4 reply bytes");
    v = {replies[3], replies[2], replies[1], replies[0]};
    replies.delete();
  endtask

  initial begin
    int unsigned v;
    rx_valid = 1'b0; rx_data = '0;
    for (int i = 0; i < N; i++) begin
      busy[i] = 1'b0; done[i] = 1'b0; starts[i] = 0;
      stats[i] = '{rd_cycles: 100 + i, wr_cycles: 200 + i, rd_txn: 300 + i, wr_txn: 400 + i,
                   rd_lat_sum: 500 + i, err_count: 600 + i};
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // MODE of channel 1: mixed, random, WRAP, aggressive, check, pattern 1, len 15
    wr(1, 8'h01, 32'h000F_01D6);
    check(cfg[1].op == OP_MIXED && cfg[1].addr_mode == ADDR_RND && cfg[1].burst == BURST_WRAP &&
          cfg[1].sig == SIG_AGGRESSIVE && cfg[1].check_en && cfg[1].pattern && cfg[1].len == 8'd15,
          "mode fields");
    check(cfg[0].op == OP_READ && cfg[2].op == OP_READ, "other channels untouched");
    rd(1, 8'h01, v);
    check(v == 32'h000F_01D6, $sformatf("mode read back %h", v));
    wr(2, 8'h02, 32'd1234);   check(cfg[2].batch == 1234, "batch");
    wr(0, 8'h03, 32'hCAFE_F00D); check(cfg[0].seed == 32'hCAFE_F00D, "seed");
    wr(0, 8'h04, 32'h8000_0000); check(cfg[0].base == 32'h8000_0000, "base");
    wr(0, 8'h05, 32'h00FF_FFFF); check(cfg[0].span_mask == 32'h00FF_FFFF, "span");
    rd(2, 8'h02, v); check(v == 1234, "batch read back");

    // start one channel, then broadcast
    wr(1, 8'h00, 32'h1);
    check(starts[0] == 0 && starts[1] == 1 && starts[2] == 0, "single start");
    wr(8'hFF, 8'h00, 32'h1);
    check(starts[0] == 1 && starts[1] == 2 && starts[2] == 1, "broadcast start");
    wr(8'hFF, 8'h02, 32'd77);
    check(cfg[0].batch == 77 && cfg[1].batch == 77 && cfg[2].batch == 77, "broadcast write");

    // statistics and status
    for (int i = 0; i < N; i++) begin
      rd(8'(i), 8'h10, v); check(v == 100 + i, "rd_cycles");
      rd(8'(i), 8'h11, v); check(v == 200 + i, "wr_cycles");
      rd(8'(i), 8'h12, v); check(v == 300 + i, "rd_txn");
      rd(8'(i), 8'h13, v); check(v == 400 + i, "wr_txn");
      rd(8'(i), 8'h14, v); check(v == 500 + i, "rd_lat_sum");
      rd(8'(i), 8'h15, v); check(v == 600 + i, "err_count");
    end
    busy[2] = 1'b1; rd(2, 8'h00, v); check(v == 1, "busy");
    busy[2] = 1'b0; done[2] = 1'b1; rd(2, 8'h00, v); check(v == 2, "done");
    rd(7, 8'h10, v); check(v == 0, "missing channel reads 0");

    // junk byte is skipped
    put(8'h00);
    rd(0, 8'h03, v); check(v == 32'hCAFE_F00D, "junk ignored");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
