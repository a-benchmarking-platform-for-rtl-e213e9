// tb_uart -- sends random bytes into the receiver and transmits random bytes,
// decoding them with an independent line model; checks data, the frame
// length of 10 bit times and that a frame with a bad stop bit is dropped.
module tb_uart;
  localparam int BIT_CLKS = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_txd = 1'b1, host_rxd;
  logic [7:0] rx_data, tx_data;
  logic rx_valid, tx_valid, tx_ready;
  int checks = 0, failures = 0;
  byte unsigned got[$];

  always #5 clk = ~clk;

  uart #(.CLKS_PER_BIT(BIT_CLKS)) dut (.clk, .rst_n, .rxd(host_txd), .rx_data, .rx_valid,
                                       .txd(host_rxd), .tx_data, .tx_valid, .tx_ready);

  `include "host_uart_tasks.svh"

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rx_valid) got.push_back(rx_data);

  initial begin
    byte unsigned sent[$], b, r;
    int t0, t1;
    tx_valid = 1'b0; tx_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    // receive direction
    for (int k = 0; k < 20; k++) begin
      b = (k == 0) ? 8'h00 : (k == 1) ? 8'hFF : 8'($urandom);
      sent.push_back(b);
      uart_send(b);
    end
    repeat (BIT_CLKS) @(posedge clk);
    check(got.size() == 20, $sformatf("received %0d bytes", got.size()));
    for (int k = 0; k < 20 && k < got.size(); k++) check(got[k] == sent[k], "rx byte");
    // bad stop bit: frame dropped
    got.delete();
    host_txd = 1'b0; repeat (10 * BIT_CLKS) @(posedge clk);  // start + 8 zero bits + low stop
    host_txd = 1'b1; repeat (3 * BIT_CLKS) @(posedge clk);
    check(got.size() == 0, "framing error dropped");
    // transmit direction
    for (int k = 0; k < 20; k++) begin
      b = 8'($urandom);
      @(negedge clk);
      while (!tx_ready) @(negedge clk);
      tx_data = b; tx_valid = 1'b1;
      @(posedge clk); t0 = int'($time);
      @(negedge clk) tx_valid = 1'b0;
      while (!tx_ready) @(negedge clk);
      t1 = int'($time);
      check((t1 - t0) / 10 >= 10 * BIT_CLKS - 1 && (t1 - t0) / 10 <= 10 * BIT_CLKS + 1,
            $sformatf("frame length %0d cycles", (t1 - t0) / 10));
      uart_recv(r);
      check(r == b, $sformatf("tx byte %h decoded as %h", b, r));
      check(rx_bytes.size() == 0, "one byte per frame");
    end
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
