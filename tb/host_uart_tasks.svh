// host_uart_tasks.svh -- host-PC side of the UART link, for testbenches.
// Included inside a testbench module that declares: `clk`, the line it
// drives into the design `host_txd`, the line it listens on `host_rxd`, and
// an int localparam BIT_CLKS (clock cycles per bit). A background process
// collects every received byte in `rx_bytes`.

byte unsigned rx_bytes[$];

task automatic uart_send(byte unsigned b);
  host_txd = 1'b0;
  repeat (BIT_CLKS) @(posedge clk);
  for (int i = 0; i < 8; i++) begin
    host_txd = b[i];
    repeat (BIT_CLKS) @(posedge clk);
  end
  host_txd = 1'b1;
  repeat (BIT_CLKS) @(posedge clk);
endtask

initial begin : uart_host_receiver
  byte unsigned b;
  forever begin
    @(negedge host_rxd);
    repeat (BIT_CLKS / 2) @(posedge clk);
    if (host_rxd == 1'b0) begin
      for (int i = 0; i < 8; i++) begin
        repeat (BIT_CLKS) @(posedge clk);
        b[i] = host_rxd;
      end
      repeat (BIT_CLKS) @(posedge clk);
      rx_bytes.push_back(b);
    end
  end
end

task automatic uart_recv(output byte unsigned b);
  while (rx_bytes.size() == 0) @(posedge clk);
  b = rx_bytes.pop_front();
endtask

// 'W' frame; returns 1 when the 'K' acknowledge came back
task automatic host_write(byte unsigned ch, byte unsigned rg, int unsigned v, output bit ack);
  byte unsigned r;
  uart_send(8'h57); uart_send(ch); uart_send(rg);
  for (int i = 0; i < 4; i++) uart_send(v[8*i +: 8]);
  uart_recv(r);
  ack = (r == 8'h4B);
endtask

task automatic host_read(byte unsigned ch, byte unsigned rg, output int unsigned v);
  byte unsigned r;
  uart_send(8'h52); uart_send(ch); uart_send(rg);
  v = 0;
  for (int i = 0; i < 4; i++) begin
    uart_recv(r);
    v[8*i +: 8] = r;
  end
endtask
