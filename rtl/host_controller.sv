// host_controller -- run-time control path between the host PC and the
// traffic generators.
//
// A UART (8N1) carries command frames from the host PC to the control logic
// and replies back; the control logic holds one configuration per traffic
// generator, starts batches and reads out their performance counters (see
// host_ctrl_logic for the frame format and register map). Everything runs in
// the AXI clock domain of the traffic generators.
// The split into control logic and UART follows the paper's block diagram;
// the baud rate is set by CLKS_PER_BIT.
module host_controller
  import tg_pkg::*;
#(
  parameter int unsigned N_CH         = 3,
  parameter int unsigned CLKS_PER_BIT = 1736
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      uart_rxd,
  output logic      uart_txd,
  output tg_cfg_t   cfg   [N_CH],
  output logic      start [N_CH],
  input  logic      busy  [N_CH],
  input  logic      done  [N_CH],
  input  tg_stats_t stats [N_CH]
);

  logic [7:0] rx_data, tx_data;
  logic       rx_valid, tx_valid, tx_ready;

  uart #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n,
    .rxd(uart_rxd), .rx_data, .rx_valid,
    .txd(uart_txd), .tx_data, .tx_valid, .tx_ready
  );

  host_ctrl_logic #(.N_CH(N_CH)) u_ctrl (
    .clk, .rst_n,
    .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready,
    .cfg, .start, .busy, .done, .stats
  );

endmodule
