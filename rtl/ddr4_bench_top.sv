// ddr4_bench_top -- DDR4 benchmarking platform, logic in the AXI clock domain.
//
// For each of N_CH memory channels there is one traffic generator, whose
// AXI4 master port leaves this module (m_axi_req / m_axi_resp) to be wired to
// the AXI4 slave port of that channel's DDR4 memory interface (memory
// controller plus PHY, a vendor block outside this RTL). A single host
// controller, reached over UART, configures each traffic generator, starts
// batches and reads back their counters.
//
// Design-time parameters: N_CH (number of memory channels), DATA_RATE_MTS
// (memory data rate; the AXI clock `clk` is the memory interface's user
// clock at DATA_RATE_MTS/8 MHz, the PHY running at 4x that, which here sets
// the UART bit time), BAUD, MAX_OUT (outstanding bursts per direction) and
// EXTENDED (build the counters beyond the two batch cycle counters).
// Defaults follow the triple-channel DDR4-1600 setup of the evaluation; the
// baud rate and MAX_OUT are this design's choices.
module ddr4_bench_top
  import tg_pkg::*;
#(
  parameter int unsigned N_CH          = 3,
  parameter int unsigned DATA_RATE_MTS = 1600,
  parameter int unsigned BAUD          = 115200,
  parameter int unsigned MAX_OUT       = 8,
  parameter bit          EXTENDED      = 1'b1
) (
  input  logic      clk,        // AXI clock = memory interface user clock
  input  logic      rst_n,
  input  logic      uart_rxd,
  output logic      uart_txd,
  output axi_req_t  m_axi_req  [N_CH],
  input  axi_resp_t m_axi_resp [N_CH]
);

  localparam longint unsigned CLK_HZ       = longint'(DATA_RATE_MTS) * 1_000_000 / 8;
  localparam int unsigned     CLKS_PER_BIT = int'(CLK_HZ / longint'(BAUD));

  tg_cfg_t   cfg   [N_CH];
  logic      start [N_CH];
  logic      busy  [N_CH];
  logic      done  [N_CH];
  tg_stats_t stats [N_CH];

  host_controller #(.N_CH(N_CH), .CLKS_PER_BIT(CLKS_PER_BIT)) u_host (
    .clk, .rst_n, .uart_rxd, .uart_txd,
    .cfg, .start, .busy, .done, .stats
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    traffic_generator #(.MAX_OUT(MAX_OUT), .EXTENDED(EXTENDED)) u_tg (
      .clk, .rst_n,
      .cfg       (cfg[c]),
      .start     (start[c]),
      .busy      (busy[c]),
      .done      (done[c]),
      .stats     (stats[c]),
      .m_axi_req (m_axi_req[c]),
      .m_axi_resp(m_axi_resp[c])
    );
  end

endmodule
