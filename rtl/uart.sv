// uart -- serial port between the host controller and the host PC.
//
// 8 data bits, no parity, one stop bit, LSB first, idle high. The receiver
// synchronises `rxd` with two flip-flops, waits for a falling edge, samples
// each bit in its middle (CLKS_PER_BIT clock cycles apart) and pulses
// `rx_valid` with `rx_data` after a valid stop bit; a frame whose stop bit is
// low is dropped. The transmitter accepts a byte when `tx_valid && tx_ready`
// and shifts out start bit, data and stop bit, each CLKS_PER_BIT cycles long.
// The paper names the UART link only; framing and the baud rate are this
// design's choices.
module uart #(
  parameter int unsigned CLKS_PER_BIT = 1736   // 200 MHz / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] rx_data,
  output logic       rx_valid,
  output logic       txd,
  input  logic [7:0] tx_data,
  input  logic       tx_valid,
  output logic       tx_ready
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  // ---------------------------------------------------------------- receiver
  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_e;
  rx_state_e      rx_state_q;
  logic [1:0]     rx_sync_q;
  logic [CW-1:0]  rx_cnt_q;
  logic [2:0]     rx_bit_q;
  logic [7:0]     rx_shift_q;
  logic           rx_in;

  assign rx_in = rx_sync_q[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sync_q  <= 2'b11;
      rx_state_q <= RX_IDLE;
      rx_cnt_q   <= '0;
      rx_bit_q   <= '0;
      rx_shift_q <= '0;
      rx_data    <= '0;
      rx_valid   <= 1'b0;
    end else begin
      rx_sync_q <= {rx_sync_q[0], rxd};
      rx_valid  <= 1'b0;
      case (rx_state_q)
        RX_IDLE: if (!rx_in) begin
          rx_state_q <= RX_START;
          rx_cnt_q   <= CW'(CLKS_PER_BIT / 2);
        end
        RX_START: if (rx_cnt_q == 0) begin
          if (!rx_in) begin
            rx_state_q <= RX_DATA;
            rx_cnt_q   <= CW'(CLKS_PER_BIT - 1);
            rx_bit_q   <= '0;
          end else begin
            rx_state_q <= RX_IDLE;   // glitch
          end
        end else rx_cnt_q <= rx_cnt_q - 1'b1;
        RX_DATA: if (rx_cnt_q == 0) begin
          rx_shift_q <= {rx_in, rx_shift_q[7:1]};
          rx_cnt_q   <= CW'(CLKS_PER_BIT - 1);
          if (rx_bit_q == 3'd7) rx_state_q <= RX_STOP;
          rx_bit_q <= rx_bit_q + 3'd1;
        end else rx_cnt_q <= rx_cnt_q - 1'b1;
        default: if (rx_cnt_q == 0) begin   // RX_STOP
          rx_state_q <= RX_IDLE;
          if (rx_in) begin
            rx_data  <= rx_shift_q;
            rx_valid <= 1'b1;
          end
        end else rx_cnt_q <= rx_cnt_q - 1'b1;
      endcase
    end
  end

  // ------------------------------------------------------------- transmitter
  logic [9:0]    tx_shift_q;
  logic [3:0]    tx_left_q;
  logic [CW-1:0] tx_cnt_q;

  assign tx_ready = (tx_left_q == 0);
  assign txd      = tx_shift_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_shift_q <= '1;
      tx_left_q  <= '0;
      tx_cnt_q   <= '0;
    end else if (tx_left_q == 0) begin
      if (tx_valid) begin
        tx_shift_q <= {1'b1, tx_data, 1'b0};
        tx_left_q  <= 4'd10;
        tx_cnt_q   <= CW'(CLKS_PER_BIT - 1);
      end
    end else if (tx_cnt_q == 0) begin
      tx_shift_q <= {1'b1, tx_shift_q[9:1]};
      tx_left_q  <= tx_left_q - 4'd1;
      tx_cnt_q   <= CW'(CLKS_PER_BIT - 1);
    end else begin
      tx_cnt_q <= tx_cnt_q - 1'b1;
    end
  end

endmodule
