// host_ctrl_logic -- control logic of the host controller.
//
// Turns the byte stream from the host PC into register accesses on the
// traffic generators, one register bank per memory channel, and returns
// results as bytes. Each traffic generator is configured independently;
// channel 0xFF writes all channels at once, so a multi-channel batch can be
// started in the same cycle on every channel.
//
// Command frames (bytes, data little-endian):
//   'W' (0x57), channel, register, d0, d1, d2, d3  -> reply 'K' (0x4B)
//   'R' (0x52), channel, register                  -> reply d0, d1, d2, d3
// Any other first byte is discarded. Reads of a channel that does not exist
// return zero; writes to it are ignored.
// Registers (tg_pkg types):
//   0x00 CTRL   write bit 0 = start a batch; read {.., done, busy}
//   0x01 MODE   [1:0] op, [2] random, [4:3] AXI burst type, [6:5] signaling,
//               [7] check read data, [8] data pattern, [23:16] AXI len
//   0x02 BATCH  transactions per batch      0x03 SEED
//   0x04 BASE   region base address         0x05 SPAN   region size - 1
//   0x10 read cycles    0x11 write cycles   0x12 reads done
//   0x13 writes done    0x14 read latency sum  0x15 errors
// Timing: a register write takes effect, and a start pulse is given, two
// cycles after the last byte of its frame arrives; the reply byte(s) are
// offered to the UART from the next cycle. Bytes arriving before the reply
// has been handed over are dropped.
// The paper gives the role (configure each generator, return the counters
// over UART); the frame format and the register map are this design's own.
module host_ctrl_logic
  import tg_pkg::*;
#(
  parameter int unsigned N_CH = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  // byte stream from / to the UART
  input  logic [7:0] rx_data,
  input  logic       rx_valid,
  output logic [7:0] tx_data,
  output logic       tx_valid,
  input  logic       tx_ready,
  // traffic generators
  output tg_cfg_t    cfg   [N_CH],
  output logic       start [N_CH],
  input  logic       busy  [N_CH],
  input  logic       done  [N_CH],
  input  tg_stats_t  stats [N_CH]
);

  localparam logic [7:0] CMD_WR = 8'h57, CMD_RD = 8'h52, ACK = 8'h4B;
  localparam logic [7:0] BCAST = 8'hFF;

  typedef enum logic [2:0] {S_OP, S_CH, S_REG, S_DATA, S_EXEC, S_TX} state_e;

  state_e      state_q;
  logic        is_wr_q;
  logic [7:0]  ch_q, reg_q;
  logic [31:0] data_q;
  logic [1:0]  nbytes_q;      // data bytes received - 1 / reply bytes left - 1
  logic [31:0] reply_q;
  tg_cfg_t     cfg_q   [N_CH];
  logic        start_q [N_CH];

  function automatic logic [31:0] read_reg(tg_cfg_t c, logic b, logic d,
                                           tg_stats_t s, logic [7:0] r);
    case (r)
      8'h00: return {30'b0, d, b};
      8'h01: return {8'b0, c.len, 7'b0, c.pattern, c.check_en, c.sig,
                     c.burst, c.addr_mode, c.op};
      8'h02: return c.batch;
      8'h03: return c.seed;
      8'h04: return c.base;
      8'h05: return c.span_mask;
      8'h10: return s.rd_cycles;
      8'h11: return s.wr_cycles;
      8'h12: return s.rd_txn;
      8'h13: return s.wr_txn;
      8'h14: return s.rd_lat_sum;
      8'h15: return s.err_count;
      default: return 32'h0;
    endcase
  endfunction

  logic [31:0] rd_value;
  always_comb begin
    rd_value = '0;
    for (int i = 0; i < N_CH; i++)
      if (ch_q == 8'(i)) rd_value = read_reg(cfg_q[i], busy[i], done[i], stats[i], reg_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_OP;
      is_wr_q  <= 1'b0;
      ch_q     <= '0;
      reg_q    <= '0;
      data_q   <= '0;
      nbytes_q <= '0;
      reply_q  <= '0;
      for (int i = 0; i < N_CH; i++) begin
        cfg_q[i]           <= '0;
        cfg_q[i].op        <= OP_READ;
        cfg_q[i].burst     <= BURST_INCR;
        cfg_q[i].batch     <= cnt_t'(1);
        cfg_q[i].seed      <= 32'h1;
        cfg_q[i].span_mask <= '1;
        start_q[i]         <= 1'b0;
      end
    end else begin
      for (int i = 0; i < N_CH; i++) start_q[i] <= 1'b0;
      case (state_q)
        S_OP: if (rx_valid) begin
          is_wr_q <= (rx_data == CMD_WR);
          if (rx_data == CMD_WR || rx_data == CMD_RD) state_q <= S_CH;
        end
        S_CH: if (rx_valid) begin
          ch_q    <= rx_data;
          state_q <= S_REG;
        end
        S_REG: if (rx_valid) begin
          reg_q    <= rx_data;
          nbytes_q <= '0;
          state_q  <= is_wr_q ? S_DATA : S_EXEC;
        end
        S_DATA: if (rx_valid) begin
          data_q   <= {rx_data, data_q[31:8]};
          nbytes_q <= nbytes_q + 2'd1;
          if (nbytes_q == 2'd3) state_q <= S_EXEC;
        end
        S_EXEC: begin
          if (is_wr_q) begin
            for (int i = 0; i < N_CH; i++) begin
              if (ch_q == 8'(i) || ch_q == BCAST) begin
                case (reg_q)
                  8'h00: start_q[i] <= data_q[0];
                  8'h01: begin
                    cfg_q[i].op        <= op_e'(data_q[1:0]);
                    cfg_q[i].addr_mode <= addr_mode_e'(data_q[2]);
                    cfg_q[i].burst     <= burst_e'(data_q[4:3]);
                    cfg_q[i].sig       <= sig_e'(data_q[6:5]);
                    cfg_q[i].check_en  <= data_q[7];
                    cfg_q[i].pattern   <= data_q[8];
                    cfg_q[i].len       <= data_q[23:16];
                  end
                  8'h02: cfg_q[i].batch     <= data_q;
                  8'h03: cfg_q[i].seed      <= data_q;
                  8'h04: cfg_q[i].base      <= data_q;
                  8'h05: cfg_q[i].span_mask <= data_q;
                  default: ;
                endcase
              end
            end
            reply_q  <= {24'h0, ACK};
            nbytes_q <= 2'd0;
          end else begin
            reply_q  <= rd_value;
            nbytes_q <= 2'd3;
          end
          state_q <= S_TX;
        end
        default: if (tx_ready) begin   // S_TX: one reply byte per accepted transfer
          reply_q <= {8'h0, reply_q[31:8]};
          if (nbytes_q == 2'd0) state_q <= S_OP;
          nbytes_q <= nbytes_q - 2'd1;
        end
      endcase
    end
  end

  assign tx_data  = reply_q[7:0];
  assign tx_valid = (state_q == S_TX);
  assign cfg      = cfg_q;
  assign start    = start_q;

endmodule
