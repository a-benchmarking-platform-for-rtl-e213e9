// tg_pkg -- types and constants shared by the DDR4 benchmarking platform.
//
// The platform drives each DDR4 channel through the AXI4 slave port of that
// channel's memory interface. This package holds the AXI4 channel structs
// (one request bundle master->slave, one response bundle slave->master), the
// run-time configuration of a traffic generator, its statistics, and the
// helper that computes the address of one beat of an AXI4 burst.
//
// From the paper: AXI4 with five independent channels; fixed, incrementing
// and wrapping bursts of 1 to 128 beats; read-only, write-only or mixed
// batches; sequential or random addressing; non-blocking, blocking or
// aggressive signaling. Own choices: the bus widths (512-bit data, the width
// a 64-bit DDR4 channel gives at a 4:1 PHY-to-AXI clock ratio; 32-bit
// address; 4-bit ID), 32-bit counters and the register encodings.
package tg_pkg;

  localparam int AXI_ADDR_W  = 32;
  localparam int AXI_DATA_W  = 512;
  localparam int AXI_ID_W    = 4;
  localparam int AXI_STRB_W  = AXI_DATA_W / 8;
  localparam int BEAT_BYTES  = AXI_DATA_W / 8;
  localparam int BEAT_SHIFT  = $clog2(BEAT_BYTES);  // AXI AxSIZE of a full beat
  localparam int CNT_W       = 32;                   // performance counter width

  typedef logic [AXI_ADDR_W-1:0] addr_t;
  typedef logic [AXI_DATA_W-1:0] data_t;
  typedef logic [CNT_W-1:0]      cnt_t;

  // AXI4 AxBURST encodings
  typedef enum logic [1:0] {
    BURST_FIXED = 2'b00,
    BURST_INCR  = 2'b01,
    BURST_WRAP  = 2'b10
  } burst_e;

  // Operation mix of a batch
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1,
    OP_MIXED = 2'd2
  } op_e;

  // Addressing mode
  typedef enum logic {
    ADDR_SEQ = 1'b0,
    ADDR_RND = 1'b1
  } addr_mode_e;

  // Signaling mode
  typedef enum logic [1:0] {
    SIG_NONBLOCKING = 2'd0,
    SIG_BLOCKING    = 2'd1,
    SIG_AGGRESSIVE  = 2'd2
  } sig_e;

  // AXI4 write/read address channel payload
  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    addr_t               addr;
    logic [7:0]          len;    // beats - 1
    logic [2:0]          size;
    burst_e              burst;
  } axi_ax_t;

  typedef struct packed {
    data_t                 data;
    logic [AXI_STRB_W-1:0] strb;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    data_t               data;
    logic [1:0]          resp;
    logic                last;
  } axi_r_t;

  // Master -> slave signals of one AXI4 port
  typedef struct packed {
    logic    aw_valid;
    axi_ax_t aw;
    logic    w_valid;
    axi_w_t  w;
    logic    b_ready;
    logic    ar_valid;
    axi_ax_t ar;
    logic    r_ready;
  } axi_req_t;

  // Slave -> master signals of one AXI4 port
  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    logic   b_valid;
    axi_b_t b;
    logic   ar_ready;
    logic   r_valid;
    axi_r_t r;
  } axi_resp_t;

  // Run-time configuration of one traffic generator
  typedef struct packed {
    op_e        op;
    addr_mode_e addr_mode;
    burst_e     burst;
    sig_e       sig;
    logic       check_en;   // compare read data with the generated pattern
    logic       pattern;    // data pattern select (see tg_data_gen)
    logic [7:0] len;        // AXI AxLEN: beats per burst - 1 (0..127 used)
    cnt_t       batch;      // transactions per batch (per direction)
    logic [31:0] seed;      // LFSR seed for random addresses and data
    addr_t      base;       // base address of the tested region
    addr_t      span_mask;  // region size - 1 (power of two)
  } tg_cfg_t;

  // Statistics of the last batch of one traffic generator
  typedef struct packed {
    cnt_t rd_cycles;   // cycles from batch start to last read response
    cnt_t wr_cycles;   // cycles from batch start to last write response
    cnt_t rd_txn;      // read transactions completed
    cnt_t wr_txn;      // write transactions completed
    cnt_t rd_lat_sum;  // sum over reads of AR handshake -> first R beat cycles
    cnt_t err_count;   // read data mismatches plus non-OKAY responses
  } tg_stats_t;

  // Address of beat `idx` of a burst that starts at `start`.
  // WRAP assumes (len+1) is a power of two, as AXI4 requires.
  function automatic addr_t beat_addr(addr_t start, logic [7:0] len,
                                      burst_e burst, logic [7:0] idx);
    addr_t inc, wrap_mask;
    inc       = start + (addr_t'(idx) << BEAT_SHIFT);
    wrap_mask = ((addr_t'(len) + addr_t'(1)) << BEAT_SHIFT) - addr_t'(1);
    case (burst)
      BURST_FIXED: return start;
      BURST_WRAP:  return (start & ~wrap_mask) | (inc & wrap_mask);
      default:     return inc;
    endcase
  endfunction

endpackage
