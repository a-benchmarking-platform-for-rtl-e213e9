// tg_perf_counters -- performance monitoring counters of a traffic generator.
//
// Two cycle counters measure how long a batch of reads and a batch of writes
// takes: each counts every clock cycle in which its direction is busy. The
// other counters count completed read and write transactions, accumulate the
// read latency (cycles from read-address handshake to first read-data beat)
// and count errors. With EXTENDED = 0 only the two cycle counters and the
// error counter are built, the others read as zero.
//
// Interface: `clear` (one cycle, at batch start) zeroes all counters; the
// other inputs are per-cycle events. `stats` shows the registered values.
// Counters saturate at all ones instead of wrapping.
// The paper gives the two cycle counters, the per-direction transaction
// counts, and latency as a collected statistic; the saturation, the 32-bit
// width and the EXTENDED switch are this design's choices.
module tg_perf_counters
  import tg_pkg::*;
#(
  parameter bit EXTENDED = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      rd_busy,
  input  logic      wr_busy,
  input  logic      rd_done,     // one read transaction completed
  input  logic      wr_done,     // one write transaction completed
  input  logic      lat_valid,   // first beat of a read burst seen
  input  cnt_t      lat_cycles,  // its latency
  input  logic      err,         // one error seen
  output tg_stats_t stats
);

  function automatic cnt_t sat_add(cnt_t a, cnt_t b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  tg_stats_t q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (clear) begin
      q <= '0;
    end else begin
      if (rd_busy) q.rd_cycles <= sat_add(q.rd_cycles, cnt_t'(1));
      if (wr_busy) q.wr_cycles <= sat_add(q.wr_cycles, cnt_t'(1));
      if (err)     q.err_count <= sat_add(q.err_count, cnt_t'(1));
      if (EXTENDED) begin
        if (rd_done)   q.rd_txn     <= sat_add(q.rd_txn, cnt_t'(1));
        if (wr_done)   q.wr_txn     <= sat_add(q.wr_txn, cnt_t'(1));
        if (lat_valid) q.rd_lat_sum <= sat_add(q.rd_lat_sum, lat_cycles);
      end
    end
  end

  assign stats = q;

endmodule
