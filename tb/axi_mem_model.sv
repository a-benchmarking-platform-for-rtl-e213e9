// axi_mem_model -- behavioural AXI4 slave memory, standing in for one DDR4
// memory interface plus its DRAM in simulation. Not synthesizable logic.
//
// Accepts read and write bursts (FIXED, INCR, WRAP) on independent channels.
// A read burst returns its first beat LATENCY cycles after its address was
// accepted and then one beat per cycle; a write response follows the last
// write beat after two cycles. Storage is 2**WORDS_LOG2 beats, addressed by
// the beat address modulo that size, and starts at zero. With STALL set,
// AWREADY, WREADY and ARREADY drop at random. With ROW_MISS > 0 it mimics
// the cost of DRAM row changes: addresses are split into 8 KiB rows spread
// over 16 banks, each bank keeps one row open, and a burst to a row other
// than its bank's open one starts ROW_MISS cycles later (precharge plus
// activate). Read bursts then also share one data bus in order, and so do
// write bursts, so the delays are not hidden by overlap. It keeps counts that
// testbenches read hierarchically: bursts, beats, the largest number of
// read and write bursts outstanding at once, and whether a VALID was seen
// waiting for READY on R or B.
module axi_mem_model
  import tg_pkg::*;
#(
  parameter int LATENCY    = 4,
  parameter int WORDS_LOG2 = 12,
  parameter bit STALL      = 1'b0,
  parameter int ROW_MISS   = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  req,
  output axi_resp_t resp
);

  data_t   mem [2**WORDS_LOG2];
  axi_ax_t arq[$];
  int      art[$];
  axi_ax_t awq[$];
  axi_b_t  bq[$];
  int      bt[$];
  int      now;
  int      rbeat, wbeat;
  int      awt[$];
  int      r_bus_free, w_bus_free;
  longint  open_row [16];
  int      row_misses;
  logic    stall_a, stall_w, stall_r;

  // statistics
  int ar_count, aw_count, r_beats, w_beats, b_count;
  int rd_out, wr_out, max_rd_out, max_wr_out;
  bit r_wait_seen, b_wait_seen, w_before_aw_seen;

  // start time of a burst on a bus that is free from `bus_free`
  function automatic int sched(axi_ax_t ax, int earliest, ref int bus_free);
    longint row;
    int     bank, t;
    row  = longint'(ax.addr) >> 13;
    bank = int'(row % 16);
    t    = (earliest > bus_free) ? earliest : bus_free;
    if (ROW_MISS > 0) begin
      if (open_row[bank] != row) begin
        t += ROW_MISS;
        row_misses++;
        open_row[bank] = row;
      end
      bus_free = t + int'(ax.len) + 1;
    end
    return t;
  endfunction

  function automatic int idx(addr_t a);
    return int'((a >> BEAT_SHIFT) & addr_t'((1 << WORDS_LOG2) - 1));
  endfunction

  initial begin
    foreach (mem[i]) mem[i] = '0;
  end

  always_comb begin
    resp          = '0;
    resp.ar_ready = !stall_r;
    resp.aw_ready = !stall_a;
    resp.w_ready  = (awq.size() > 0) && (now >= awt[0]) && !stall_w;
    if (arq.size() > 0 && now >= art[0]) begin
      resp.r_valid = 1'b1;
      resp.r.data  = mem[idx(beat_addr(arq[0].addr, arq[0].len, arq[0].burst, 8'(rbeat)))];
      resp.r.last  = (rbeat == int'(arq[0].len));
      resp.r.resp  = 2'b00;
    end
    if (bq.size() > 0 && now >= bt[0]) begin
      resp.b_valid = 1'b1;
      resp.b       = bq[0];
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      arq.delete(); art.delete(); awq.delete(); awt.delete(); bq.delete(); bt.delete();
      r_bus_free = 0; w_bus_free = 0; row_misses = 0;
      foreach (open_row[i]) open_row[i] = -1;
      now = 0; rbeat = 0; wbeat = 0;
      stall_a <= 1'b0; stall_w <= 1'b0; stall_r <= 1'b0;
      ar_count = 0; aw_count = 0; r_beats = 0; w_beats = 0; b_count = 0;
      rd_out = 0; wr_out = 0; max_rd_out = 0; max_wr_out = 0;
      r_wait_seen = 0; b_wait_seen = 0; w_before_aw_seen = 0;
    end else begin
      if (resp.r_valid && !req.r_ready) r_wait_seen = 1;
      if (resp.b_valid && !req.b_ready) b_wait_seen = 1;
      if (req.w_valid && awq.size() == 0 && !(req.aw_valid && resp.aw_ready)) w_before_aw_seen = 1;
      // read data
      if (resp.r_valid && req.r_ready) begin
        r_beats++;
        if (resp.r.last) begin
          void'(arq.pop_front()); void'(art.pop_front());
          rbeat = 0; rd_out--;
        end else rbeat++;
      end
      // write data (uses the oldest accepted write address)
      if (req.w_valid && resp.w_ready) begin
        mem[idx(beat_addr(awq[0].addr, awq[0].len, awq[0].burst, 8'(wbeat)))] <= req.w.data;
        w_beats++;
        if (wbeat == int'(awq[0].len)) begin
          bq.push_back('{id: awq[0].id, resp: 2'b00}); bt.push_back(now + 2);
          void'(awq.pop_front()); void'(awt.pop_front());
          wbeat = 0;
        end else wbeat++;
      end
      if (resp.b_valid && req.b_ready) begin
        void'(bq.pop_front()); void'(bt.pop_front());
        b_count++; wr_out--;
      end
      // addresses
      if (req.ar_valid && resp.ar_ready) begin
        arq.push_back(req.ar); art.push_back(sched(req.ar, now + LATENCY, r_bus_free));
        ar_count++; rd_out++;
      end
      if (req.aw_valid && resp.aw_ready) begin
        awq.push_back(req.aw); awt.push_back(sched(req.aw, now + 1, w_bus_free));
        aw_count++; wr_out++;
      end
      if (rd_out > max_rd_out) max_rd_out = rd_out;
      if (wr_out > max_wr_out) max_wr_out = wr_out;
      now++;
      if (STALL) begin
        stall_a <= ($urandom_range(0, 3) == 0);
        stall_w <= ($urandom_range(0, 3) == 0);
        stall_r <= ($urandom_range(0, 3) == 0);
      end
    end
  end

endmodule
