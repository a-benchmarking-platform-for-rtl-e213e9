// traffic_generator -- AXI4 master that runs one batch of memory traffic.
//
// One traffic generator sits in front of each memory channel. On `start` it
// latches its run-time configuration (tg_cfg_t) and issues `batch` read
// bursts, `batch` write bursts, or both at once (mixed), each of len+1 beats
// of the configured burst type, at addresses from two tg_addr_gen instances
// (reads and writes follow the same address sequence). The read side (AR, R)
// and the write side (AW, W, B) are handled by independent logic, so reads
// and writes of a mixed batch overlap. Written data comes from tg_data_gen;
// with check_en, every read beat is compared with the pattern expected at its
// address. tg_perf_counters measures the batch.
//
// Signaling modes:
//  * non-blocking: a new burst address is issued as soon as the previous one
//    is accepted (at most MAX_OUT bursts outstanding per direction); RREADY
//    and BREADY rise in the cycle after the slave's VALID is seen and drop
//    after each handshake, like a generic device; write data of a burst is
//    sent once its address has been accepted.
//  * blocking: as non-blocking, but a new read or write address is issued only
//    when no read and no write transaction is outstanding.
//  * aggressive: RREADY and BREADY are held high throughout the batch, and
//    write data is sent as soon as its address is presented, without waiting
//    for AWREADY.
//
// Interface: `start` pulse (ignored while busy), `busy` while running, `done`
// from the end of a batch until the next start, `stats` valid when done.
// All AXI IDs are 0, so responses return in order. The next address is
// presented in the cycle right after its predecessor is accepted, so one
// burst per cycle per direction can be issued.
// From the paper: the five AXI4 channels handled separately, burst lengths 1
// to 128 of fixed/incrementing/wrapping type, sequential/random addressing,
// the three signaling modes, data checking and the counters. The exact
// handshake timing of each mode, MAX_OUT, the in-order single ID and the
// meaning of "mixed" (batch reads and batch writes issued concurrently) are
// this design's choices.
// Lint note: a linter may report rst_n as used both asynchronously (the
// flops) and synchronously; the synchronous use is only the `disable iff` of
// the AXI4 stability assertions at the end.
module traffic_generator
  import tg_pkg::*;
#(
  parameter int unsigned MAX_OUT  = 8,     // outstanding bursts per direction (power of two)
  parameter bit          EXTENDED = 1'b1   // build the extended performance counters
) (
  input  logic      clk,
  input  logic      rst_n,
  input  tg_cfg_t   cfg,
  input  logic      start,
  output logic      busy,
  output logic      done,
  output tg_stats_t stats,
  output axi_req_t  m_axi_req,
  input  axi_resp_t m_axi_resp
);

  localparam int PW = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1;

  typedef struct packed {
    addr_t      addr;
    logic [7:0] len;
    burst_e     burst;
    cnt_t       ts;
  } burst_ent_t;

  typedef struct packed {
    addr_t      addr;
    logic [7:0] len;
    burst_e     burst;
  } wburst_ent_t;

  // ---------------------------------------------------------------- control
  tg_cfg_t cfg_q;
  logic    running_q, done_q;
  cnt_t    now_q;

  cnt_t ar_issued_q, rd_completed_q;
  cnt_t aw_issued_q, aw_acc_q, w_bursts_q, wr_completed_q;
  cnt_t rd_out, wr_out;

  logic rd_en, wr_en, rd_busy, wr_busy, issue_ok, aggressive;

  assign rd_en      = (cfg_q.op == OP_READ)  || (cfg_q.op == OP_MIXED);
  assign wr_en      = (cfg_q.op == OP_WRITE) || (cfg_q.op == OP_MIXED);
  assign rd_busy    = running_q && rd_en && (rd_completed_q != cfg_q.batch);
  assign wr_busy    = running_q && wr_en && (wr_completed_q != cfg_q.batch);
  assign rd_out     = ar_issued_q - rd_completed_q;
  assign wr_out     = aw_issued_q - wr_completed_q;
  assign issue_ok   = (cfg_q.sig != SIG_BLOCKING) || (rd_out == '0 && wr_out == '0);
  assign aggressive = (cfg_q.sig == SIG_AGGRESSIVE);

  assign busy = running_q;
  assign done = done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q     <= '0;
      running_q <= 1'b0;
      done_q    <= 1'b0;
      now_q     <= '0;
    end else begin
      now_q <= now_q + cnt_t'(1);
      if (start && !running_q) begin
        cfg_q     <= cfg;
        running_q <= 1'b1;
        done_q    <= 1'b0;
      end else if (running_q && !rd_busy && !wr_busy) begin
        running_q <= 1'b0;
        done_q    <= 1'b1;
      end
    end
  end

  logic init;
  assign init = start && !running_q;

  // -------------------------------------------------------- address sources
  addr_t rd_addr_gen, wr_addr_gen;
  logic  ar_load, aw_load;

  tg_addr_gen u_rd_addr (
    .clk, .rst_n, .init, .next(ar_load),
    .mode(cfg_q.addr_mode), .burst(cfg_q.burst), .len(cfg_q.len), .seed(cfg.seed),
    .base(cfg_q.base), .span_mask(cfg_q.span_mask), .addr(rd_addr_gen)
  );

  tg_addr_gen u_wr_addr (
    .clk, .rst_n, .init, .next(aw_load),
    .mode(cfg_q.addr_mode), .burst(cfg_q.burst), .len(cfg_q.len), .seed(cfg.seed),
    .base(cfg_q.base), .span_mask(cfg_q.span_mask), .addr(wr_addr_gen)
  );

  // The seed is loaded at init from `cfg`; everything else comes from the
  // configuration latched for the running batch.

  // --------------------------------------------------------------- read side
  logic       ar_valid_q, rready_q;
  axi_ax_t    ar_q;
  burst_ent_t rq [MAX_OUT];
  logic [PW:0] rq_wr_q, rq_rd_q;
  logic [7:0] rbeat_q;
  logic       ar_hs, r_hs;
  burst_ent_t rhead;
  addr_t      r_beat_addr;
  logic       r_mismatch;

  assign ar_hs  = ar_valid_q && m_axi_resp.ar_ready;
  assign r_hs   = m_axi_resp.r_valid && m_axi_req.r_ready;
  assign ar_load = (!ar_valid_q || m_axi_resp.ar_ready) && rd_busy &&
                   (ar_issued_q != cfg_q.batch) && (rd_out < cnt_t'(MAX_OUT)) && issue_ok;
  assign rhead  = rq[rq_rd_q[PW-1:0]];
  assign r_beat_addr = beat_addr(rhead.addr, rhead.len, rhead.burst, rbeat_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_valid_q     <= 1'b0;
      ar_q           <= '0;
      ar_issued_q    <= '0;
      rd_completed_q <= '0;
      rq_wr_q        <= '0;
      rq_rd_q        <= '0;
      rbeat_q        <= '0;
      rready_q       <= 1'b0;
    end else if (init) begin
      ar_valid_q     <= 1'b0;
      ar_issued_q    <= '0;
      rd_completed_q <= '0;
      rq_wr_q        <= '0;
      rq_rd_q        <= '0;
      rbeat_q        <= '0;
      rready_q       <= 1'b0;
    end else begin
      if (ar_load) begin
        ar_valid_q  <= 1'b1;
        ar_q        <= '{id: '0, addr: rd_addr_gen, len: cfg_q.len,
                         size: 3'(BEAT_SHIFT), burst: cfg_q.burst};
        ar_issued_q <= ar_issued_q + cnt_t'(1);
      end else if (ar_hs) begin
        ar_valid_q  <= 1'b0;
      end
      if (ar_hs) rq_wr_q <= rq_wr_q + 1'b1;
      if (r_hs) begin
        if (m_axi_resp.r.last) begin
          rbeat_q        <= '0;
          rq_rd_q        <= rq_rd_q + 1'b1;
          rd_completed_q <= rd_completed_q + cnt_t'(1);
        end else begin
          rbeat_q <= rbeat_q + 8'd1;
        end
      end
      // generic-device ready: raise after VALID is seen, drop after a transfer
      rready_q <= m_axi_resp.r_valid && !r_hs;
    end
  end

  // -------------------------------------------------------------- write side
  logic       aw_valid_q, bready_q;
  axi_ax_t    aw_q;
  wburst_ent_t wq [MAX_OUT];
  logic [PW:0] wq_wr_q, wq_rd_q;
  logic [7:0] wbeat_q;
  logic       aw_hs, w_hs, b_hs, w_valid;
  wburst_ent_t whead;
  addr_t      w_beat_addr;
  data_t      w_data;

  assign aw_hs   = aw_valid_q && m_axi_resp.aw_ready;
  assign b_hs    = m_axi_resp.b_valid && m_axi_req.b_ready;
  assign aw_load = (!aw_valid_q || m_axi_resp.aw_ready) && wr_busy &&
                   (aw_issued_q != cfg_q.batch) && (wr_out < cnt_t'(MAX_OUT)) && issue_ok;
  assign whead   = wq[wq_rd_q[PW-1:0]];
  assign w_valid = (wq_wr_q != wq_rd_q) && (aggressive || (aw_acc_q != w_bursts_q));
  assign w_hs    = w_valid && m_axi_resp.w_ready;
  assign w_beat_addr = beat_addr(whead.addr, whead.len, whead.burst, wbeat_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_valid_q     <= 1'b0;
      aw_q           <= '0;
      aw_issued_q    <= '0;
      aw_acc_q       <= '0;
      w_bursts_q     <= '0;
      wr_completed_q <= '0;
      wq_wr_q        <= '0;
      wq_rd_q        <= '0;
      wbeat_q        <= '0;
      bready_q       <= 1'b0;
    end else if (init) begin
      aw_valid_q     <= 1'b0;
      aw_issued_q    <= '0;
      aw_acc_q       <= '0;
      w_bursts_q     <= '0;
      wr_completed_q <= '0;
      wq_wr_q        <= '0;
      wq_rd_q        <= '0;
      wbeat_q        <= '0;
      bready_q       <= 1'b0;
    end else begin
      if (aw_load) begin
        aw_valid_q  <= 1'b1;
        aw_q        <= '{id: '0, addr: wr_addr_gen, len: cfg_q.len,
                         size: 3'(BEAT_SHIFT), burst: cfg_q.burst};
        aw_issued_q <= aw_issued_q + cnt_t'(1);
        wq_wr_q     <= wq_wr_q + 1'b1;
      end else if (aw_hs) begin
        aw_valid_q  <= 1'b0;
      end
      if (aw_hs) aw_acc_q <= aw_acc_q + cnt_t'(1);
      if (w_hs) begin
        if (wbeat_q == whead.len) begin
          wbeat_q    <= '0;
          wq_rd_q    <= wq_rd_q + 1'b1;
          w_bursts_q <= w_bursts_q + cnt_t'(1);
        end else begin
          wbeat_q <= wbeat_q + 8'd1;
        end
      end
      if (b_hs) wr_completed_q <= wr_completed_q + cnt_t'(1);
      bready_q <= m_axi_resp.b_valid && !b_hs;
    end
  end

  // burst queues: storage only, no reset needed
  always_ff @(posedge clk) begin
    if (ar_hs)
      rq[rq_wr_q[PW-1:0]] <= '{addr: ar_q.addr, len: ar_q.len, burst: ar_q.burst, ts: now_q};
    if (aw_load)
      wq[wq_wr_q[PW-1:0]] <= '{addr: wr_addr_gen, len: cfg_q.len, burst: cfg_q.burst};
  end

  // ------------------------------------------------------------ data + check
  tg_data_gen u_data (
    .pattern(cfg_q.pattern), .seed(cfg_q.seed),
    .wr_addr(w_beat_addr), .wr_data(w_data),
    .rd_addr(r_beat_addr), .rd_data(m_axi_resp.r.data), .rd_mismatch(r_mismatch)
  );

  // --------------------------------------------------------------- counters
  logic r_err, b_err;
  assign r_err = r_hs && ((cfg_q.check_en && r_mismatch) || (m_axi_resp.r.resp != 2'b00));
  assign b_err = b_hs && (m_axi_resp.b.resp != 2'b00);

  tg_perf_counters #(.EXTENDED(EXTENDED)) u_perf (
    .clk, .rst_n,
    .clear      (init),
    .rd_busy    (rd_busy),
    .wr_busy    (wr_busy),
    .rd_done    (r_hs && m_axi_resp.r.last),
    .wr_done    (b_hs),
    .lat_valid  (r_hs && (rbeat_q == 8'd0)),
    .lat_cycles (now_q - rhead.ts),
    .err        (r_err || b_err),
    .stats      (stats)
  );

  // ------------------------------------------------------------- AXI outputs
  always_comb begin
    m_axi_req          = '0;
    m_axi_req.ar_valid = ar_valid_q;
    m_axi_req.ar       = ar_q;
    m_axi_req.r_ready  = aggressive ? rd_busy : rready_q;
    m_axi_req.aw_valid = aw_valid_q;
    m_axi_req.aw       = aw_q;
    m_axi_req.w_valid  = w_valid;
    m_axi_req.w.data   = w_data;
    m_axi_req.w.strb   = '1;
    m_axi_req.w.last   = (wbeat_q == whead.len);
    m_axi_req.b_ready  = aggressive ? wr_busy : bready_q;
  end

  // ------------------------------------------------------------- assertions
  // AXI4: a VALID, once raised, holds with stable payload until READY.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axi_req.ar_valid && !m_axi_resp.ar_ready) |=> (m_axi_req.ar_valid && $stable(m_axi_req.ar)));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axi_req.aw_valid && !m_axi_resp.aw_ready) |=> (m_axi_req.aw_valid && $stable(m_axi_req.aw)));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_axi_req.w_valid && !m_axi_resp.w_ready) |=> (m_axi_req.w_valid && $stable(m_axi_req.w)));

endmodule
