// tb_tg_addr_gen -- checks the address sequences of tg_addr_gen against a
// reference computed here: sequential INCR/WRAP/FIXED steps with wrap-around
// of the region, and random addresses from the same LFSR polynomial, aligned
// to a beat and confined to the region; restart with `init` repeats them.
module tb_tg_addr_gen;
  import tg_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init = 1'b0, next = 1'b0;
  addr_mode_e mode;
  burst_e     burst;
  logic [7:0] len;
  logic [31:0] seed;
  addr_t base, span, addr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tg_addr_gen dut (.clk, .rst_n, .init, .next, .mode, .burst, .len, .seed,
                   .base, .span_mask(span), .addr);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_init();
    @(negedge clk) init = 1'b1;
    @(negedge clk) init = 1'b0;
  endtask

  task automatic step();
    next = 1'b1;
    @(negedge clk) next = 1'b0;
  endtask

  function automatic logic [31:0] lfsr_next(logic [31:0] x);
    // x^32 + x^22 + x^2 + x + 1, right-shifting Galois form
    logic fb;
    fb = x[0];
    x  = x >> 1;
    if (fb) begin x[31] ^= 1'b1; x[21] ^= 1'b1; x[1] ^= 1'b1; x[0] ^= 1'b1; end
    return x;
  endfunction

  initial begin
    addr_t exp;
    logic [31:0] l;
    addr_t first[8];
    mode = ADDR_SEQ; burst = BURST_INCR; len = 8'd3; seed = 32'h0;
    base = 32'h4000_0000; span = 32'h0000_0FFF;   // 4 KiB region
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // sequential INCR, 4 beats = 256 B per burst, wraps after 16 bursts
    do_init();
    for (int k = 0; k < 20; k++) begin
      exp = base + addr_t'((k * 256) % 4096);
      check(addr == exp, $sformatf("seq incr %0d: %h vs %h", k, addr, exp));
      step();
    end
    // sequential FIXED steps one beat
    burst = BURST_FIXED; do_init();
    for (int k = 0; k < 5; k++) begin
      check(addr == base + addr_t'(k * BEAT_BYTES), "seq fixed");
      step();
    end
    // sequential WRAP, 16 beats = 1 KiB per burst
    burst = BURST_WRAP; len = 8'd15; do_init();
    for (int k = 0; k < 6; k++) begin
      check(addr == base + addr_t'((k * 1024) % 4096), "seq wrap");
      step();
    end
    // random
    mode = ADDR_RND; burst = BURST_INCR; len = 8'd0; seed = 32'hDEAD_BEEF;
    span = 32'h000F_FFFF;
    do_init();
    l = seed;
    for (int k = 0; k < 40; k++) begin
      exp = base + ((l & span) & ~addr_t'(BEAT_BYTES - 1));
      check(addr == exp, $sformatf("rnd %0d: %h vs %h", k, addr, exp));
      check(addr[BEAT_SHIFT-1:0] == '0 && (addr - base) <= span, "rnd in region and aligned");
      if (k < 8) first[k] = addr;
      l = lfsr_next(l);
      step();
    end
    // restart repeats the sequence
    do_init();
    for (int k = 0; k < 8; k++) begin
      check(addr == first[k], "rnd restart repeats");
      step();
    end
    // zero seed still moves
    seed = 32'h0; do_init();
    exp = addr; step(); step();
    check(addr != exp || addr == base, "zero seed handled");
    // no next, no change
    exp = addr;
    repeat (3) @(negedge clk);
    check(addr == exp, "holds without next");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
