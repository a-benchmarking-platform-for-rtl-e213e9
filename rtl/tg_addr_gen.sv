// tg_addr_gen -- address generation of one traffic generator direction.
//
// Produces the start address of each burst of a batch. The traffic generator
// has one instance for reads and one for writes; both are loaded at batch
// start with the same configuration, so a read batch revisits exactly the
// addresses a write batch with the same configuration wrote.
//
//  * Sequential mode: offset starts at 0 and advances, for each burst, by the
//    bytes that burst covers ((len+1) beats for INCR and WRAP, one beat for
//    FIXED), modulo the region size span_mask+1.
//  * Random mode: a 32-bit Galois LFSR (x^32+x^22+x^2+x+1) seeded with `seed`
//    gives the offset, masked by span_mask and aligned to a beat.
//  The address is base + offset.
//
// Interface: `init` (one cycle) restarts the sequence; `next` advances it.
// `addr` is valid combinationally from the cycle after `init` and always
// shows the current address; it changes the cycle after `next`.
// The paper gives the two addressing modes and the burst types; the step, the
// LFSR polynomial and the region (base/span) are choices of this design.
module tg_addr_gen
  import tg_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       init,
  input  logic       next,
  input  addr_mode_e mode,
  input  burst_e     burst,
  input  logic [7:0] len,
  input  logic [31:0] seed,
  input  addr_t      base,
  input  addr_t      span_mask,
  output addr_t      addr
);

  localparam logic [31:0] LFSR_TAPS = 32'h8020_0003;

  addr_t       offset_q;
  logic [31:0] lfsr_q;
  addr_t       step;
  addr_t       beat_mask;

  assign beat_mask = ~((addr_t'(1) << BEAT_SHIFT) - addr_t'(1));
  assign step = (burst == BURST_FIXED) ? (addr_t'(1) << BEAT_SHIFT)
                                       : ((addr_t'(len) + addr_t'(1)) << BEAT_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      offset_q <= '0;
      lfsr_q   <= 32'h1;
    end else if (init) begin
      offset_q <= '0;
      lfsr_q   <= (seed == 32'h0) ? 32'h1 : seed;
    end else if (next) begin
      offset_q <= (offset_q + step) & span_mask;
      lfsr_q   <= lfsr_q[0] ? ((lfsr_q >> 1) ^ LFSR_TAPS) : (lfsr_q >> 1);
    end
  end

  always_comb begin
    if (mode == ADDR_RND)
      addr = base + (addr_t'(lfsr_q) & span_mask & beat_mask);
    else
      addr = base + offset_q;
  end

endmodule
