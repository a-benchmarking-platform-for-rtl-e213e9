// tg_data_gen -- data generation and read-data checking of a traffic generator.
//
// Write data is a function of the beat's byte address, so the data read back
// from any address can be checked against what was written there without
// storing it. Each 32-bit word i of a beat at address A is
//   pattern 0: (A + 4*i)                     with bit 0 forced to 1
//   pattern 1: (A + 4*i) ^ rotl(seed, i)     with bit 0 forced to 1
// Forcing bit 0 makes every word non-zero.
//
// Interface: purely combinational. wr_addr -> wr_data; rd_addr with rd_data
// -> rd_mismatch (1 when any word differs from the expected pattern).
// The paper states that non-zero data sequences are generated and read data
// is checked against the data written before; the two patterns are this
// design's choice.
module tg_data_gen
  import tg_pkg::*;
(
  input  logic        pattern,
  input  logic [31:0] seed,
  input  addr_t       wr_addr,
  output data_t       wr_data,
  input  addr_t       rd_addr,
  input  data_t       rd_data,
  output logic        rd_mismatch
);

  localparam int WORDS = AXI_DATA_W / 32;

  function automatic data_t gen(addr_t a, logic p, logic [31:0] s);
    data_t d;
    logic [31:0] w, rs;
    for (int i = 0; i < WORDS; i++) begin
      w  = 32'(a) + 32'(i * 4);
      rs = (s << (i % 32)) | (s >> ((32 - (i % 32)) % 32));
      if (p) w = w ^ rs;
      d[i*32 +: 32] = w | 32'h1;
    end
    return d;
  endfunction

  assign wr_data     = gen(wr_addr, pattern, seed);
  assign rd_mismatch = (rd_data != gen(rd_addr, pattern, seed));

endmodule
