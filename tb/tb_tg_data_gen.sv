// tb_tg_data_gen -- checks the write data of tg_data_gen against the pattern
// formula computed here, that every word is non-zero, that data read back
// unchanged passes the check and that any single flipped bit fails it.
module tb_tg_data_gen;
  import tg_pkg::*;

  logic pattern;
  logic [31:0] seed;
  addr_t wr_addr, rd_addr;
  data_t wr_data, rd_data;
  logic  rd_mismatch;
  int checks = 0, failures = 0;

  tg_data_gen dut (.pattern, .seed, .wr_addr, .wr_data, .rd_addr, .rd_data, .rd_mismatch);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] exp_word(addr_t a, int i, bit p, logic [31:0] s);
    logic [31:0] w, rs;
    w  = a + 32'(4 * i);
    rs = (i == 0) ? s : ((s << i) | (s >> (32 - i)));
    if (p) w ^= rs;
    return w | 32'h1;
  endfunction

  initial begin
    int bad, zero;
    for (int t = 0; t < 200; t++) begin
      pattern = t[0];
      seed    = (t % 7 == 0) ? 32'h0 : $urandom;
      wr_addr = (t == 0) ? 32'h0 : ($urandom & ~32'h3F);
      #1;
      bad = 0; zero = 0;
      for (int i = 0; i < AXI_DATA_W / 32; i++) begin
        if (wr_data[i*32 +: 32] != exp_word(wr_addr, i, pattern, seed)) bad++;
        if (wr_data[i*32 +: 32] == 0) zero++;
      end
      check(bad == 0, $sformatf("pattern %0d at %h", pattern, wr_addr));
      check(zero == 0, "non-zero words");
      rd_addr = wr_addr; rd_data = wr_data;
      #1 check(!rd_mismatch, "clean read passes");
      rd_data[$urandom_range(0, AXI_DATA_W - 1)] ^= 1'b1;
      #1 check(rd_mismatch, "flipped bit detected");
      rd_data = wr_data; rd_addr = wr_addr + 32'(BEAT_BYTES);
      #1 check(rd_mismatch, "data from another address detected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
