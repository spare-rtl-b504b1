// tb_lut_addr_gen: self-checking test of the LUT address generator.
// How: every (table, offset) pair is applied and the row must equal the
// table's LUT index plus the offset; exp offsets past the 2^K-entry table
// are clamped to its last row. Combinational: no clock.
module tb_lut_addr_gen;
  import spare_pkg::*;
  lut_e t; logic [7:0] off; logic [ADDR_W-1:0] addr;
  int checks = 0, failures = 0;
  lut_addr_gen dut (.lut_type(t), .offset(off), .addr);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int o = 0; o < 256; o++) begin
      int e;
      t = LUT_ISYN; off = 8'(o); #1; checks++; if (int'(addr) != LUT_ISYN_BASE + o) begin failures++; $display("FAIL isyn %0d -> %0d", o, addr); end
      t = LUT_DVDT; #1; checks++; if (int'(addr) != LUT_DVDT_BASE + o) begin failures++; $display("FAIL dvdt %0d -> %0d", o, addr); end
      t = LUT_EXP;  #1; e = (o > 2**EXP_K - 1) ? 2**EXP_K - 1 : o;
      checks++; if (int'(addr) != LUT_EXP_BASE + e) begin failures++; $display("FAIL exp %0d -> %0d", o, addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
