// lut_addr_gen: turns a "Fetch LUT" command into a memory row address.
//
// All look-up tables live in the ROM layer of the same PE memory, each at a
// fixed starting row (its LUT index). A fetch names the table type and an
// offset computed from the operand; the row is base[type] + offset. Offsets
// beyond the table's length are clamped to its last entry.
//
// The base-plus-offset scheme is the published one; the table bases and
// lengths (spare_pkg) and the clamping are this design's choice.
// Purely combinational. The tables end below row 1024, so the top address
// bits are constant 0 for the default table layout; they stay in the port
// because the output addresses the whole 8192-row array.
module lut_addr_gen
  import spare_pkg::*;
(
  input  lut_e              lut_type,
  input  logic [7:0]        offset,
  output logic [ADDR_W-1:0] addr
);

  logic [7:0] off_c;

  always_comb begin
    off_c = offset;
    unique case (lut_type)
      LUT_ISYN: addr = ADDR_W'(LUT_ISYN_BASE) + ADDR_W'(off_c);
      LUT_DVDT: addr = ADDR_W'(LUT_DVDT_BASE) + ADDR_W'(off_c);
      LUT_EXP: begin
        if (int'(offset) >= 2**EXP_K) off_c = 8'(2**EXP_K - 1);
        addr = ADDR_W'(LUT_EXP_BASE) + ADDR_W'(off_c);
      end
      default: addr = ADDR_W'(LUT_ISYN_BASE) + ADDR_W'(off_c);
    endcase
  end

endmodule
