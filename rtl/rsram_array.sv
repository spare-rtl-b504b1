// rsram_array: ROM-embedded SRAM (R-SRAM) bit-cell array of one PE.
//
// Each row is an ordinary SRAM word, but every 6T cell has its left access
// transistor (AXL) tied to one of two word lines, WL1 or WL2. The tie is made
// at design time and is the embedded ROM bit: ROM '1' -> AXL on WL1,
// ROM '0' -> AXL on WL2 (rom_word() in spare_pkg gives the pattern).
//
// Behaviour modelled per cell, following the published description:
//   * WL1 = WL2 = ON  : normal SRAM read or write of the whole row.
//   * a write with only one word line ON reaches only the cells whose AXL
//     sits on that line; the other cells keep their value. Writing all-ones
//     with both lines ON and then all-zeros with only WL2 ON therefore leaves
//     the ROM pattern in the row (the ROM-mode sequence of rsram_mem_ctrl).
//   * reads are issued with both word lines ON.
// That a cell written through AXL alone always flips (the "5T write" that
// write-assist circuits make reliable) is this model's simplification.
//
// Interface: one port, synchronous. wl1/wl2 select the addressed row; we=1
// writes wdata through the active lines at the clock edge; we=0 reads, and
// rdata holds the row one cycle later. No reset: the array is memory.
module rsram_array
  import spare_pkg::*;
#(
  parameter int WORDS = MEM_WORDS,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic [AW-1:0]     addr,
  input  logic              wl1,
  input  logic              wl2,
  input  logic              we,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [WORDS];
  logic [DATA_W-1:0] rom_bits;
  logic [DATA_W-1:0] wmask;

  // ROM pattern of the addressed row: bit = 1 -> AXL on WL1, 0 -> AXL on WL2
  assign rom_bits = rom_word(ADDR_W'(addr));
  assign wmask    = (rom_bits & {DATA_W{wl1}}) | (~rom_bits & {DATA_W{wl2}});

  always_ff @(posedge clk) begin
    if (we && (wl1 || wl2))
      mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
    else if (!we && wl1 && wl2)
      rdata <= mem[addr];
  end

  // A read with one word line off would sense through half the cells only.
  a_read_both_lines: assert property (@(posedge clk) (!we && (wl1 || wl2)) |-> (wl1 && wl2));

endmodule
