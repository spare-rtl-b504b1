// tb_rsram_array: self-checking test of the ROM-embedded SRAM array model.
// How: RAM mode (both word lines) writes and reads random words; single
// word-line writes must only reach the cells whose access transistor sits on
// the raised line; the ROM-mode sequence "write all 1s with WL1=WL2=ON, write
// 0s with WL1=OFF/WL2=ON, read" must return the hard-wired ROM word of every
// LUT row. Timing: read data is checked one cycle after the read.
module tb_rsram_array;
  import spare_pkg::*;
  logic clk = 0;
  logic [ADDR_W-1:0] addr = '0;
  logic wl1 = 0, wl2 = 0, we = 0;
  logic [DATA_W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [DATA_W-1:0] shadow [MEM_WORDS];

  rsram_array dut (.clk, .addr, .wl1, .wl2, .we, .wdata, .rdata);

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic op(input logic [ADDR_W-1:0] a, input logic l1, l2, w, input logic [31:0] d);
    @(negedge clk); addr = a; wl1 = l1; wl2 = l2; we = w; wdata = d;
    @(negedge clk); wl1 = 0; wl2 = 0; we = 0;
  endtask

  task automatic chk(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    // RAM mode
    for (int k = 0; k < 200; k++) begin
      logic [ADDR_W-1:0] a; logic [31:0] d;
      a = ADDR_W'($urandom_range(0, MEM_WORDS-1)); d = $urandom;
      op(a, 1, 1, 1, d); shadow[a] = d;
      op(a, 1, 1, 0, 0); chk("ram read", rdata, d);
    end
    // single word-line writes reach only the matching cells
    for (int k = 0; k < 100; k++) begin
      logic [ADDR_W-1:0] a; logic [31:0] d0, d1, rb;
      a = ADDR_W'($urandom_range(0, 600)); d0 = $urandom; d1 = $urandom;
      rb = rom_word(a);
      op(a, 1, 1, 1, d0);
      op(a, 1, 0, 1, d1);                       // only ROM-'1' cells written
      op(a, 1, 1, 0, 0); chk("wl1 write", rdata, (d0 & ~rb) | (d1 & rb));
      op(a, 0, 1, 1, d0);                       // only ROM-'0' cells written
      op(a, 1, 1, 0, 0); chk("wl2 write", rdata, d1 & rb | d0 & ~rb);
    end
    // ROM-mode sequence reproduces the ROM word
    for (int a = 0; a < 540; a++) begin
      op(ADDR_W'(a), 1, 1, 1, 32'hFFFF_FFFF);
      op(ADDR_W'(a), 0, 1, 1, 32'h0000_0000);
      op(ADDR_W'(a), 1, 1, 0, 0); chk("rom read", rdata, rom_word(ADDR_W'(a)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
