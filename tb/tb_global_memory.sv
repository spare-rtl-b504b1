// tb_global_memory: self-checking test of the global spike memory.
// How: random writes are mirrored in a shadow array; reads must return the
// shadow contents one cycle after the read strobe and hold when idle.
module tb_global_memory;
  import spare_pkg::*;
  logic clk = 0, we = 0, re = 0; logic [11:0] addr = '0; logic [31:0] wdata = '0, rdata;
  logic [31:0] shadow [4096];
  int checks = 0, failures = 0;
  global_memory dut (.clk, .we, .re, .addr, .wdata, .rdata);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); we = 1; addr = 12'(a); wdata = $urandom; shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3000; k++) begin
      logic [11:0] a; a = 12'($urandom);
      if ($urandom_range(0, 1) == 0) begin
        @(negedge clk); we = 1; addr = a; wdata = $urandom; shadow[a] = wdata;
        @(negedge clk); we = 0;
      end else begin
        @(negedge clk); re = 1; addr = a;
        @(negedge clk); re = 0; checks++;
        if (rdata !== shadow[a]) begin failures++; $display("FAIL rd %0d %h exp %h", a, rdata, shadow[a]); end
        @(negedge clk); checks++;
        if (rdata !== shadow[a]) begin failures++; $display("FAIL hold %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
