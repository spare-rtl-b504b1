// tb_spike_output_buffer: self-checking test of the spike output FIFO.
// How: random push/pop traffic against a queue model; checks data order,
// count, that the buffer accepts exactly 32 words (published buffer depth)
// before in_ready drops, and that the first word is visible one cycle after
// its push.
module tb_spike_output_buffer;
  import spare_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [31:0] in_data = '0, out_data; logic [5:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0;
  spike_output_buffer dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .count);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); chk(!out_valid && count == 0, "empty after reset");
    // latency: push one word, visible next cycle
    in_valid = 1; in_data = 32'hA5A5_0001; @(negedge clk); in_valid = 0;
    chk(out_valid && out_data == 32'hA5A5_0001, "first word next cycle");
    out_ready = 1; @(negedge clk); out_ready = 0;
    // fill to depth
    for (int k = 0; k < 40; k++) begin
      in_valid = 1; in_data = 32'(k);
      #1; if (k < 32) chk(in_ready, "ready below depth"); else chk(!in_ready, "full at depth");
      @(negedge clk);
    end
    in_valid = 0; chk(count == 32, "count 32");
    for (int k = 0; k < 32; k++) begin
      out_ready = 1; #1; chk(out_valid && out_data == 32'(k), "drain order"); @(negedge clk);
    end
    out_ready = 0; chk(!out_valid, "empty after drain");
    // random traffic
    for (int k = 0; k < 3000; k++) begin
      logic pv, pr; logic [31:0] d;
      pv = 1'($urandom); pr = 1'($urandom); d = $urandom;
      in_valid = pv; in_data = d; out_ready = pr; #1;
      if (out_valid) chk(q.size() > 0 && out_data == q[0], "random order");
      chk(int'(count) == q.size(), "random count");
      if (out_valid && pr) void'(q.pop_front());
      if (pv && in_ready) q.push_back(d);
      @(negedge clk);
    end
    in_valid = 0; out_ready = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
