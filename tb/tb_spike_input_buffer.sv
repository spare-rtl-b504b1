// tb_spike_input_buffer: self-checking test of the spike input buffer.
// How: random spike words are pushed while the consumer pops bits, or drops
// the rest of a word, at random; a bit-level queue model checks head_bit,
// head_pos and the word count. Also checks that exactly 32 words (published
// buffer depth) are accepted before push_ready drops and that a pushed word
// is at the head one cycle after the push.
module tb_spike_input_buffer;
  import spare_pkg::*;
  logic clk = 0, rst_n = 0, push_valid = 0, push_ready, head_valid, head_bit, pop_bit = 0, pop_word = 0;
  logic [31:0] push_data = '0; logic [4:0] head_pos; logic [5:0] count;
  logic [31:0] q [$]; int pos = 0;
  int checks = 0, failures = 0;
  spike_input_buffer dut (.clk, .rst_n, .push_valid, .push_ready, .push_data, .head_valid, .head_bit, .head_pos, .pop_bit, .pop_word, .count);
  always #5 clk = ~clk;
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); chk(!head_valid && count == 0, "empty after reset");
    push_valid = 1; push_data = 32'h0000_0005; @(negedge clk); push_valid = 0;
    chk(head_valid && head_bit == 1 && head_pos == 0, "head next cycle");
    pop_bit = 1; @(negedge clk); chk(head_bit == 0 && head_pos == 1, "bit advance");
    @(negedge clk); chk(head_bit == 1 && head_pos == 2, "bit 2");
    pop_bit = 0; pop_word = 1; @(negedge clk); pop_word = 0; chk(!head_valid, "pop_word empties");
    for (int k = 0; k < 36; k++) begin
      push_valid = 1; push_data = 32'(k); #1;
      if (k < 32) chk(push_ready, "ready below depth"); else chk(!push_ready, "full at depth");
      @(negedge clk);
    end
    push_valid = 0; chk(count == 32, "count 32");
    pop_word = 1; repeat (32) @(negedge clk); pop_word = 0; chk(!head_valid, "drained");
    for (int k = 0; k < 6000; k++) begin
      logic pv, pb, pw; logic [31:0] d;
      pv = ($urandom_range(0, 9) < 2); pb = 1'($urandom); pw = ($urandom_range(0, 99) == 0); d = $urandom;
      push_valid = pv; push_data = d; pop_bit = pb && q.size() > 0; pop_word = pw && q.size() > 0; #1;
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(head_valid && head_bit == q[0][pos] && int'(head_pos) == pos, "head");
      if (pop_word && q.size() > 0) begin void'(q.pop_front()); pos = 0; end
      else if (pop_bit && q.size() > 0) begin
        if (pos == 31) begin void'(q.pop_front()); pos = 0; end else pos++;
      end
      if (pv && push_ready) q.push_back(d);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
