// tb_state_update: self-checking test of the state updater.
// How: random old words, lanes and bytes; the write word must equal the old
// word with exactly the chosen byte replaced, or the new whole word when
// sel_word is set. Combinational.
module tb_state_update;
  import spare_pkg::*;
  logic [31:0] old_word, new_word, wdata; logic [1:0] lane; logic [7:0] new_byte; logic sel_word;
  int checks = 0, failures = 0;
  state_update dut (.old_word, .lane, .new_byte, .sel_word, .new_word, .wdata);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < 2000; k++) begin
      logic [31:0] e;
      old_word = $urandom; new_word = $urandom; lane = 2'($urandom); new_byte = 8'($urandom); sel_word = 1'($urandom);
      #1;
      e = old_word; e[8*lane +: 8] = new_byte;
      if (sel_word) e = new_word;
      checks++;
      if (wdata !== e) begin failures++; $display("FAIL %h lane %0d byte %h sel %0d -> %h exp %h", old_word, lane, new_byte, sel_word, wdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
