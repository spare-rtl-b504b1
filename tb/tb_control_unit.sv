// tb_control_unit: self-checking test of the control unit with the global
// memory. The PEs are emulated: the testbench accepts broadcasts with a
// random ready (bus stalls) and answers gathers with a per-PE numbered word.
// Network: layer 0 on PEs 0-1 (one output word each), layer 1 on PE 2,
// whose input is layer 0's output. Checks: layer-0 broadcasts carry the
// input vectors of each step from global memory in order; gathered words
// land at dst_base + ts*dst_stride + pe*out_words; layer 1 receives, for each
// step, exactly what layer 0 produced for that step, and never before it was
// gathered; a layer-1 broadcast happens between layer-0 broadcasts
// (inter-layer pipelining); stall, broadcast and gather counters; done;
// host access to the registers and global memory.
module tb_control_unit;
  import spare_pkg::*;
  localparam int N = 4, NS = 5, IN_WORDS = 3;
  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_ready, host_rvalid; host_req_t host_req = '0; logic [31:0] host_rdata;
  logic gm_we, gm_re; logic [11:0] gm_addr; logic [31:0] gm_wdata, gm_rdata;
  logic bc_valid, bc_ready; logic [TAG_W-1:0] bc_tag; logic [31:0] bc_data;
  logic [1:0] g_sel, h_sel; logic g_valid, g_ready; logic [31:0] g_data;
  logic h_valid, h_ready = 1, h_rvalid = 0; pe_host_req_t h_req; logic [31:0] h_rdata = '0;
  logic busy, done; logic [31:0] stall_cycles, bc_words, gather_words;
  int checks = 0, failures = 0;
  int gcount [N];
  logic [31:0] bc0 [$], bc1 [$];
  int order [$];     // tag sequence of broadcast words

  control_unit #(.NUM_PE(N), .MAX_LAYERS(4), .GMEM_AW(12)) dut (.*);
  global_memory u_gm (.clk, .we(gm_we), .re(gm_re), .addr(gm_addr), .wdata(gm_wdata), .rdata(gm_rdata));

  function automatic logic [31:0] gword(input int p, input int k); return 32'hC000_0000 | (p << 16) | k; endfunction
  always_comb begin g_valid = 1'b1; g_data = gword(int'(g_sel), gcount[g_sel]); end
  logic rdy;
  always @(negedge clk) rdy = ($urandom_range(0, 3) != 0);
  assign bc_ready = rdy;
  always @(posedge clk) if (rst_n) begin
    if (g_valid && g_ready) gcount[g_sel] <= gcount[g_sel] + 1;
    if (bc_valid && bc_ready) begin
      order.push_back(int'(bc_tag));
      if (bc_tag == 0) bc0.push_back(bc_data); else bc1.push_back(bc_data);
    end
  end

  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end endtask
  task automatic hw(input host_tgt_e t, input int a, input logic [31:0] d);
    @(negedge clk); host_valid = 1; host_req.tgt = t; host_req.we = 1; host_req.addr = 16'(a); host_req.wdata = d;
    #1; while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_valid = 0;
  endtask
  task automatic hr(input host_tgt_e t, input int a, output logic [31:0] d);
    @(negedge clk); host_valid = 1; host_req.tgt = t; host_req.we = 0; host_req.addr = 16'(a);
    #1; while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_valid = 0; d = host_rdata; chk(host_rvalid, "host read answered next cycle");
  endtask

  initial begin
    logic [31:0] in_vec [NS][IN_WORDS]; logic [31:0] d; int first1, saw_interleave;
    for (int p = 0; p < N; p++) gcount[p] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) for (int w = 0; w < IN_WORDS; w++) begin in_vec[s][w] = $urandom; hw(HOST_GMEM, 100 + s*IN_WORDS + w, in_vec[s][w]); end
    // layer 0: src 100 stride 3, 3 words, dst 500 stride 2, PEs 0..1, 1 word each
    hw(HOST_CU, 16, 100); hw(HOST_CU, 17, IN_WORDS); hw(HOST_CU, 18, IN_WORDS); hw(HOST_CU, 19, 500); hw(HOST_CU, 20, 2);
    hw(HOST_CU, 21, 0); hw(HOST_CU, 22, 2); hw(HOST_CU, 23, 1);
    // layer 1: src 500 stride 2, 2 words, dst 800 stride 1, PE 2, 1 word
    hw(HOST_CU, 24, 500); hw(HOST_CU, 25, 2); hw(HOST_CU, 26, 2); hw(HOST_CU, 27, 800); hw(HOST_CU, 28, 1);
    hw(HOST_CU, 29, 2); hw(HOST_CU, 30, 1); hw(HOST_CU, 31, 1);
    hw(HOST_CU, 1, NS); hw(HOST_CU, 2, 2);
    hr(HOST_CU, 1, d); chk(d == NS, "n_steps register");
    hr(HOST_CU, 2, d); chk(d == 2, "n_layers register");
    hr(HOST_GMEM, 101, d); chk(d == in_vec[0][1], "host global memory read");
    hw(HOST_CU, 0, 1);
    @(negedge clk); chk(busy, "busy after start");
    @(negedge clk); host_valid = 1; host_req.tgt = HOST_GMEM; host_req.we = 0; #1; chk(!host_ready, "global memory locked during run"); @(negedge clk); host_valid = 0;
    while (!done) @(negedge clk);
    hr(HOST_CU, 0, d); chk(d[1:0] == 2'b10, "status done, not busy");
    chk(bc0.size() == NS * IN_WORDS, "layer-0 broadcast words");
    for (int s = 0; s < NS; s++) for (int w = 0; w < IN_WORDS; w++) chk(bc0[s*IN_WORDS + w] == in_vec[s][w], "layer-0 input order");
    chk(gcount[0] == NS && gcount[1] == NS && gcount[2] == NS && gcount[3] == 0, "gathers per PE");
    for (int s = 0; s < NS; s++) for (int p = 0; p < 2; p++) begin hr(HOST_GMEM, 500 + 2*s + p, d); chk(d == gword(p, s), "layer-0 output placement"); end
    for (int s = 0; s < NS; s++) begin hr(HOST_GMEM, 800 + s, d); chk(d == gword(2, s), "layer-1 output placement"); end
    chk(bc1.size() == NS * 2, "layer-1 broadcast words");
    for (int s = 0; s < NS; s++) for (int p = 0; p < 2; p++) chk(bc1[2*s + p] == gword(p, s), "layer-1 input is layer-0 output of the same step");
    first1 = -1; saw_interleave = 0;
    for (int k = 0; k < order.size(); k++) begin
      if (order[k] == 1 && first1 < 0) first1 = k;
      if (order[k] == 0 && first1 >= 0) saw_interleave = 1;
    end
    chk(first1 >= IN_WORDS, "layer 1 starts after layer-0 step 0 was broadcast");
    chk(saw_interleave == 1, "layers pipelined: layer-0 broadcasts continue after layer 1 started");
    chk(stall_cycles > 0, "bus stalls counted");
    chk(bc_words == NS * (IN_WORDS + 2), "broadcast word counter");
    chk(gather_words == NS * 3, "gather word counter");
    $display("stalls=%0d bc=%0d gather=%0d", stall_cycles, bc_words, gather_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
