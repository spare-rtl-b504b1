// tb_pe: self-checking test of one processing element through its ports.
// How: the configuration registers, weights, Vmem and spike times are written
// over the host port; random spike words are streamed into the input port
// for several training time steps; the output port is drained. A reference
// model of the published PE flow predicts the output spike words; afterwards
// Vmem, weights and spike times are read back over the host port and
// compared. Also checks that the PE starts on its first input word, that
// host RAM access is refused while it computes, the activity counters
// (skipped '0' inputs, '1' inputs, fires, weight updates, ROM reads) and the
// 25*n_out-cycle cost of a '1' input in inference.
module tb_pe;
  import spare_pkg::*;
  localparam int NI = 48, NO = 5, NS = 3;
  localparam int WB = 200, VB = 10, TB = 100;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, host_valid = 0, host_ready, host_rvalid;
  logic [31:0] in_data = '0, out_data, host_rdata; pe_host_req_t host_req = '0;
  logic [TAG_W-1:0] tag; logic enabled, idle, computing, step_done; pe_stats_t stats;
  int checks = 0, failures = 0;
  pe_cfg_t cfg;

  pe dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
          .host_valid, .host_ready, .host_req, .host_rvalid, .host_rdata,
          .tag, .enabled, .idle, .computing, .step_done, .stats);

  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end endtask

  // ---- reference model -------------------------------------------------------
  logic signed [7:0] W [NI][NO]; logic signed [7:0] V [NO]; int T [NI];
  logic [31:0] exp_out [$];

  function automatic logic signed [7:0] sat8(input int v); return v > 127 ? 8'sd127 : v < -128 ? -8'sd128 : 8'(v); endfunction
  function automatic int exp_fx(input int x);   // integer replica of the exponential datapath
    int n, m, rem, r, d, rs; longint sc;
    n = (x * EXP_INV_LN2) >>> 16; rem = (x <<< 8) - n * EXP_LN2_K;
    r = rem < 0 ? 0 : rem > 65535 ? 65535 : rem; d = n & (2**EXP_K - 1); m = n >>> EXP_K;
    rs = m > 0 ? 0 : m < -255 ? 255 : -m;
    sc = (longint'(EXP_TABLE[d]) * (65536 + r)) >> 16;
    if (rs > 16) return 0; sc = sc >> rs; return sc > 65535 ? 65535 : int'(sc);
  endfunction
  task automatic model_step(input int s, input logic [NI-1:0] bits);
    logic [31:0] ow;
    for (int i = 0; i < NI; i++) if (bits[i]) begin
      if (cfg.training) T[i] = s + 1;
      for (int j = 0; j < NO; j++) V[j] = sat8(int'(V[j]) - (int'(V[j]) >>> LIF_LEAK_SHIFT) + (int'(W[i][j]) >>> ISYN_SHIFT));
    end
    ow = '0;
    for (int j = 0; j < NO; j++) if (V[j] > cfg.v_th) begin
      ow[j] = 1;
      if (cfg.training) for (int i = 0; i < NI; i++) if (T[i] != 0) begin
        int dt, xm, e, dw; dt = s + 1 - T[i]; if (dt > 255) dt = 255;
        xm = dt * int'(cfg.tau_inv); e = exp_fx(xm > 32767 ? -32768 : -xm);
        dw = (int'(cfg.a_plus) * e) >> 15; W[i][j] = (int'(W[i][j]) + dw > 127) ? 8'sd127 : 8'(int'(W[i][j]) + dw);
      end
      V[j] = cfg.v_reset;
    end
    exp_out.push_back(ow);
  endtask

  task automatic hw(input logic c, input int a, input logic [31:0] d);
    @(negedge clk); host_valid = 1; host_req.we = 1; host_req.cfg = c; host_req.addr = 16'(a); host_req.wdata = d;
    #1; while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_valid = 0; host_req = '0;
    repeat (3) @(negedge clk);
  endtask
  task automatic hr(input int a, output logic [31:0] d);
    @(negedge clk); host_valid = 1; host_req.we = 0; host_req.cfg = 0; host_req.addr = 16'(a);
    #1; while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_valid = 0; host_req = '0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask
  task automatic push_word(input logic [31:0] w);
    @(negedge clk); in_valid = 1; in_data = w; #1; while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask
  task automatic write_cfg();
    hw(1, 1, 32'(cfg.n_in)); hw(1, 2, 32'(cfg.n_out)); hw(1, 3, 32'(cfg.w_base)); hw(1, 4, 32'(cfg.v_base));
    hw(1, 5, 32'(cfg.t_base)); hw(1, 6, {16'd0, cfg.v_reset, cfg.v_th}); hw(1, 7, 32'(cfg.n_steps));
    hw(1, 8, {16'd0, cfg.a_plus, cfg.tau_inv}); hw(1, 0, {24'd0, cfg.tag, 2'b0, cfg.training, cfg.enable});
  endtask

  logic [31:0] got_out [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) got_out.push_back(out_data);

  initial begin
    logic [NI-1:0] bits [NS]; logic [31:0] d, word; int c0, c1; logic refused;
    cfg = '0; cfg.n_in = NI; cfg.n_out = NO; cfg.w_base = WB; cfg.v_base = VB; cfg.t_base = TB; cfg.tag = 4'd3;
    cfg.n_steps = NS; cfg.v_th = 8'sd15; cfg.v_reset = -8'sd3; cfg.tau_inv = 8'd50; cfg.a_plus = 8'd20; cfg.training = 1;
    for (int i = 0; i < NI; i++) begin T[i] = 0; for (int j = 0; j < NO; j++) W[i][j] = 8'($urandom_range(0, 80)); end
    for (int j = 0; j < NO; j++) V[j] = 8'($urandom_range(0, 8));
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < (NI*NO+3)/4; k++) begin
      word = '0; for (int b = 0; b < 4; b++) if (4*k+b < NI*NO) word[8*b +: 8] = W[(4*k+b)/NO][(4*k+b)%NO];
      hw(0, WB + k, word);
    end
    for (int k = 0; k < (NO+3)/4; k++) begin
      word = '0; for (int b = 0; b < 4; b++) if (4*k+b < NO) word[8*b +: 8] = V[4*k+b];
      hw(0, VB + k, word);
    end
    for (int i = 0; i < NI; i++) hw(0, TB + i, 0);
    cfg.enable = 1; write_cfg();
    chk(tag == 4'd3 && enabled && idle, "configured, idle before input");
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < NI; i++) bits[s][i] = ($urandom_range(0, 2) == 0);
      model_step(s, bits[s]);
    end
    push_word(bits[0][31:0]);
    repeat (2) @(negedge clk);
    chk(!idle, "starts on first input word");
    // host RAM access refused while computing
    @(negedge clk); host_valid = 1; host_req.we = 0; host_req.addr = 16'(VB); #1; refused = !host_ready; @(negedge clk); host_valid = 0;
    chk(refused, "host RAM access refused while computing");
    push_word(32'(bits[0][NI-1:32]));
    for (int s = 1; s < NS; s++) begin push_word(bits[s][31:0]); push_word(32'(bits[s][NI-1:32])); end
    while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(got_out.size() == NS, "one output word per step");
    for (int k = 0; k < NS && k < got_out.size(); k++) chk(got_out[k] == exp_out[k], $sformatf("output %0d %h exp %h", k, got_out[k], exp_out[k]));
    for (int j = 0; j < NO; j++) begin hr(VB + j/4, d); chk(d[8*(j%4) +: 8] == V[j], $sformatf("Vmem %0d", j)); end
    for (int i = 0; i < NI; i++) for (int j = 0; j < NO; j++) begin
      hr(WB + (i*NO+j)/4, d); chk(d[8*((i*NO+j)%4) +: 8] == W[i][j], $sformatf("weight %0d %0d", i, j));
    end
    for (int i = 0; i < NI; i++) begin hr(TB + i, d); chk(d == 32'(T[i]), "spike time"); end
    chk(stats.in_zero > 0 && stats.in_one > 0, "zero skips and one events");
    chk(stats.fires > 0, "fires");
    chk(stats.w_updates > 0, "weight updates");
    chk(stats.rom_rd == 2 * stats.in_one * NO + stats.w_updates, "ROM reads");
    $display("stats: zero=%0d one=%0d fires=%0d wupd=%0d rom=%0d", stats.in_zero, stats.in_one, stats.fires, stats.w_updates, stats.rom_rd);
    // rate: one '1' input in inference costs 25*n_out cycles more than a '0'
    cfg.training = 0; cfg.v_th = 8'sd127; cfg.n_steps = 1; write_cfg();
    push_word(32'h0000_0000); push_word(32'h0000_0000);
    c0 = 0; while (!step_done) begin @(negedge clk); c0++; end
    while (!idle) @(negedge clk);
    push_word(32'h0000_0001); push_word(32'h0000_0000);
    c1 = 0; while (!step_done) begin @(negedge clk); c1++; end
    $display("cycles zero %0d one %0d", c0, c1);
    chk(c1 - c0 == 25 * NO, "cost of one '1' input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
