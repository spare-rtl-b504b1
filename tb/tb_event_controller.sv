// tb_event_controller: self-checking test of the PE event controller.
// How: the controller is wired, as inside a PE, to the spike buffers, the
// R-SRAM memory controller and array, the compute core and the state
// updater. Weights, Vmem and spike times are preloaded into the array;
// random input spike words are pushed for several time steps with training
// on. A reference model of the published flow (skip '0' inputs, synapse and
// neuron model per output neuron, threshold, potentiation, reset) predicts
// the output spike words and the final RAM contents. Counted mechanisms:
// skipped '0' inputs, processed '1' inputs, fires, weight updates, ROM reads.
// Timing: the cost of one '1' input, measured as the difference between a
// step with all '1' and all '0' inputs, must be 25*n_out cycles more than a '0' input
// (training off), from the 2/6-cycle RAM/ROM latencies of the memory.
module tb_event_controller;
  import spare_pkg::*;
  localparam int NI = 40, NO = 6, NS = 4;
  localparam int WB = 100, VB = 60, TB = 20;

  logic clk = 0, rst_n = 0;
  pe_cfg_t cfg;
  logic in_valid = 0, in_ready; logic [31:0] in_data = '0;
  logic ib_hv, ib_hb, ib_pb, ib_pw; logic [4:0] ib_hp; logic [5:0] ib_cnt;
  logic ob_iv, ob_ir, out_valid, out_ready = 1; logic [31:0] ob_id, out_data; logic [5:0] ob_cnt;
  logic mrv, mrr, mresp; mem_req_t mreq; logic [31:0] mrdata;
  logic [ADDR_W-1:0] aa; logic awl1, awl2, awe; logic [31:0] awd, ard;
  logic signed [7:0] v_old, v_new, w_old, w_new; logic [31:0] dvdt, isyn, tpre, explut;
  logic fire, pre_seen; logic [15:0] tnow, exp_r, exp_rq, exp_val; logic [EXP_K-1:0] exp_d; logic [7:0] rsh, rshq;
  logic [31:0] so, sn, swd; logic [1:0] sl; logic [7:0] sb; logic ssel;
  logic idle, wait_in, step_done; pe_stats_t stats;
  int checks = 0, failures = 0;

  spike_input_buffer u_ib (.clk, .rst_n, .push_valid(in_valid), .push_ready(in_ready), .push_data(in_data),
    .head_valid(ib_hv), .head_bit(ib_hb), .head_pos(ib_hp), .pop_bit(ib_pb), .pop_word(ib_pw), .count(ib_cnt));
  spike_output_buffer u_ob (.clk, .rst_n, .in_valid(ob_iv), .in_ready(ob_ir), .in_data(ob_id),
    .out_valid, .out_ready, .out_data, .count(ob_cnt));
  rsram_mem_ctrl u_mc (.clk, .rst_n, .req_valid(mrv), .req_ready(mrr), .req(mreq), .resp_valid(mresp),
    .resp_rdata(mrdata), .arr_addr(aa), .arr_wl1(awl1), .arr_wl2(awl2), .arr_we(awe), .arr_wdata(awd), .arr_rdata(ard), .rom_mode());
  rsram_array u_arr (.clk, .addr(aa), .wl1(awl1), .wl2(awl2), .we(awe), .wdata(awd), .rdata(ard));
  event_controller dut (.clk, .rst_n, .cfg,
    .in_head_valid(ib_hv), .in_head_bit(ib_hb), .in_head_pos(ib_hp), .in_pop_bit(ib_pb), .in_pop_word(ib_pw),
    .out_valid(ob_iv), .out_ready(ob_ir), .out_data(ob_id),
    .mem_req_valid(mrv), .mem_req_ready(mrr), .mem_req(mreq), .mem_resp_valid(mresp), .mem_resp_rdata(mrdata),
    .cc_v_old(v_old), .cc_dvdt_lut(dvdt), .cc_isyn(isyn), .cc_v_new(v_new), .cc_fire(fire), .cc_t_now(tnow),
    .cc_t_pre(tpre), .cc_exp_d(exp_d), .cc_exp_rsh(rsh), .cc_exp_r(exp_r), .cc_exp_lut(explut),
    .cc_exp_rsh_q(rshq), .cc_exp_r_q(exp_rq), .cc_w_old(w_old), .cc_w_new(w_new),
    .su_old_word(so), .su_lane(sl), .su_new_byte(sb), .su_sel_word(ssel), .su_new_word(sn), .su_wdata(swd),
    .idle, .wait_in, .step_done, .stats);
  spike_output_compute u_cc (.v_old, .dvdt_lut(dvdt), .isyn, .v_new, .v_th(cfg.v_th), .fire, .t_now(tnow),
    .t_pre(tpre), .tau_inv(cfg.tau_inv), .pre_seen, .exp_d, .exp_rsh(rsh), .exp_r, .exp_lut(explut),
    .exp_rsh_q(rshq), .exp_r_q(exp_rq), .a_plus(cfg.a_plus), .w_old, .w_new, .exp_val);
  state_update u_su (.old_word(so), .lane(sl), .new_byte(sb), .sel_word(ssel), .new_word(sn), .wdata(swd));

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

  task automatic load_ram();
    for (int i = 0; i < NI; i++) for (int j = 0; j < NO; j++) u_arr.mem[WB + (i*NO+j)/4][8*((i*NO+j)%4) +: 8] = W[i][j];
    for (int j = 0; j < NO; j++) u_arr.mem[VB + j/4][8*(j%4) +: 8] = V[j];
    for (int i = 0; i < NI; i++) u_arr.mem[TB + i] = 32'(T[i]);
  endtask

  task automatic push_word(input logic [31:0] w);
    @(negedge clk); in_valid = 1; in_data = w; #1; while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask

  // one run of NS steps; returns cycle count from enable to idle
  task automatic run(input logic [NI-1:0] bits [NS], output int cycles);
    cfg.enable = 0; @(negedge clk);
    for (int s = 0; s < int'(cfg.n_steps); s++) begin push_word(bits[s][31:0]); push_word(32'(bits[s][NI-1:32])); end
    @(negedge clk); cfg.enable = 1; cycles = 0;
    @(negedge clk);
    while (!idle) begin @(negedge clk); cycles++; end
    cfg.enable = 0;
  endtask

  logic [31:0] got_out [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) got_out.push_back(out_data);

  initial begin
    logic [NI-1:0] bits [NS]; int cyc0, cyc1, ones;
    cfg = '0; cfg.n_in = NI; cfg.n_out = NO; cfg.w_base = WB; cfg.v_base = VB; cfg.t_base = TB;
    cfg.n_steps = NS; cfg.v_th = 8'sd24; cfg.v_reset = -8'sd5; cfg.tau_inv = 8'd60; cfg.a_plus = 8'd6; cfg.training = 1;
    for (int i = 0; i < NI; i++) begin T[i] = 0; for (int j = 0; j < NO; j++) W[i][j] = 8'($urandom_range(0, 40) - 12); end
    for (int j = 0; j < NO; j++) V[j] = 8'($urandom_range(0, 10));
    load_ram();
    repeat (3) @(negedge clk); rst_n = 1;
    // random training run
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < NI; i++) bits[s][i] = ($urandom_range(0, 3) == 0);
      model_step(s, bits[s]);
    end
    run(bits, cyc0);
    repeat (5) @(negedge clk);
    chk(got_out.size() == exp_out.size(), "output word count");
    for (int k = 0; k < exp_out.size() && k < got_out.size(); k++) chk(got_out[k] == exp_out[k], $sformatf("output word %0d %h exp %h", k, got_out[k], exp_out[k]));
    for (int j = 0; j < NO; j++) chk(u_arr.mem[VB + j/4][8*(j%4) +: 8] == V[j], $sformatf("Vmem %0d", j));
    for (int i = 0; i < NI; i++) for (int j = 0; j < NO; j++) chk(u_arr.mem[WB + (i*NO+j)/4][8*((i*NO+j)%4) +: 8] == W[i][j], $sformatf("weight %0d,%0d", i, j));
    for (int i = 0; i < NI; i++) chk(u_arr.mem[TB + i] == 32'(T[i]), "spike time");
    ones = int'(stats.in_one);
    chk(stats.in_zero > 0, "zero inputs skipped");
    chk(stats.in_one > 0, "one inputs processed");
    chk(stats.fires > 0, "neurons fired");
    chk(stats.w_updates > 0, "weights updated");
    chk(stats.rom_rd == 2 * ones * NO + stats.w_updates, "ROM reads = 2 per synaptic event + 1 per weight update");
    chk(stats.steps == NS, "steps");
    $display("stats: zero=%0d one=%0d fires=%0d wupd=%0d rom=%0d ram_rd=%0d ram_wr=%0d", stats.in_zero, stats.in_one, stats.fires, stats.w_updates, stats.rom_rd, stats.ram_rd, stats.ram_wr);
    // timing: all-zero versus all-one inputs, inference, high threshold (no fire)
    cfg.training = 0; cfg.v_th = 8'sd127; cfg.n_steps = 1;
    bits[0] = '0; run(bits, cyc0);
    bits[0] = '1; run(bits, cyc1);
    $display("cycles all-zero %0d all-one %0d", cyc0, cyc1);
    chk((cyc1 - cyc0) == NI * 25 * NO, "cost of a '1' input is 25*n_out cycles, a '0' input 1 cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
