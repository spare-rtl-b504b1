// tb_spare_top: end-to-end test of the accelerator with a small two-layer
// network (4 PEs). Layer 0 has 1280 inputs (40 spike words, more than the
// 32-word input buffer, so the broadcast must stall) on PEs 0 and 1 (4 and 3
// neurons); layer 1 takes their two output words (64 inputs, padding bits with
// zero weights) on PE 2 (5 neurons); PE 3 stays disabled. Weights, Vmem and
// spike times are loaded over the host interface, the layer table is written
// to the control unit and a 4-step training run is started.
// Checks against a reference model of every PE: each layer's output spike
// words in global memory, final Vmem and sampled weights in the PEs, the ROM
// read count. Counted mechanisms: skipped '0' spikes, processed '1' spikes,
// fires, STDP weight updates, bus stalls, broadcast during computation of the
// other layer (inter-layer pipelining), and the per-step cycle budget.
module tb_spare_top;
  import spare_pkg::*;
  localparam int NPE = 4, NL = 2, NS = 4, MAXI = 1280, MAXO = 32;
  localparam int L_NIN  [NL] = '{1280, 64};
  localparam int L_PE0  [NL] = '{0, 2};
  localparam int L_NPE  [NL] = '{2, 1};
  localparam int L_VTH  [NL] = '{60, 20};
  localparam int L_WMAX [NL] = '{24, 60};
  localparam int PE_NOUT [NPE] = '{4, 3, 5, 0};
  localparam int SPIKE_PCT = 8;
  localparam int GM_SRC = 0, GM_DST = 1024;

  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_ready, host_rvalid; host_req_t host_req = '0; logic [31:0] host_rdata;
  logic busy, done; pe_stats_t pe_stats [NPE];
  logic [31:0] bus_stall_cycles, bus_bc_words, bus_gather_words, pipeline_overlap_cycles;
  int checks = 0, failures = 0;

  spare_top #(.NUM_PE(NPE), .PE_WORDS(4096)) dut (.clk, .rst_n, .host_valid, .host_ready, .host_req, .host_rvalid, .host_rdata,
    .busy, .done, .pe_stats, .bus_stall_cycles, .bus_bc_words, .bus_gather_words, .pipeline_overlap_cycles);

  always #5 clk = ~clk;
  initial begin #500000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end endtask

  // ---- reference model, one instance per PE ---------------------------------------
  logic signed [7:0] W [NPE][MAXI][MAXO]; logic signed [7:0] V [NPE][MAXO]; int T [NPE][MAXI];
  int pe_layer [NPE]; int pe_wb [NPE], pe_vb [NPE], pe_tb [NPE];
  localparam logic signed [7:0] VRESET = -8'sd4; localparam logic [7:0] TAU = 8'd40, APLUS = 8'd12;

  function automatic logic signed [7:0] sat8(input int v); return v > 127 ? 8'sd127 : v < -128 ? -8'sd128 : 8'(v); endfunction
  function automatic int exp_fx(input int x);
    int n, m, rem, r, d, rs; longint sc;
    n = (x * EXP_INV_LN2) >>> 16; rem = (x <<< 8) - n * EXP_LN2_K;
    r = rem < 0 ? 0 : rem > 65535 ? 65535 : rem; d = n & (2**EXP_K - 1); m = n >>> EXP_K;
    rs = m > 0 ? 0 : m < -255 ? 255 : -m;
    sc = (longint'(EXP_TABLE[d]) * (65536 + r)) >> 16;
    if (rs > 16) return 0; sc = sc >> rs; return sc > 65535 ? 65535 : int'(sc);
  endfunction
  // one time step of PE p (training on); returns the output spike word
  function automatic logic [31:0] model_step(input int p, input int s, input logic [MAXI-1:0] bits);
    int ni, no; logic [31:0] ow;
    ni = L_NIN[pe_layer[p]]; no = PE_NOUT[p];
    for (int i = 0; i < ni; i++) if (bits[i]) begin
      T[p][i] = s + 1;
      for (int j = 0; j < no; j++) V[p][j] = sat8(int'(V[p][j]) - (int'(V[p][j]) >>> LIF_LEAK_SHIFT) + (int'(W[p][i][j]) >>> ISYN_SHIFT));
    end
    ow = '0;
    for (int j = 0; j < no; j++) if (V[p][j] > 8'(L_VTH[pe_layer[p]])) begin
      ow[j] = 1;
      for (int i = 0; i < ni; i++) if (T[p][i] != 0) begin
        int dt, xm, e, dw; dt = s + 1 - T[p][i]; if (dt > 255) dt = 255;
        xm = dt * int'(TAU); e = exp_fx(xm > 32767 ? -32768 : -xm);
        dw = (int'(APLUS) * e) >> 15; W[p][i][j] = (int'(W[p][i][j]) + dw > 127) ? 8'sd127 : 8'(int'(W[p][i][j]) + dw);
      end
      V[p][j] = VRESET;
    end
    return ow;
  endfunction

  // ---- host access ----------------------------------------------------------------
  task automatic hw(input host_tgt_e t, input int pe, input int a, input logic [31:0] d);
    @(negedge clk); host_valid = 1; host_req.tgt = t; host_req.pe = 8'(pe); host_req.we = 1; host_req.addr = 16'(a); host_req.wdata = d;
    #1; while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_valid = 0;
  endtask
  task automatic hr(input host_tgt_e t, input int pe, input int a, output logic [31:0] d);
    @(negedge clk); host_valid = 1; host_req.tgt = t; host_req.pe = 8'(pe); host_req.we = 0; host_req.addr = 16'(a);
    #1; while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_valid = 0;
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask

  function automatic int words(input int bits); return (bits + 31) / 32; endfunction

  logic [MAXI-1:0] lin [NL][NS];       // layer inputs per step (model)
  logic [31:0]     pout [NPE][NS];     // PE output words per step (model)

  initial begin
    logic [31:0] d, word; int nw, cycles; longint sum_zero, sum_one, sum_fire, sum_wu;
    repeat (3) @(negedge clk); rst_n = 1;
    // mapping and initial state
    for (int l = 0; l < NL; l++) for (int q = 0; q < L_NPE[l]; q++) pe_layer[L_PE0[l] + q] = l;
    for (int p = 0; p < NPE; p++) if (PE_NOUT[p] > 0) begin
      int ni, no, l; l = pe_layer[p]; ni = L_NIN[l]; no = PE_NOUT[p];
      pe_wb[p] = 0; pe_vb[p] = (ni * no + 3) / 4; pe_tb[p] = pe_vb[p] + (no + 3) / 4;
      for (int i = 0; i < ni; i++) begin
        T[p][i] = 0;
        for (int j = 0; j < no; j++) W[p][i][j] = (l > 0 && (i % 32) >= PE_NOUT[L_PE0[l-1] + i / 32]) ? 8'sd0 : 8'(int'($urandom_range(0, L_WMAX[l] + L_WMAX[l] / 2)) - L_WMAX[l] / 2);
      end
      for (int j = 0; j < no; j++) V[p][j] = 8'($urandom_range(0, 6));
      for (int k = 0; k < pe_vb[p]; k++) begin
        word = '0; for (int b = 0; b < 4; b++) if (4*k+b < ni*no) word[8*b +: 8] = W[p][(4*k+b)/no][(4*k+b)%no];
        hw(HOST_PE_RAM, p, pe_wb[p] + k, word);
      end
      for (int k = 0; k < (no + 3) / 4; k++) begin
        word = '0; for (int b = 0; b < 4; b++) if (4*k+b < no) word[8*b +: 8] = V[p][4*k+b];
        hw(HOST_PE_RAM, p, pe_vb[p] + k, word);
      end
      for (int i = 0; i < ni; i++) hw(HOST_PE_RAM, p, pe_tb[p] + i, 0);
      hw(HOST_PE_CFG, p, 1, ni); hw(HOST_PE_CFG, p, 2, no); hw(HOST_PE_CFG, p, 3, pe_wb[p]);
      hw(HOST_PE_CFG, p, 4, pe_vb[p]); hw(HOST_PE_CFG, p, 5, pe_tb[p]);
      hw(HOST_PE_CFG, p, 6, {16'd0, VRESET, 8'(L_VTH[l])}); hw(HOST_PE_CFG, p, 7, NS);
      hw(HOST_PE_CFG, p, 8, {16'd0, APLUS, TAU}); hw(HOST_PE_CFG, p, 0, {24'd0, 4'(l), 4'b0011});
    end
    // input spike trains and model
    nw = words(L_NIN[0]);
    for (int s = 0; s < NS; s++) begin
      lin[0][s] = '0;
      for (int i = 0; i < L_NIN[0]; i++) lin[0][s][i] = ($urandom_range(0, 99) < SPIKE_PCT);
      for (int k = 0; k < nw; k++) hw(HOST_GMEM, 0, GM_SRC + s * nw + k, lin[0][s][32*k +: 32]);
    end
    for (int l = 0; l < NL; l++) for (int s = 0; s < NS; s++) begin
      if (l + 1 < NL) lin[l+1][s] = '0;
      for (int q = 0; q < L_NPE[l]; q++) begin
        int p; p = L_PE0[l] + q;
        pout[p][s] = model_step(p, s, lin[l][s]);
        if (l + 1 < NL) lin[l+1][s][32*q +: 32] = pout[p][s];
      end
    end
    // control-unit layer table
    for (int l = 0; l < NL; l++) begin
      int base; base = 16 + 8 * l;
      hw(HOST_CU, 0, base + 0, l == 0 ? GM_SRC : GM_DST * l);
      hw(HOST_CU, 0, base + 1, l == 0 ? nw : L_NPE[l-1]);
      hw(HOST_CU, 0, base + 2, words(L_NIN[l]));
      hw(HOST_CU, 0, base + 3, GM_DST * (l + 1)); hw(HOST_CU, 0, base + 4, L_NPE[l]);
      hw(HOST_CU, 0, base + 5, L_PE0[l]); hw(HOST_CU, 0, base + 6, L_NPE[l]); hw(HOST_CU, 0, base + 7, 1);
    end
    hw(HOST_CU, 0, 1, NS); hw(HOST_CU, 0, 2, NL);
    hw(HOST_CU, 0, 0, 1);
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("run: %0d cycles", cycles);
    // outputs of every layer, step and PE in global memory
    for (int l = 0; l < NL; l++) for (int s = 0; s < NS; s++) for (int q = 0; q < L_NPE[l]; q++) begin
      hr(HOST_GMEM, 0, GM_DST * (l + 1) + s * L_NPE[l] + q, d);
      chk(d == pout[L_PE0[l] + q][s], $sformatf("layer %0d step %0d PE %0d output %h exp %h", l, s, q, d, pout[L_PE0[l] + q][s]));
    end
    // final membrane potentials and a sample of weights read back from the PEs
    sum_zero = 0; sum_one = 0; sum_fire = 0; sum_wu = 0;
    for (int p = 0; p < NPE; p++) if (PE_NOUT[p] > 0) begin
      int no, ni; no = PE_NOUT[p]; ni = L_NIN[pe_layer[p]];
      for (int j = 0; j < no; j++) begin hr(HOST_PE_RAM, p, pe_vb[p] + j / 4, d); chk(d[8*(j%4) +: 8] == V[p][j], $sformatf("PE %0d Vmem %0d", p, j)); end
      for (int k = 0; k < 8; k++) begin
        int i, j; i = $urandom_range(0, ni - 1); j = $urandom_range(0, no - 1);
        hr(HOST_PE_RAM, p, pe_wb[p] + (i*no+j)/4, d); chk(d[8*((i*no+j)%4) +: 8] == W[p][i][j], $sformatf("PE %0d weight %0d,%0d", p, i, j));
      end
      chk(pe_stats[p].steps == NS, "PE ran all steps");
      chk(pe_stats[p].rom_rd == 2 * pe_stats[p].in_one * no + pe_stats[p].w_updates, "ROM reads: 2 per synaptic event, 1 per weight update");
      chk(pe_stats[p].in_zero + pe_stats[p].in_one == NS * ni, "every input either skipped or processed");
      sum_zero += pe_stats[p].in_zero; sum_one += pe_stats[p].in_one; sum_fire += pe_stats[p].fires; sum_wu += pe_stats[p].w_updates;
    end
    $display("mechanisms: zero-skips=%0d one-events=%0d fires=%0d weight-updates=%0d bus-stalls=%0d overlap=%0d bc=%0d gather=%0d",
             sum_zero, sum_one, sum_fire, sum_wu, bus_stall_cycles, pipeline_overlap_cycles, bus_bc_words, bus_gather_words);
    chk(sum_zero > 0, "'0' spikes skipped");
    chk(sum_one > 0, "'1' spikes processed");
    chk(sum_fire > 0, "neurons fired");
    chk(sum_wu > 0, "STDP weight updates");
    chk(bus_stall_cycles > 0, "bus stalled on a full input buffer");
    chk(pipeline_overlap_cycles > 0, "broadcast overlapped computation of another layer");
    chk(bus_bc_words == NS * (40 + 2), "broadcast words");
    chk(bus_gather_words == NS * 3, "gathered words");
    chk(pe_stats[3].steps == 0, "disabled PE stays idle");
    // latency bound: a PE step costs 1 cycle per '0' input, 1+25*n_out per '1'
    // input, and the threshold pass; the whole run cannot be shorter than the
    // busiest PE's event work
    begin
      longint work; work = 0;
      for (int p = 0; p < 3; p++) begin
        longint w; w = pe_stats[p].in_zero + pe_stats[p].in_one * (1 + 25 * PE_NOUT[p] + 3);
        if (w > work) work = w;
      end
      chk(longint'(cycles) > work, "run length covers the event work");
      chk(longint'(cycles) < 4 * (work + 40000 * NS), "run length bounded");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
