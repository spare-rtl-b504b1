// spike_output_compute: arithmetic core of a PE ("spike output computation").
//
// Combinational datapath used by the event controller at its evaluate
// steps. It holds:
//   * neuron model (LIF): dV = LUT_DVDT(V) + I_syn, V' = sat8(V + dV), where
//     LUT_DVDT(V) is the leak term -g_L(V - E_L)dt/C and I_syn = LUT_ISYN(w)
//     were fetched from the ROM layer of the PE memory;
//   * threshold test: fire = V > V_th;
//   * plasticity (exponential STDP, potentiation): for an output neuron that
//     fired at step t_now and an input that last spiked at t_pre,
//     x = -(t_now - t_pre) * tau_inv (Q8.8) goes to exp_unit, and after the
//     LUT(d) fetch dw = (a_plus * e^x) >> 15, w' = sat8(w + dw).
//     A stored spike time of 0 means "never spiked" and gives dw = 0.
//     Spike times are stored as step+1.
// The LUT-based evaluation, the threshold test and the e^dt weight update
// follow the published flow; the fixed-point formats, the saturation, the
// potentiation-only rule and the time-stamp convention are this design's.
module spike_output_compute
  import spare_pkg::*;
(
  // neuron model
  input  logic signed [7:0]  v_old,
  input  logic [DATA_W-1:0]  dvdt_lut,
  input  logic [DATA_W-1:0]  isyn,
  output logic signed [7:0]  v_new,
  // threshold
  input  logic signed [7:0]  v_th,
  output logic               fire,
  // plasticity: reduce half
  input  logic [CNT_W-1:0]   t_now,
  input  logic [DATA_W-1:0]  t_pre,
  input  logic [7:0]         tau_inv,
  output logic               pre_seen,
  output logic [EXP_K-1:0]   exp_d,
  output logic [7:0]         exp_rsh,
  output logic [15:0]        exp_r,
  // plasticity: reconstruct half
  input  logic [DATA_W-1:0]  exp_lut,
  input  logic [7:0]         exp_rsh_q,
  input  logic [15:0]        exp_r_q,
  input  logic [7:0]         a_plus,
  input  logic signed [7:0]  w_old,
  output logic signed [7:0]  w_new,
  output logic [15:0]        exp_val
);

  logic signed [31:0] vsum, wsum;
  logic [31:0]        dt;
  logic [31:0]        xmag;
  logic signed [15:0] x;
  logic [31:0]        dw;

  // neuron
  always_comb begin
    vsum  = 32'(v_old) + $signed(dvdt_lut) + $signed(isyn);
    if (vsum > 127)       v_new = 8'sd127;
    else if (vsum < -128) v_new = -8'sd128;
    else                  v_new = vsum[7:0];
    fire = (v_old > v_th);
  end

  // plasticity, reduce
  always_comb begin
    pre_seen = (t_pre != '0);
    dt       = 32'(t_now) + 32'd1 - t_pre;
    if (!pre_seen || dt > 32'd255) dt = 32'd255;
    xmag = dt * 32'(tau_inv);                 // Q8.8 magnitude
    x    = (xmag > 32'd32767) ? -16'sd32768 : -$signed(16'(xmag));
  end

  exp_unit #(.K(EXP_K)) u_exp (
    .x      (x),
    .d      (exp_d),
    .rsh    (exp_rsh),
    .r      (exp_r),
    .lut_val(exp_lut[15:0]),
    .rsh_in (exp_rsh_q),
    .r_in   (exp_r_q),
    .e      (exp_val)
  );

  // plasticity, reconstruct
  always_comb begin
    dw   = (32'(a_plus) * 32'(exp_val)) >> 15;
    wsum = 32'(w_old) + (pre_seen ? $signed(dw) : 32'sd0);
    if (wsum > 127) w_new = 8'sd127;
    else            w_new = wsum[7:0];
  end

endmodule
