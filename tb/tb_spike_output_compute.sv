// tb_spike_output_compute: self-checking test of the compute core.
// How: random operands. Neuron: v_new must be the 8-bit saturated sum of
// Vmem, the dVmem/dt table value and the synaptic current taken from the ROM
// tables, and fire must be Vmem > V_th. Plasticity: the reduce outputs are
// looped through the exp table (as the ROM fetch does) and the new weight
// must be w + a_plus*e^(-dt*tau_inv) (saturated) within 1 LSB of the real
// exponential, with no change when the input never spiked. Combinational.
module tb_spike_output_compute;
  import spare_pkg::*;
  logic signed [7:0] v_old, v_new, v_th, w_old, w_new;
  logic [31:0] dvdt_lut, isyn, t_pre; logic fire, pre_seen;
  logic [15:0] t_now; logic [7:0] tau_inv, a_plus, exp_rsh; logic [EXP_K-1:0] exp_d;
  logic [15:0] exp_r, exp_val;
  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction
  int checks = 0, failures = 0, fires = 0;
  spike_output_compute dut (.v_old, .dvdt_lut, .isyn, .v_new, .v_th, .fire, .t_now, .t_pre, .tau_inv,
    .pre_seen, .exp_d, .exp_rsh, .exp_r, .exp_lut(32'(EXP_TABLE[exp_d])), .exp_rsh_q(exp_rsh), .exp_r_q(exp_r),
    .a_plus, .w_old, .w_new, .exp_val);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  initial begin
    for (int k = 0; k < 4000; k++) begin
      int vs, ew, dt; real e, wr;
      v_old = 8'($urandom); v_th = 8'($urandom);
      dvdt_lut = rom_word(ADDR_W'(LUT_DVDT_BASE + int'(unsigned'(v_old))));
      isyn = rom_word(ADDR_W'(LUT_ISYN_BASE + $urandom_range(0, 255)));
      w_old = 8'($urandom); a_plus = 8'($urandom_range(0, 64)); tau_inv = 8'($urandom_range(0, 255));
      t_now = 16'($urandom_range(0, 300)); t_pre = ($urandom_range(0, 4) == 0) ? 0 : 32'($urandom_range(1, int'(t_now) + 1));
      #1;
      vs = int'(v_old) + int'($signed(dvdt_lut)) + int'($signed(isyn));
      vs = vs > 127 ? 127 : vs < -128 ? -128 : vs;
      chk(int'(v_new) == vs, "v_new");
      chk(fire == (v_old > v_th), "fire");
      if (fire) fires++;
      chk(pre_seen == (t_pre != 0), "pre_seen");
      if (t_pre == 0) chk(w_new == w_old, "no update without pre spike");
      else begin
        dt = int'(t_now) + 1 - int'(t_pre); if (dt > 255) dt = 255;
        e = $exp(-(real'(dt) * real'(tau_inv)) / 256.0);
        if (real'(dt) * real'(tau_inv) > 32767.0) e = $exp(-128.0);
        wr = real'(w_old) + real'(a_plus) * e;
        ew = int'(w_new);
        if (wr > 127.0) chk(ew == 127, "w saturate");
        else chk(fabs(real'(ew) - wr) <= 1.0 + real'(a_plus) / 200.0, "w_new");
      end
    end
    chk(fires > 0, "some fire");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
