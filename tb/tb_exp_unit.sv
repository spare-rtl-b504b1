// tb_exp_unit: self-checking test of the range-reduction exponential.
// How: for random x <= 0 (Q8.8) the reduce half gives d, the shift and r; the
// test fetches 2^(d/2^K) from the same table the ROM holds, runs the
// reconstruct half and compares e^x (Q1.15) with the real exponential:
// error within 1/2^(2K) relative + 2 LSB (error of e^r ~ 1 + r). It also
// checks N = M*2^K + d against floor(x/(ln2/2^K)). Combinational.
module tb_exp_unit;
  import spare_pkg::*;
  logic signed [15:0] x; logic [EXP_K-1:0] d; logic [7:0] rsh; logic [15:0] r, e;
  function automatic real fabs(input real v); return v < 0.0 ? -v : v; endfunction
  int checks = 0, failures = 0;
  exp_unit dut (.x, .d, .rsh, .r, .lut_val(EXP_TABLE[d]), .rsh_in(rsh), .r_in(r), .e);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < 4000; k++) begin
      real xr, ref_e, tol; int n_ref, n_got;
      x = (k < 200) ? -16'(k) : -16'($urandom_range(0, 4095));
      #1;
      xr = real'(x) / 256.0;
      ref_e = $exp(xr) * 32768.0;
      tol = ref_e / 256.0 + 2.0;
      checks++;
      if (fabs(real'(e) - ref_e) > tol) begin failures++; $display("FAIL x=%0d e=%0d ref=%f", x, e, ref_e); end
      n_ref = int'($floor(xr / (0.6931471805599453 / 16.0) + 1e-9));
      n_got = -int'(rsh) * 16 + int'(d);
      checks++;
      if (n_got != n_ref && n_got != n_ref + 1 && n_got != n_ref - 1) begin failures++; $display("FAIL N x=%0d got %0d ref %0d", x, n_got, n_ref); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
