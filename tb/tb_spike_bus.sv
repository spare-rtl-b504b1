// tb_spike_bus: self-checking test of the shared spike bus (4 PEs).
// How: random PE tags, enables and readies. A broadcast must reach exactly
// the enabled PEs with the broadcast tag, and is accepted only when all of
// them can take it (stall otherwise); gather and host channels must route the
// selected PE's handshake and data. Combinational.
module tb_spike_bus;
  import spare_pkg::*;
  localparam int N = 4;
  logic bc_valid, bc_ready; logic [TAG_W-1:0] bc_tag; logic [31:0] bc_data;
  logic [N-1:0] pe_in_valid, pe_in_ready, pe_enabled, pe_out_valid, pe_out_ready;
  logic [31:0] pe_in_data; logic [TAG_W-1:0] pe_tag [N];
  logic [1:0] g_sel, h_sel; logic g_valid, g_ready; logic [31:0] g_data; logic [31:0] pe_out_data [N];
  logic h_valid, h_ready, h_rvalid; pe_host_req_t h_req, pe_host_req; logic [31:0] h_rdata;
  logic [N-1:0] pe_host_valid, pe_host_ready, pe_host_rvalid; logic [31:0] pe_host_rdata [N];
  int checks = 0, failures = 0, stalls = 0;
  spike_bus #(.NUM_PE(N)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  initial begin
    for (int k = 0; k < 3000; k++) begin
      logic [N-1:0] match; logic all_ready; int rv;
      bc_valid = 1'($urandom); bc_tag = TAG_W'($urandom_range(0, 2)); bc_data = $urandom;
      pe_in_ready = N'($urandom); pe_enabled = N'($urandom); pe_out_valid = N'($urandom);
      g_sel = 2'($urandom); g_ready = 1'($urandom);
      h_valid = 1'($urandom); h_sel = 2'($urandom); h_req = pe_host_req_t'({$urandom, $urandom});
      pe_host_ready = N'($urandom); pe_host_rvalid = '0; rv = $urandom_range(0, N);
      if (rv < N) pe_host_rvalid[rv] = 1'b1;
      for (int p = 0; p < N; p++) begin
        pe_tag[p] = TAG_W'($urandom_range(0, 2)); pe_out_data[p] = $urandom; pe_host_rdata[p] = $urandom;
      end
      #1;
      match = '0; all_ready = 1;
      for (int p = 0; p < N; p++) if (pe_enabled[p] && pe_tag[p] == bc_tag) begin match[p] = 1; if (!pe_in_ready[p]) all_ready = 0; end
      chk(bc_ready == all_ready, "bc_ready all-or-none");
      chk(pe_in_valid == (bc_valid && all_ready ? match : '0) || pe_in_valid == (bc_valid ? match : '0) && all_ready, "pe_in_valid");
      if (bc_valid && all_ready) chk(pe_in_valid == match, "broadcast reaches tag group");
      if (bc_valid && !all_ready) begin stalls++; chk((pe_in_valid & pe_in_ready) == '0 || pe_in_valid == '0, "no partial broadcast"); end
      if (|pe_in_valid) chk(pe_in_data == bc_data, "bc data");
      chk(g_valid == pe_out_valid[g_sel], "g_valid");
      if (g_valid) chk(g_data == pe_out_data[g_sel], "g_data");
      for (int p = 0; p < N; p++) chk(pe_out_ready[p] == (g_ready && p == int'(g_sel)), "pe_out_ready");
      for (int p = 0; p < N; p++) chk(pe_host_valid[p] == (h_valid && p == int'(h_sel)), "pe_host_valid");
      chk(pe_host_req == h_req, "host req");
      chk(h_ready == pe_host_ready[h_sel], "h_ready");
      chk(h_rvalid == (rv < N), "h_rvalid");
      if (rv < N) chk(h_rdata == pe_host_rdata[rv], "h_rdata");
    end
    chk(stalls > 0, "stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
