// tb_rsram_mem_ctrl: self-checking test of the R-SRAM memory controller with
// the array. How: random RAM writes and reads are checked against a shadow
// memory; ROM reads of LUT rows must return the hard-wired ROM word and must
// leave the row's RAM data unchanged (buffer copy and restore). Timing: a RAM
// access responds 2 cycles after acceptance and a ROM read 6 cycles after
// (1:3, the published R-SRAM RAM/ROM latency ratio); rom_mode is observed.
module tb_rsram_mem_ctrl;
  import spare_pkg::*;
  logic clk = 0, rst_n = 0, req_valid = 0, req_ready, resp_valid, rom_mode;
  mem_req_t req = '0; logic [31:0] resp_rdata;
  logic [ADDR_W-1:0] arr_addr; logic arr_wl1, arr_wl2, arr_we; logic [31:0] arr_wdata, arr_rdata;
  logic [31:0] shadow [1024];
  int checks = 0, failures = 0, rom_cycles = 0;
  rsram_mem_ctrl dut (.clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_rdata,
                      .arr_addr, .arr_wl1, .arr_wl2, .arr_we, .arr_wdata, .arr_rdata, .rom_mode);
  rsram_array u_arr (.clk, .addr(arr_addr), .wl1(arr_wl1), .wl2(arr_wl2), .we(arr_we), .wdata(arr_wdata), .rdata(arr_rdata));
  always #5 clk = ~clk;
  always @(posedge clk) if (rom_mode) rom_cycles++;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end endtask

  task automatic access(input mem_op_e op, input int a, input logic [31:0] wd, output logic [31:0] rd, output int lat);
    @(negedge clk); req_valid = 1; req.op = op; req.addr = ADDR_W'(a); req.wdata = wd;
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0; req = '0; lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    rd = resp_rdata;
  endtask

  initial begin
    logic [31:0] rd; int lat;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 1024; a++) begin
      shadow[a] = $urandom; access(MEM_RAM_WR, a, shadow[a], rd, lat);
      chk(lat == 2, "ram write latency 2");
    end
    for (int k = 0; k < 3000; k++) begin
      int a; a = $urandom_range(0, 1023);
      case ($urandom_range(0, 2))
        0: begin shadow[a] = $urandom; access(MEM_RAM_WR, a, shadow[a], rd, lat); chk(lat == 2, "ram write latency"); end
        1: begin access(MEM_RAM_RD, a, 0, rd, lat); chk(lat == 2, "ram read latency"); chk(rd == shadow[a], "ram read data"); end
        default: begin
          int r; r = $urandom_range(0, 2**EXP_K + 511);
          access(MEM_ROM_RD, r, 0, rd, lat);
          chk(lat == 6, "rom read latency 6");
          chk(rd == rom_word(ADDR_W'(r)), "rom data");
          access(MEM_RAM_RD, r, 0, rd, lat);
          chk(rd == shadow[r], "ram data restored after rom read");
        end
      endcase
    end
    chk(rom_cycles > 0, "rom mode used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
