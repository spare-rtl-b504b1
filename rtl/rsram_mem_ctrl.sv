// rsram_mem_ctrl: memory controller of the ROM-embedded SRAM of one PE.
//
// Serves one request at a time: RAM read, RAM write or ROM read. RAM accesses
// drive both word lines together and take one array cycle. A ROM read runs
// the six-step sequence of the published R-SRAM ROM mode:
//   1) request accepted          (S_IDLE)
//   2) RAM copy: row -> buffer   (S_COPY  : array read, both WLs)
//   3) write 1s, WL1=WL2=ON      (S_WR1   : buffer captures the RAM word)
//   4) write 0s, WL1=OFF WL2=ON  (S_WR0   : row now holds the ROM word)
//   5) ROM data read             (S_ROMRD : array read, both WLs)
//   6) RAM copy: buffer -> row   (S_RESTORE: ROM word captured, RAM restored)
// so the RAM contents survive every ROM read.
//
// Interface: req_valid/req_ready handshake with a mem_req_t (op, addr,
// wdata); resp_valid pulses for one cycle with resp_rdata (read data, or the
// ROM word). Timing from the accepting edge to resp_valid: 2 cycles for a RAM
// access, 6 for a ROM read (a ratio of 3, the same ratio as the published
// R-SRAM latencies 0.418 ns / 1.254 ns). The one-word buffer and the state
// encoding are this design's choice.
module rsram_mem_ctrl
  import spare_pkg::*;
#(
  parameter int AW = ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // request / response
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              resp_valid,
  output logic [DATA_W-1:0] resp_rdata,
  // R-SRAM array port
  output logic [AW-1:0]     arr_addr,
  output logic              arr_wl1,
  output logic              arr_wl2,
  output logic              arr_we,
  output logic [DATA_W-1:0] arr_wdata,
  input  logic [DATA_W-1:0] arr_rdata,
  // status
  output logic              rom_mode
);

  typedef enum logic [3:0] {
    S_IDLE, S_RAM_RD, S_RAM_WR, S_RAM_RESP,
    S_COPY, S_WR1, S_WR0, S_ROMRD, S_RESTORE, S_ROM_RESP
  } state_e;

  state_e            state;
  mem_req_t          cur;
  logic [DATA_W-1:0] ram_buf;    // buffered RAM word during a ROM read
  logic [DATA_W-1:0] rom_data;

  assign req_ready = (state == S_IDLE);
  assign rom_mode  = (state inside {S_COPY, S_WR1, S_WR0, S_ROMRD, S_RESTORE});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      ram_buf  <= '0;
      rom_data <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          cur <= req;
          unique case (req.op)
            MEM_RAM_RD: state <= S_RAM_RD;
            MEM_RAM_WR: state <= S_RAM_WR;
            default:    state <= S_COPY;
          endcase
        end
        S_RAM_RD:   state <= S_RAM_RESP;
        S_RAM_WR:   state <= S_RAM_RESP;
        S_RAM_RESP: state <= S_IDLE;
        S_COPY:     state <= S_WR1;
        S_WR1: begin
          ram_buf <= arr_rdata;
          state   <= S_WR0;
        end
        S_WR0:      state <= S_ROMRD;
        S_ROMRD:    state <= S_RESTORE;
        S_RESTORE: begin
          rom_data <= arr_rdata;
          state    <= S_ROM_RESP;
        end
        S_ROM_RESP: state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  // array drive
  always_comb begin
    arr_addr  = AW'(cur.addr);
    arr_wl1   = 1'b0;
    arr_wl2   = 1'b0;
    arr_we    = 1'b0;
    arr_wdata = cur.wdata;
    unique case (state)
      S_RAM_RD, S_COPY, S_ROMRD: begin
        arr_wl1 = 1'b1; arr_wl2 = 1'b1;
      end
      S_RAM_WR: begin
        arr_wl1 = 1'b1; arr_wl2 = 1'b1; arr_we = 1'b1;
      end
      S_WR1: begin
        arr_wl1 = 1'b1; arr_wl2 = 1'b1; arr_we = 1'b1; arr_wdata = '1;
      end
      S_WR0: begin
        arr_wl1 = 1'b0; arr_wl2 = 1'b1; arr_we = 1'b1; arr_wdata = '0;
      end
      S_RESTORE: begin
        arr_wl1 = 1'b1; arr_wl2 = 1'b1; arr_we = 1'b1; arr_wdata = ram_buf;
      end
      default: ;
    endcase
  end

  assign resp_valid = (state == S_RAM_RESP) || (state == S_ROM_RESP);
  assign resp_rdata = (state == S_ROM_RESP) ? rom_data :
                      (cur.op == MEM_RAM_RD) ? arr_rdata : '0;

  a_no_req_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                       req_valid && !req_ready |=> $stable(cur));

endmodule
