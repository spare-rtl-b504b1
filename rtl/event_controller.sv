// event_controller: the extended finite-state machine that runs the SNN
// computation of one PE.
//
// It walks the published PE flow chart:
//   IDLE -> Fetch Input Buffer; a '0' spike is skipped (event-driven), a '1'
//   spike runs, for every output neuron j of the PE,
//     SYNAPSE MODEL : fetch weight w_ij (RAM), fetch LUT_ISYN(w) (ROM),
//                     evaluate the synaptic output current
//     NEURON MODEL  : fetch Vmem_j (RAM), fetch LUT_DVDT(Vmem) (ROM),
//                     evaluate dVmem/dt, update Vmem_j (RAM write)
//   After all input neurons, for every output neuron: fetch Vmem; if
//   Vmem > V_th then (training only) the PLASTICITY MODEL fetches each weight
//   w_ij, the input's spike time and LUT_EXP(d) and writes the updated
//   weight, then Vmem is reset; the spike bits go to the output buffer.
//   Then the next time step starts, or after n_steps the PE returns to IDLE.
// With training on, the time step of every '1' input is also written to the
// input's spike-time word (needed by STDP).
//
// Memory map inside the PE RAM (from the configuration): weights packed four
// per word, index i*n_out + j from w_base; Vmem packed four per word from
// v_base; one spike-time word per input from t_base.
//
// Interface: one memory request at a time (mem_req_valid/ready, response
// mem_resp_valid); ROM fetches name a table and offset, converted here by
// lut_addr_gen. The compute core (spike_output_compute) and state updater are
// outside and connected combinationally. Per-event timing with the R-SRAM
// controller (response 2 cycles after a RAM request, 6 after a ROM request):
// a memory step of the chart lasts 3 cycles (RAM) or 7 cycles (ROM) including
// the request cycle, an evaluate step 1 cycle, so one '1' input costs
// 1 + n_out * (3+7+1+3+7+1+3) = 1 + 25*n_out cycles (+3 for the spike-time
// write in training); a '0' input costs 1 cycle.
// The flow follows the published chart; the state encoding, the request
// handshake and the memory map are this design's choice.
module event_controller
  import spare_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  pe_cfg_t            cfg,
  // input spike buffer
  input  logic               in_head_valid,
  input  logic               in_head_bit,
  input  logic [4:0]         in_head_pos,
  output logic               in_pop_bit,
  output logic               in_pop_word,
  // output spike buffer
  output logic               out_valid,
  input  logic               out_ready,
  output logic [DATA_W-1:0]  out_data,
  // memory controller
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output mem_req_t           mem_req,
  input  logic               mem_resp_valid,
  input  logic [DATA_W-1:0]  mem_resp_rdata,
  // compute core
  output logic signed [7:0]  cc_v_old,
  output logic [DATA_W-1:0]  cc_dvdt_lut,
  output logic [DATA_W-1:0]  cc_isyn,
  input  logic signed [7:0]  cc_v_new,
  input  logic               cc_fire,
  output logic [CNT_W-1:0]   cc_t_now,
  output logic [DATA_W-1:0]  cc_t_pre,
  input  logic [EXP_K-1:0]   cc_exp_d,
  input  logic [7:0]         cc_exp_rsh,
  input  logic [15:0]        cc_exp_r,
  output logic [DATA_W-1:0]  cc_exp_lut,
  output logic [7:0]         cc_exp_rsh_q,
  output logic [15:0]        cc_exp_r_q,
  output logic signed [7:0]  cc_w_old,
  input  logic signed [7:0]  cc_w_new,
  // state updater
  output logic [DATA_W-1:0]  su_old_word,
  output logic [1:0]         su_lane,
  output logic [7:0]         su_new_byte,
  output logic               su_sel_word,
  output logic [DATA_W-1:0]  su_new_word,
  input  logic [DATA_W-1:0]  su_wdata,
  // status
  output logic               idle,
  output logic               wait_in,     // waiting for input spikes
  output logic               step_done,
  output pe_stats_t          stats
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH_IN, S_TPRE_WR,
    S_SYN_W_RD, S_SYN_LUT, S_SYN_EVAL,
    S_NEU_V_RD, S_NEU_LUT, S_NEU_EVAL, S_NEU_V_WR,
    S_TH_V_RD, S_TH_CHECK,
    S_PL_W_RD, S_PL_T_RD, S_PL_LUT, S_PL_W_WR,
    S_RST_V, S_NEXT_J, S_OUT_WR, S_STEP_END
  } state_e;

  state_e             state;
  logic               busy;            // memory request in flight
  logic [CNT_W-1:0]   t_now;
  logic [CNT_W-1:0]   in_idx, out_idx, pl_i;
  logic [31:0]        row_base;        // in_idx * n_out
  logic [31:0]        pl_idx;          // pl_i * n_out + out_idx
  logic [31:0]        widx;
  logic [DATA_W-1:0]  w_word, v_word, t_pre_q, lut_q, isyn_q;
  logic signed [7:0]  vnew_q;
  logic [7:0]         rsh_q;
  logic [15:0]        r_q;
  logic [DATA_W-1:0]  out_bits;
  logic [1:0]         w_lane;
  logic               last_j;

  lut_e               lut_type;
  logic [7:0]         lut_offset;
  logic [ADDR_W-1:0]  lut_addr;

  lut_addr_gen u_lut_addr (.lut_type(lut_type), .offset(lut_offset), .addr(lut_addr));

  assign widx    = (state inside {S_PL_W_RD, S_PL_T_RD, S_PL_LUT, S_PL_W_WR}) ? pl_idx
                                                                                : row_base + 32'(out_idx);
  assign w_lane  = widx[1:0];
  assign last_j  = (out_idx + 1'b1 == cfg.n_out);

  // compute-core operands
  assign cc_v_old     = v_word[8*out_idx[1:0] +: 8];
  assign cc_dvdt_lut  = lut_q;
  assign cc_isyn      = isyn_q;
  assign cc_t_now     = t_now;
  assign cc_t_pre     = t_pre_q;
  assign cc_exp_lut   = lut_q;
  assign cc_exp_rsh_q = rsh_q;
  assign cc_exp_r_q   = r_q;
  assign cc_w_old     = w_word[8*w_lane +: 8];

  // memory request of the current state
  always_comb begin
    mem_req       = '0;
    mem_req.op    = MEM_RAM_RD;
    lut_type      = LUT_ISYN;
    lut_offset    = '0;
    su_old_word   = v_word;
    su_lane       = out_idx[1:0];
    su_new_byte   = vnew_q;
    su_sel_word   = 1'b0;
    su_new_word   = 32'(t_now) + 32'd1;
    unique case (state)
      S_TPRE_WR: begin
        mem_req.op   = MEM_RAM_WR;
        mem_req.addr = cfg.t_base + ADDR_W'(in_idx);
        su_sel_word  = 1'b1;
      end
      S_SYN_W_RD, S_PL_W_RD: mem_req.addr = cfg.w_base + ADDR_W'(widx >> 2);
      S_SYN_LUT: begin
        mem_req.op = MEM_ROM_RD;
        lut_type   = LUT_ISYN;
        lut_offset = w_word[8*w_lane +: 8];
        mem_req.addr = lut_addr;
      end
      S_NEU_V_RD, S_TH_V_RD: mem_req.addr = cfg.v_base + ADDR_W'(out_idx >> 2);
      S_NEU_LUT: begin
        mem_req.op = MEM_ROM_RD;
        lut_type   = LUT_DVDT;
        lut_offset = v_word[8*out_idx[1:0] +: 8];
        mem_req.addr = lut_addr;
      end
      S_NEU_V_WR: begin
        mem_req.op   = MEM_RAM_WR;
        mem_req.addr = cfg.v_base + ADDR_W'(out_idx >> 2);
      end
      S_PL_T_RD: mem_req.addr = cfg.t_base + ADDR_W'(pl_i);
      S_PL_LUT: begin
        mem_req.op = MEM_ROM_RD;
        lut_type   = LUT_EXP;
        lut_offset = 8'(cc_exp_d);
        mem_req.addr = lut_addr;
      end
      S_PL_W_WR: begin
        mem_req.op   = MEM_RAM_WR;
        mem_req.addr = cfg.w_base + ADDR_W'(widx >> 2);
        su_old_word  = w_word;
        su_lane      = w_lane;
        su_new_byte  = cc_w_new;
      end
      S_RST_V: begin
        mem_req.op   = MEM_RAM_WR;
        mem_req.addr = cfg.v_base + ADDR_W'(out_idx >> 2);
        su_new_byte  = cfg.v_reset;
      end
      default: ;
    endcase
    mem_req.wdata = su_wdata;
  end

  logic mem_state;
  assign mem_state     = state inside {S_TPRE_WR, S_SYN_W_RD, S_SYN_LUT, S_NEU_V_RD, S_NEU_LUT,
                                       S_NEU_V_WR, S_TH_V_RD, S_PL_W_RD, S_PL_T_RD, S_PL_LUT,
                                       S_PL_W_WR, S_RST_V};
  assign mem_req_valid = mem_state && !busy;

  logic mem_done;
  assign mem_done = mem_state && busy && mem_resp_valid;

  // input-buffer handshake
  always_comb begin
    in_pop_bit  = 1'b0;
    in_pop_word = 1'b0;
    if (state == S_FETCH_IN) begin
      if (in_idx == cfg.n_in) in_pop_word = in_head_valid && (in_head_pos != '0);
      else                    in_pop_bit  = in_head_valid;
    end
  end

  assign out_valid = (state == S_OUT_WR);
  assign out_data  = out_bits;
  assign idle      = (state == S_IDLE);
  assign wait_in   = (state == S_FETCH_IN) && !in_head_valid && (in_idx != cfg.n_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      busy     <= 1'b0;
      t_now    <= '0;
      in_idx   <= '0;
      out_idx  <= '0;
      pl_i     <= '0;
      row_base <= '0;
      pl_idx   <= '0;
      w_word   <= '0;
      v_word   <= '0;
      t_pre_q  <= '0;
      lut_q    <= '0;
      isyn_q   <= '0;
      vnew_q   <= '0;
      rsh_q    <= '0;
      r_q      <= '0;
      out_bits <= '0;
      step_done <= 1'b0;
      stats    <= '0;
    end else begin
      step_done <= 1'b0;
      if (mem_req_valid && mem_req_ready) begin
        busy <= 1'b1;
        unique case (mem_req.op)
          MEM_RAM_RD: stats.ram_rd <= stats.ram_rd + 1;
          MEM_RAM_WR: stats.ram_wr <= stats.ram_wr + 1;
          default:    stats.rom_rd <= stats.rom_rd + 1;
        endcase
      end
      if (mem_done) busy <= 1'b0;

      unique case (state)
        S_IDLE: if (cfg.enable && in_head_valid) begin
          t_now    <= '0;
          in_idx   <= '0;
          row_base <= '0;
          out_bits <= '0;
          state    <= S_FETCH_IN;
        end

        S_FETCH_IN: begin
          if (in_idx == cfg.n_in) begin
            if (!(in_head_valid && in_head_pos != '0)) begin
              out_idx <= '0;
              state   <= S_TH_V_RD;
            end
          end else if (in_head_valid) begin
            if (in_head_bit) begin
              stats.in_one <= stats.in_one + 1;
              out_idx      <= '0;
              state        <= cfg.training ? S_TPRE_WR : S_SYN_W_RD;
            end else begin
              stats.in_zero <= stats.in_zero + 1;
              in_idx        <= in_idx + 1'b1;
              row_base      <= row_base + 32'(cfg.n_out);
            end
          end
        end

        S_TPRE_WR:  if (mem_done) state <= S_SYN_W_RD;
        S_SYN_W_RD: if (mem_done) begin w_word <= mem_resp_rdata; state <= S_SYN_LUT; end
        S_SYN_LUT:  if (mem_done) begin lut_q  <= mem_resp_rdata; state <= S_SYN_EVAL; end
        S_SYN_EVAL: begin isyn_q <= lut_q; state <= S_NEU_V_RD; end
        S_NEU_V_RD: if (mem_done) begin v_word <= mem_resp_rdata; state <= S_NEU_LUT; end
        S_NEU_LUT:  if (mem_done) begin lut_q  <= mem_resp_rdata; state <= S_NEU_EVAL; end
        S_NEU_EVAL: begin vnew_q <= cc_v_new; state <= S_NEU_V_WR; end
        S_NEU_V_WR: if (mem_done) begin
          if (last_j) begin
            in_idx   <= in_idx + 1'b1;
            row_base <= row_base + 32'(cfg.n_out);
            state    <= S_FETCH_IN;
          end else begin
            out_idx  <= out_idx + 1'b1;
            state    <= S_SYN_W_RD;
          end
        end

        S_TH_V_RD:  if (mem_done) begin v_word <= mem_resp_rdata; state <= S_TH_CHECK; end
        S_TH_CHECK: begin
          if (cc_fire) begin
            stats.fires <= stats.fires + 1;
            pl_i   <= '0;
            pl_idx <= 32'(out_idx);
            state  <= (cfg.training && cfg.n_in != '0) ? S_PL_W_RD : S_RST_V;
          end else begin
            state  <= S_NEXT_J;
          end
        end
        S_PL_W_RD:  if (mem_done) begin w_word <= mem_resp_rdata; state <= S_PL_T_RD; end
        S_PL_T_RD:  if (mem_done) begin t_pre_q <= mem_resp_rdata; state <= S_PL_LUT; end
        S_PL_LUT: begin
          if (mem_req_valid && mem_req_ready) begin
            rsh_q <= cc_exp_rsh;
            r_q   <= cc_exp_r;
          end
          if (mem_done) begin lut_q <= mem_resp_rdata; state <= S_PL_W_WR; end
        end
        S_PL_W_WR:  if (mem_done) begin
          stats.w_updates <= stats.w_updates + 1;
          if (pl_i + 1'b1 == cfg.n_in) begin
            state <= S_RST_V;
          end else begin
            pl_i   <= pl_i + 1'b1;
            pl_idx <= pl_idx + 32'(cfg.n_out);
            state  <= S_PL_W_RD;
          end
        end
        S_RST_V: if (mem_done) begin
          out_bits[out_idx[4:0]] <= 1'b1;
          state <= S_NEXT_J;
        end
        S_NEXT_J: begin
          if (out_idx[4:0] == 5'd31 || last_j) state <= S_OUT_WR;
          else begin
            out_idx <= out_idx + 1'b1;
            state   <= S_TH_V_RD;
          end
        end
        S_OUT_WR: if (out_ready) begin
          out_bits <= '0;
          if (last_j) state <= S_STEP_END;
          else begin
            out_idx <= out_idx + 1'b1;
            state   <= S_TH_V_RD;
          end
        end
        S_STEP_END: begin
          stats.steps <= stats.steps + 1;
          step_done   <= 1'b1;
          t_now       <= t_now + 1'b1;
          in_idx      <= '0;
          row_base    <= '0;
          state       <= (t_now + 1'b1 == cfg.n_steps) ? S_IDLE : S_FETCH_IN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_request: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !mem_req_valid);

endmodule
