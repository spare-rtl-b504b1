// pe: one SPARE processing element.
//
// A PE holds a slice of one SNN layer: n_out output neurons and their
// synapses from the layer's n_in inputs. Its blocks follow the published PE
// diagram: spike input buffer -> event controller -> ROM-embedded RAM
// (R-SRAM array + memory controller) -> spike output computation -> spike
// output buffer, with a state updater writing state back into the memory.
// Synaptic weights, Vmem and spike times are RAM data; the synapse, neuron
// and plasticity look-up tables are the ROM layer of the same array.
//
// Interfaces
//   bus side   : in_valid/in_ready/in_data - spike words broadcast for this
//                PE's layer tag (cfg.tag); out_valid/out_ready/out_data -
//                output spike words read by the gather operation.
//   host side  : host_valid/host_ready/host_req (pe_host_req_t) writes the
//                configuration registers (cfg=1) or reads/writes RAM words
//                (cfg=0) while the event controller is idle; RAM accesses
//                answer with host_rvalid/host_rdata.
//   Configuration registers (word addresses, this design's map):
//     0 {tag[7:4], training[1], enable[0]}   1 n_in   2 n_out
//     3 w_base   4 v_base   5 t_base   6 {v_reset[15:8], v_th[7:0]}
//     7 n_steps  8 {a_plus[15:8], tau_inv[7:0]}
// The PE starts computing as soon as enable is set and a spike word is in
// its input buffer, and runs cfg.n_steps time steps.
module pe
  import spare_pkg::*;
#(
  parameter int MEM_W = MEM_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  // broadcast input
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [DATA_W-1:0]  in_data,
  // gathered output
  output logic               out_valid,
  input  logic               out_ready,
  output logic [DATA_W-1:0]  out_data,
  // host access
  input  logic               host_valid,
  output logic               host_ready,
  input  pe_host_req_t       host_req,
  output logic               host_rvalid,
  output logic [DATA_W-1:0]  host_rdata,
  // status
  output logic [TAG_W-1:0]   tag,
  output logic               enabled,
  output logic               idle,
  output logic               computing,
  output logic               step_done,
  output pe_stats_t          stats
);

  pe_cfg_t cfg, cfg_eff;
  logic    host_pending;

  // ---- configuration registers ------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
    end else if (host_valid && host_ready && host_req.cfg && host_req.we) begin
      unique case (host_req.addr[3:0])
        4'd0: begin
          cfg.enable   <= host_req.wdata[0];
          cfg.training <= host_req.wdata[1];
          cfg.tag      <= host_req.wdata[7:4];
        end
        4'd1: cfg.n_in    <= host_req.wdata[CNT_W-1:0];
        4'd2: cfg.n_out   <= host_req.wdata[CNT_W-1:0];
        4'd3: cfg.w_base  <= host_req.wdata[ADDR_W-1:0];
        4'd4: cfg.v_base  <= host_req.wdata[ADDR_W-1:0];
        4'd5: cfg.t_base  <= host_req.wdata[ADDR_W-1:0];
        4'd6: begin
          cfg.v_th    <= host_req.wdata[7:0];
          cfg.v_reset <= host_req.wdata[15:8];
        end
        4'd7: cfg.n_steps <= host_req.wdata[CNT_W-1:0];
        4'd8: begin
          cfg.tau_inv <= host_req.wdata[7:0];
          cfg.a_plus  <= host_req.wdata[15:8];
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg_eff        = cfg;
    cfg_eff.enable = cfg.enable && !host_pending;
  end

  assign tag     = cfg.tag;
  assign enabled = cfg.enable;

  // ---- spike input buffer -------------------------------------------------------
  logic       ib_head_valid, ib_head_bit, ib_pop_bit, ib_pop_word;
  logic [4:0] ib_head_pos;
  logic [$clog2(BUF_DEPTH):0] ib_count;

  spike_input_buffer u_in_buf (
    .clk, .rst_n,
    .push_valid(in_valid), .push_ready(in_ready), .push_data(in_data),
    .head_valid(ib_head_valid), .head_bit(ib_head_bit), .head_pos(ib_head_pos),
    .pop_bit(ib_pop_bit), .pop_word(ib_pop_word), .count(ib_count)
  );

  // ---- spike output buffer ------------------------------------------------------
  logic              ob_in_valid, ob_in_ready;
  logic [DATA_W-1:0] ob_in_data;
  logic [$clog2(BUF_DEPTH):0] ob_count;

  spike_output_buffer u_out_buf (
    .clk, .rst_n,
    .in_valid(ob_in_valid), .in_ready(ob_in_ready), .in_data(ob_in_data),
    .out_valid, .out_ready, .out_data, .count(ob_count)
  );

  // ---- ROM-embedded RAM -----------------------------------------------------------
  logic              mc_req_valid, mc_req_ready, mc_resp_valid, mc_rom_mode;
  mem_req_t          mc_req;
  logic [DATA_W-1:0] mc_resp_rdata;
  logic [ADDR_W-1:0] arr_addr;
  logic              arr_wl1, arr_wl2, arr_we;
  logic [DATA_W-1:0] arr_wdata, arr_rdata;

  rsram_mem_ctrl u_mem_ctrl (
    .clk, .rst_n,
    .req_valid(mc_req_valid), .req_ready(mc_req_ready), .req(mc_req),
    .resp_valid(mc_resp_valid), .resp_rdata(mc_resp_rdata),
    .arr_addr, .arr_wl1, .arr_wl2, .arr_we, .arr_wdata, .arr_rdata,
    .rom_mode(mc_rom_mode)
  );

  rsram_array #(.WORDS(MEM_W)) u_array (
    .clk, .addr(arr_addr[$clog2(MEM_W)-1:0]), .wl1(arr_wl1), .wl2(arr_wl2),
    .we(arr_we), .wdata(arr_wdata), .rdata(arr_rdata)
  );

  // ---- event controller, compute core, state updater ------------------------------
  logic              ec_req_valid;
  mem_req_t          ec_req;
  logic signed [7:0] cc_v_old, cc_v_new, cc_w_old, cc_w_new;
  logic [DATA_W-1:0] cc_dvdt_lut, cc_isyn, cc_t_pre, cc_exp_lut;
  logic              cc_fire, cc_pre_seen;
  logic [CNT_W-1:0]  cc_t_now;
  logic [EXP_K-1:0]  cc_exp_d;
  logic [7:0]        cc_exp_rsh, cc_exp_rsh_q;
  logic [15:0]       cc_exp_r, cc_exp_r_q, cc_exp_val;
  logic [DATA_W-1:0] su_old_word, su_new_word, su_wdata;
  logic [1:0]        su_lane;
  logic [7:0]        su_new_byte;
  logic              su_sel_word;
  logic              ec_wait_in;

  assign computing = !idle && !ec_wait_in;

  event_controller u_ctrl (
    .clk, .rst_n, .cfg(cfg_eff),
    .in_head_valid(ib_head_valid), .in_head_bit(ib_head_bit), .in_head_pos(ib_head_pos),
    .in_pop_bit(ib_pop_bit), .in_pop_word(ib_pop_word),
    .out_valid(ob_in_valid), .out_ready(ob_in_ready), .out_data(ob_in_data),
    .mem_req_valid(ec_req_valid), .mem_req_ready(mc_req_ready && !host_pending),
    .mem_req(ec_req), .mem_resp_valid(mc_resp_valid && !host_pending),
    .mem_resp_rdata(mc_resp_rdata),
    .cc_v_old, .cc_dvdt_lut, .cc_isyn, .cc_v_new, .cc_fire, .cc_t_now, .cc_t_pre,
    .cc_exp_d, .cc_exp_rsh, .cc_exp_r, .cc_exp_lut, .cc_exp_rsh_q, .cc_exp_r_q,
    .cc_w_old, .cc_w_new,
    .su_old_word, .su_lane, .su_new_byte, .su_sel_word, .su_new_word, .su_wdata,
    .idle, .wait_in(ec_wait_in), .step_done, .stats
  );

  spike_output_compute u_compute (
    .v_old(cc_v_old), .dvdt_lut(cc_dvdt_lut), .isyn(cc_isyn), .v_new(cc_v_new),
    .v_th(cfg.v_th), .fire(cc_fire),
    .t_now(cc_t_now), .t_pre(cc_t_pre), .tau_inv(cfg.tau_inv), .pre_seen(cc_pre_seen),
    .exp_d(cc_exp_d), .exp_rsh(cc_exp_rsh), .exp_r(cc_exp_r),
    .exp_lut(cc_exp_lut), .exp_rsh_q(cc_exp_rsh_q), .exp_r_q(cc_exp_r_q),
    .a_plus(cfg.a_plus), .w_old(cc_w_old), .w_new(cc_w_new), .exp_val(cc_exp_val)
  );

  state_update u_state_update (
    .old_word(su_old_word), .lane(su_lane), .new_byte(su_new_byte),
    .sel_word(su_sel_word), .new_word(su_new_word), .wdata(su_wdata)
  );

  // ---- host / controller arbitration of the memory port ---------------------------
  logic host_mem;
  assign host_mem   = host_valid && !host_req.cfg;
  assign host_ready = host_req.cfg ? 1'b1 : (idle && !host_pending && mc_req_ready);

  always_comb begin
    mc_req_valid = ec_req_valid && !host_pending;
    mc_req       = ec_req;
    if (idle && !host_pending) begin
      mc_req_valid = host_mem;
      mc_req.op    = host_req.we ? MEM_RAM_WR : MEM_RAM_RD;
      mc_req.addr  = ADDR_W'(host_req.addr);
      mc_req.wdata = host_req.wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_pending <= 1'b0;
    else if (host_mem && host_ready) host_pending <= 1'b1;
    else if (mc_resp_valid) host_pending <= 1'b0;
  end

  assign host_rvalid = host_pending && mc_resp_valid;
  assign host_rdata  = mc_resp_rdata;

endmodule
