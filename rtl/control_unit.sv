// control_unit: central SPARE control unit - scatter, gather and host access.
//
// It stores the mapping of SNN layers onto PEs and moves spike data between
// global memory and the PE array in rounds. In round r it first gathers, for
// every layer l whose time step r-1-l is valid, the output spike words of
// all PEs of layer l into global memory, then scatters, for every layer l
// whose time step r-l is valid, that layer's input vector from global memory
// over the bus with tag l. Layer l therefore computes step r-l while layer
// l+1 computes step r-l-1: inter-layer pipelining, with PEs of a layer
// starting as soon as their broadcast is in their buffers.
//
// Layer table (host-written, word addresses at 16 + 8*l):
//   +0 src_base  +1 src_stride (words per step; 0 = same vector each step)
//   +2 n_words   +3 dst_base   +4 dst_stride   +5 pe_first  +6 pe_count
//   +7 out_words (output words per PE per step)
// PEs of a layer are contiguous; PE p's words land at
// dst_base + ts*dst_stride + (p-pe_first)*out_words. A PE whose neuron count
// is not a multiple of 32 leaves padding bits, which the next layer treats as
// inputs with zero weights. Registers: 0 control (write 1 = start; read
// {done, busy}), 1 n_steps, 2 n_layers.
//
// Host requests (host_req_t) go to global memory or CU registers (answered
// next cycle) or through the bus to a PE. Global memory is host-accessible
// only while no run is active. Scatter/gather mapping, rounds and the layer
// table format are this design's; the published text gives the operations
// and that the control unit holds the layer-to-PE mapping.
module control_unit
  import spare_pkg::*;
#(
  parameter int NUM_PE     = 16,
  parameter int MAX_LAYERS = 4,
  parameter int GMEM_AW    = 12,
  parameter int SW         = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host
  input  logic                host_valid,
  output logic                host_ready,
  input  host_req_t           host_req,
  output logic                host_rvalid,
  output logic [DATA_W-1:0]   host_rdata,
  // global memory
  output logic                gm_we,
  output logic                gm_re,
  output logic [GMEM_AW-1:0]  gm_addr,
  output logic [DATA_W-1:0]   gm_wdata,
  input  logic [DATA_W-1:0]   gm_rdata,
  // bus: broadcast
  output logic                bc_valid,
  input  logic                bc_ready,
  output logic [TAG_W-1:0]    bc_tag,
  output logic [DATA_W-1:0]   bc_data,
  // bus: gather
  output logic [SW-1:0]       g_sel,
  input  logic                g_valid,
  output logic                g_ready,
  input  logic [DATA_W-1:0]   g_data,
  // bus: host to PE
  output logic                h_valid,
  input  logic                h_ready,
  output logic [SW-1:0]       h_sel,
  output pe_host_req_t        h_req,
  input  logic                h_rvalid,
  input  logic [DATA_W-1:0]   h_rdata,
  // status
  output logic                busy,
  output logic                done,
  output logic [31:0]         stall_cycles,   // broadcast waiting on a full input buffer
  output logic [31:0]         bc_words,
  output logic [31:0]         gather_words
);

  localparam int LW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1;

  typedef struct packed {
    logic [15:0] src_base, src_stride, n_words, dst_base, dst_stride;
    logic [7:0]  pe_first, pe_count;
    logic [15:0] out_words;
  } layer_t;

  layer_t      layer [MAX_LAYERS];
  logic [15:0] n_steps;
  logic [LW:0] n_layers;

  typedef enum logic [2:0] {R_IDLE, R_GATHER, R_G_WAIT, R_SCATTER, R_S_READ, R_S_SEND, R_NEXT} rstate_e;
  rstate_e     st;
  logic [15:0] round;
  logic [LW:0] l;
  logic [7:0]  gp;
  logic [15:0] gk, sk;
  logic signed [17:0] ts_g, ts_s;
  logic        gather_on, scatter_on;
  layer_t      cur;

  assign cur  = layer[l[LW-1:0]];
  assign ts_g = $signed({2'b0, round}) - 18'sd1 - $signed(18'(l));
  assign ts_s = $signed({2'b0, round}) - $signed(18'(l));
  assign gather_on  = (ts_g >= 0) && (ts_g < $signed({2'b0, n_steps}));
  assign scatter_on = (ts_s >= 0) && (ts_s < $signed({2'b0, n_steps}));

  logic [31:0] g_addr_full, s_addr_full;
  assign g_addr_full = 32'(cur.dst_base) + 32'(ts_g[15:0]) * 32'(cur.dst_stride)
                     + 32'(gp) * 32'(cur.out_words) + 32'(gk);
  assign s_addr_full = 32'(cur.src_base) + 32'(ts_s[15:0]) * 32'(cur.src_stride) + 32'(sk);

  // ---- host decode ------------------------------------------------------------
  logic host_gm, host_cu, host_pe;
  assign host_gm = host_valid && host_req.tgt == HOST_GMEM;
  assign host_cu = host_valid && host_req.tgt == HOST_CU;
  assign host_pe = host_valid && (host_req.tgt == HOST_PE_RAM || host_req.tgt == HOST_PE_CFG);

  assign h_valid   = host_pe;
  assign h_sel     = SW'(host_req.pe);
  assign h_req.we    = host_req.we;
  assign h_req.cfg   = (host_req.tgt == HOST_PE_CFG);
  assign h_req.addr  = host_req.addr;
  assign h_req.wdata = host_req.wdata;

  assign host_ready = host_pe ? h_ready : host_gm ? (st == R_IDLE) : 1'b1;

  logic        gm_host_rd, cu_host_rd;
  logic [31:0] cu_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gm_host_rd <= 1'b0;
      cu_host_rd <= 1'b0;
      cu_rdata   <= '0;
    end else begin
      gm_host_rd <= host_gm && host_ready && !host_req.we;
      cu_host_rd <= host_cu && !host_req.we;
      unique case (host_req.addr)
        16'd1:   cu_rdata <= 32'(n_steps);
        16'd2:   cu_rdata <= 32'(n_layers);
        default: cu_rdata <= {30'd0, done, busy};
      endcase
    end
  end

  assign host_rvalid = gm_host_rd || cu_host_rd || h_rvalid;
  assign host_rdata  = gm_host_rd ? gm_rdata : cu_host_rd ? cu_rdata : h_rdata;

  // ---- global memory port -------------------------------------------------------
  always_comb begin
    gm_we    = 1'b0;
    gm_re    = 1'b0;
    gm_addr  = GMEM_AW'(host_req.addr);
    gm_wdata = host_req.wdata;
    if (st == R_IDLE) begin
      gm_we = host_gm && host_req.we;
      gm_re = host_gm && !host_req.we;
    end else if (st == R_G_WAIT) begin
      gm_we    = g_valid;
      gm_addr  = GMEM_AW'(g_addr_full);
      gm_wdata = g_data;
    end else if (st == R_S_READ) begin
      gm_re    = 1'b1;
      gm_addr  = GMEM_AW'(s_addr_full);
    end
  end

  assign g_sel    = SW'(32'(cur.pe_first) + 32'(gp));
  assign g_ready  = (st == R_G_WAIT);
  assign bc_valid = (st == R_S_SEND);
  assign bc_tag   = TAG_W'(l);
  assign bc_data  = gm_rdata;
  assign busy     = (st != R_IDLE);

  // ---- run sequencer ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= R_IDLE;
      round    <= '0;
      l        <= '0;
      gp       <= '0;
      gk       <= '0;
      sk       <= '0;
      done     <= 1'b0;
      n_steps  <= '0;
      n_layers <= '0;
      stall_cycles   <= '0;
      bc_words       <= '0;
      gather_words   <= '0;
      for (int i = 0; i < MAX_LAYERS; i++) layer[i] <= '0;
    end else begin
      // register writes
      if (host_cu && host_req.we && st == R_IDLE) begin
        if (host_req.addr == 16'd0 && host_req.wdata[0]) begin
          st    <= R_GATHER;
          round <= '0;
          l     <= '0;
          gp    <= '0;
          gk    <= '0;
          done  <= 1'b0;
        end else if (host_req.addr == 16'd1) n_steps  <= host_req.wdata[15:0];
        else if (host_req.addr == 16'd2)     n_layers <= (LW+1)'(host_req.wdata);
        else if (host_req.addr >= 16'd16 && int'(host_req.addr) < 16 + 8*MAX_LAYERS) begin
          unique case (host_req.addr[2:0])
            3'd0: layer[(host_req.addr - 16) >> 3].src_base   <= host_req.wdata[15:0];
            3'd1: layer[(host_req.addr - 16) >> 3].src_stride <= host_req.wdata[15:0];
            3'd2: layer[(host_req.addr - 16) >> 3].n_words    <= host_req.wdata[15:0];
            3'd3: layer[(host_req.addr - 16) >> 3].dst_base   <= host_req.wdata[15:0];
            3'd4: layer[(host_req.addr - 16) >> 3].dst_stride <= host_req.wdata[15:0];
            3'd5: layer[(host_req.addr - 16) >> 3].pe_first   <= host_req.wdata[7:0];
            3'd6: layer[(host_req.addr - 16) >> 3].pe_count   <= host_req.wdata[7:0];
            default: layer[(host_req.addr - 16) >> 3].out_words <= host_req.wdata[15:0];
          endcase
        end
      end

      if (bc_valid && !bc_ready) stall_cycles <= stall_cycles + 1;
      if (bc_valid && bc_ready)  bc_words     <= bc_words + 1;

      unique case (st)
        R_IDLE: ;
        // gather: walk layers, PEs of the layer, words of the PE
        R_GATHER: begin
          if (l == n_layers) begin
            l  <= '0;
            sk <= '0;
            st <= R_SCATTER;
          end else if (!gather_on || cur.pe_count == 0 || cur.out_words == 0) begin
            l <= l + 1'b1;
          end else begin
            st <= R_G_WAIT;
          end
        end
        R_G_WAIT: if (g_valid) begin
          gather_words <= gather_words + 1;
          if (gk + 1'b1 == cur.out_words) begin
            gk <= '0;
            if (gp + 1'b1 == cur.pe_count) begin
              gp <= '0;
              l  <= l + 1'b1;
              st <= R_GATHER;
            end else begin
              gp <= gp + 1'b1;
            end
          end else begin
            gk <= gk + 1'b1;
          end
        end
        // scatter: walk layers, words of the layer's input vector
        R_SCATTER: begin
          if (l == n_layers) begin
            st <= R_NEXT;
          end else if (!scatter_on || cur.n_words == 0) begin
            l <= l + 1'b1;
          end else begin
            st <= R_S_READ;
          end
        end
        R_S_READ: st <= R_S_SEND;
        R_S_SEND: begin
          if (bc_ready) begin
            if (sk + 1'b1 == cur.n_words) begin
              sk <= '0;
              l  <= l + 1'b1;
              st <= R_SCATTER;
            end else begin
              sk <= sk + 1'b1;
              st <= R_S_READ;
            end
          end
        end
        R_NEXT: begin
          l  <= '0;
          gp <= '0;
          gk <= '0;
          if (32'(round) + 1 >= 32'(n_steps) + 32'(n_layers)) begin
            st   <= R_IDLE;
            done <= 1'b1;
          end else begin
            round <= round + 1'b1;
            st    <= R_GATHER;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

  a_gm_single: assert property (@(posedge clk) disable iff (!rst_n) !(gm_we && gm_re));

endmodule
