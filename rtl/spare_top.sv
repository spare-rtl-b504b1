// spare_top: the SPARE accelerator - a PE array on a shared bus with a
// global spike memory and a central control unit.
//
// An SNN is mapped layer by layer onto groups of PEs. Each PE keeps the
// synaptic weights, membrane potentials and spike times of its neurons in
// its own ROM-embedded SRAM, whose hidden ROM layer holds the look-up tables
// of the synapse, neuron and plasticity models. Per time step the control
// unit broadcasts each layer's input spikes from global memory to that
// layer's PEs and gathers their output spikes back (see control_unit for the
// pipelined round schedule). Only spikes travel; synaptic data never leaves
// a PE.
//
// The host interface is not specified beyond its existence, so its signals
// are the top's ports: host_valid/host_ready/host_req (host_req_t: global
// memory, control-unit registers, or RAM / configuration of one PE) and
// host_rvalid/host_rdata for reads. done rises when a run has finished.
// Activity counters are brought out for observation: per-PE statistics
// (pe_stats), bus stalls, broadcast and gathered words, and cycles in which a
// broadcast overlapped computation in a PE of a different layer
// (inter-layer pipelining).
//
// NUM_PE = 16 (the PE count of the smallest published benchmark, a 784x400
// network) and the global memory size are this design's choices; the PE
// sizes are the published ones.
module spare_top
  import spare_pkg::*;
#(
  parameter int NUM_PE     = 16,
  parameter int MAX_LAYERS = 4,
  parameter int GMEM_WORDS = 4096,
  parameter int PE_WORDS   = MEM_WORDS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_valid,
  output logic               host_ready,
  input  host_req_t          host_req,
  output logic               host_rvalid,
  output logic [DATA_W-1:0]  host_rdata,
  output logic               busy,
  output logic               done,
  output pe_stats_t          pe_stats [NUM_PE],
  output logic [31:0]        bus_stall_cycles,
  output logic [31:0]        bus_bc_words,
  output logic [31:0]        bus_gather_words,
  output logic [31:0]        pipeline_overlap_cycles
);

  localparam int GMEM_AW = $clog2(GMEM_WORDS);
  localparam int SW      = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  // global memory
  logic                gm_we, gm_re;
  logic [GMEM_AW-1:0]  gm_addr;
  logic [DATA_W-1:0]   gm_wdata, gm_rdata;

  // bus, control-unit side
  logic                bc_valid, bc_ready, g_valid, g_ready, h_valid, h_ready, h_rvalid;
  logic [TAG_W-1:0]    bc_tag;
  logic [DATA_W-1:0]   bc_data, g_data, h_rdata;
  logic [SW-1:0]       g_sel, h_sel;
  pe_host_req_t        h_req;

  // bus, PE side
  logic [NUM_PE-1:0]   pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  logic [NUM_PE-1:0]   pe_enabled, pe_idle, pe_computing, pe_step_done;
  logic [NUM_PE-1:0]   pe_host_valid, pe_host_ready, pe_host_rvalid;
  logic [DATA_W-1:0]   pe_in_data;
  logic [DATA_W-1:0]   pe_out_data   [NUM_PE];
  logic [DATA_W-1:0]   pe_host_rdata [NUM_PE];
  logic [TAG_W-1:0]    pe_tag        [NUM_PE];
  pe_host_req_t        pe_host_req;

  control_unit #(.NUM_PE(NUM_PE), .MAX_LAYERS(MAX_LAYERS), .GMEM_AW(GMEM_AW)) u_cu (
    .clk, .rst_n,
    .host_valid, .host_ready, .host_req, .host_rvalid, .host_rdata,
    .gm_we, .gm_re, .gm_addr, .gm_wdata, .gm_rdata,
    .bc_valid, .bc_ready, .bc_tag, .bc_data,
    .g_sel, .g_valid, .g_ready, .g_data,
    .h_valid, .h_ready, .h_sel, .h_req, .h_rvalid, .h_rdata,
    .busy, .done,
    .stall_cycles(bus_stall_cycles), .bc_words(bus_bc_words), .gather_words(bus_gather_words)
  );

  global_memory #(.WORDS(GMEM_WORDS)) u_gmem (
    .clk, .we(gm_we), .re(gm_re), .addr(gm_addr), .wdata(gm_wdata), .rdata(gm_rdata)
  );

  spike_bus #(.NUM_PE(NUM_PE)) u_bus (
    .bc_valid, .bc_ready, .bc_tag, .bc_data,
    .pe_in_valid, .pe_in_ready, .pe_in_data, .pe_tag, .pe_enabled,
    .g_sel, .g_valid, .g_ready, .g_data, .pe_out_valid, .pe_out_ready, .pe_out_data,
    .h_valid, .h_ready, .h_sel, .h_req, .h_rvalid, .h_rdata,
    .pe_host_valid, .pe_host_req, .pe_host_ready, .pe_host_rvalid, .pe_host_rdata
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    pe #(.MEM_W(PE_WORDS)) u_pe (
      .clk, .rst_n,
      .in_valid(pe_in_valid[p]), .in_ready(pe_in_ready[p]), .in_data(pe_in_data),
      .out_valid(pe_out_valid[p]), .out_ready(pe_out_ready[p]), .out_data(pe_out_data[p]),
      .host_valid(pe_host_valid[p]), .host_ready(pe_host_ready[p]), .host_req(pe_host_req),
      .host_rvalid(pe_host_rvalid[p]), .host_rdata(pe_host_rdata[p]),
      .tag(pe_tag[p]), .enabled(pe_enabled[p]), .idle(pe_idle[p]), .computing(pe_computing[p]),
      .step_done(pe_step_done[p]), .stats(pe_stats[p])
    );
  end

  // broadcast cycles during which a PE of another layer is computing
  logic other_busy;
  always_comb begin
    other_busy = 1'b0;
    for (int p = 0; p < NUM_PE; p++)
      if (pe_enabled[p] && pe_computing[p] && pe_tag[p] != bc_tag) other_busy = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pipeline_overlap_cycles <= '0;
    else if (bc_valid && other_busy) pipeline_overlap_cycles <= pipeline_overlap_cycles + 1;
  end

endmodule
