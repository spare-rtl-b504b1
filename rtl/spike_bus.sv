// spike_bus: the shared bus between the control unit and the PE array.
//
// Three channels share the wires:
//   broadcast (scatter): one spike word with a layer tag goes to every
//     enabled PE whose tag matches, all at once. The word is taken only when
//     every addressed PE can accept it, so a full input buffer stalls the
//     bus (bc_ready low). A word for a tag no PE holds is dropped.
//   gather: the control unit selects one PE (g_sel) and pops output spike
//     words from its output buffer.
//   host: configuration and RAM accesses addressed to one PE (h_sel).
// There is no PE-to-PE network: all layer-to-layer traffic goes through the
// global memory, as published. The channel encoding and the all-or-none
// broadcast rule are this design's choice. Combinational.
module spike_bus
  import spare_pkg::*;
#(
  parameter int NUM_PE = 16,
  parameter int SW     = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  // broadcast
  input  logic                     bc_valid,
  output logic                     bc_ready,
  input  logic [TAG_W-1:0]         bc_tag,
  input  logic [DATA_W-1:0]        bc_data,
  output logic [NUM_PE-1:0]        pe_in_valid,
  input  logic [NUM_PE-1:0]        pe_in_ready,
  output logic [DATA_W-1:0]        pe_in_data,
  input  logic [TAG_W-1:0]         pe_tag     [NUM_PE],
  input  logic [NUM_PE-1:0]        pe_enabled,
  // gather
  input  logic [SW-1:0]            g_sel,
  output logic                     g_valid,
  input  logic                     g_ready,
  output logic [DATA_W-1:0]        g_data,
  input  logic [NUM_PE-1:0]        pe_out_valid,
  output logic [NUM_PE-1:0]        pe_out_ready,
  input  logic [DATA_W-1:0]        pe_out_data [NUM_PE],
  // host
  input  logic                     h_valid,
  output logic                     h_ready,
  input  logic [SW-1:0]            h_sel,
  input  pe_host_req_t             h_req,
  output logic                     h_rvalid,
  output logic [DATA_W-1:0]        h_rdata,
  output logic [NUM_PE-1:0]        pe_host_valid,
  output pe_host_req_t             pe_host_req,
  input  logic [NUM_PE-1:0]        pe_host_ready,
  input  logic [NUM_PE-1:0]        pe_host_rvalid,
  input  logic [DATA_W-1:0]        pe_host_rdata [NUM_PE]
);

  logic [NUM_PE-1:0] match;

  always_comb begin
    for (int p = 0; p < NUM_PE; p++)
      match[p] = pe_enabled[p] && (pe_tag[p] == bc_tag);
    bc_ready    = &(pe_in_ready | ~match);
    pe_in_valid = {NUM_PE{bc_valid && bc_ready}} & match;
    pe_in_data  = bc_data;
  end

  always_comb begin
    g_valid      = pe_out_valid[g_sel];
    g_data       = pe_out_data[g_sel];
    pe_out_ready = '0;
    pe_out_ready[g_sel] = g_ready;
  end

  always_comb begin
    pe_host_valid        = '0;
    pe_host_valid[h_sel] = h_valid;
    pe_host_req          = h_req;
    h_ready              = pe_host_ready[h_sel];
    h_rvalid             = |pe_host_rvalid;
    h_rdata              = '0;
    for (int p = 0; p < NUM_PE; p++)
      if (pe_host_rvalid[p]) h_rdata = pe_host_rdata[p];
  end

endmodule
