// global_memory: on-chip global spike memory of SPARE.
//
// Holds the input spike vectors of every time step and the spike vectors
// produced by every layer; the control unit broadcasts them to the PEs of
// the next layer (scatter) and writes PE outputs back (gather). Only neuron
// data passes through it: synaptic data stays inside the PEs.
//
// One synchronous port: we=1 writes wdata at the clock edge; re=1 reads and
// rdata holds the word one cycle later. The size (WORDS) is not published;
// 4096 x 32 bits is this design's choice and holds, for example, 160 time
// steps of a 784-input image (25 words each).
module global_memory
  import spare_pkg::*;
#(
  parameter int WORDS = 4096,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic              re,
  input  logic [AW-1:0]     addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we)      mem[addr] <= wdata;
    else if (re) rdata     <= mem[addr];
  end

endmodule
