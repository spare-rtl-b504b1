// spike_output_buffer: FIFO of output spike words of one PE.
//
// The event controller writes one 32-bit word per 32 output neurons (bit j =
// spike of neuron j of that group) at the end of each time step's threshold
// pass; the control unit's gather operation reads them out over the shared
// bus into global memory. Depth 32 follows the published buffer depth.
//
// Interface: valid/ready on both sides; in_ready drops when full, out_valid
// when empty. Push and pop may happen in the same cycle.
module spike_output_buffer
  import spare_pkg::*;
#(
  parameter int DEPTH = BUF_DEPTH,
  parameter int W     = DATA_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

endmodule
