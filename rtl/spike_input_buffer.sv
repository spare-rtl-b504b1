// spike_input_buffer: FIFO holding the spike vector broadcast to a PE.
//
// The shared bus delivers input spikes as 32-bit words (one bit per input
// neuron, LSB first). The buffer stores up to DEPTH words and presents the
// head spike bit to the event controller, which consumes it one bit at a time
// (pop_bit) and may drop the rest of the head word (pop_word), used for the
// padding bits after the last input neuron of a time step. When the buffer
// is full push_ready drops and the bus stalls.
//
// Depth 32 follows the published buffer depth; the word format and the
// bit-serial read port are this design's choice. push and pop may happen in
// the same cycle. head_valid is 0 while empty.
module spike_input_buffer
  import spare_pkg::*;
#(
  parameter int DEPTH = BUF_DEPTH,
  parameter int W     = DATA_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push_valid,
  output logic         push_ready,
  input  logic [W-1:0] push_data,
  output logic         head_valid,
  output logic         head_bit,
  output logic [$clog2(W)-1:0] head_pos,
  input  logic         pop_bit,
  input  logic         pop_word,
  output logic [$clog2(DEPTH):0] count
);

  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [$clog2(W)-1:0] bit_ptr;
  logic          do_push, do_pop;

  assign push_ready = (count != (PW+1)'(DEPTH));
  assign head_valid = (count != '0);
  assign head_bit   = mem[rd_ptr][bit_ptr];
  assign head_pos   = bit_ptr;
  assign do_push    = push_valid && push_ready;
  assign do_pop     = head_valid && (pop_word || (pop_bit && (bit_ptr == '1)));

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      bit_ptr <= '0;
      count   <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop) begin
        rd_ptr  <= rd_ptr + 1'b1;
        bit_ptr <= '0;
      end else if (head_valid && pop_bit) begin
        bit_ptr <= bit_ptr + 1'b1;
      end
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                   (pop_bit || pop_word) |-> head_valid);

endmodule
