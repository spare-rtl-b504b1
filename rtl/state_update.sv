// state_update: forms the write-back word for a PE state variable.
//
// Weights and membrane potentials are 8 bits wide and packed four to a
// 32-bit memory word (byte lane = index mod 4). The event controller has
// already fetched the word holding the variable; this unit replaces the
// addressed byte with the new value (an updated Vmem, the reset potential
// after a spike, or an STDP-updated weight) and leaves the other three lanes
// untouched, so one RAM write completes the read-modify-write.
// Spike-time words are written whole (sel_word).
// The packing is this design's choice; the published PE only names a state
// updater that writes entries back to the memory. Combinational.
module state_update
  import spare_pkg::*;
(
  input  logic [DATA_W-1:0] old_word,
  input  logic [1:0]        lane,
  input  logic [7:0]        new_byte,
  input  logic              sel_word,
  input  logic [DATA_W-1:0] new_word,
  output logic [DATA_W-1:0] wdata
);

  always_comb begin
    wdata = old_word;
    if (sel_word) wdata = new_word;
    else          wdata[8*lane +: 8] = new_byte;
  end

endmodule
