// weight_addr_translator: maps the index of the spike under elaboration to
// a physical BRAM location.
//
// The weights for one input index (one weight per neuron) form one wide
// memory row, stored across many BRAMs side by side that are read in
// parallel. A single BRAM holds only BANK_DEPTH rows, 512 in a 36 Kb
// block set 512 words deep. The N_ROWS logical rows are therefore split
// into consecutive banks:
//   bank = index / BANK_DEPTH,  row = index % BANK_DEPTH.
// The paper requires a circuit that turns the spike index into addresses
// for every BRAM read in parallel, but does not describe it. This
// depth-split mapping is the simplest one and is this design's own choice.
//
// Interface: purely combinational. `valid` is low for an index past the
// last row. With a power-of-two BANK_DEPTH the division and remainder are
// just a split of the index bits, so at the default size the block is
// wiring plus one range compare; a non-power-of-two depth gives real
// dividers. That is why, at the default size, all outputs but `valid` are
// plain copies of index bits: the row is index[8:0], the bank index[9].
module weight_addr_translator
  import spiker_pkg::*;
#(
  parameter int unsigned N_ROWS     = N_INPUTS,
  parameter int unsigned BANK_DEPTH = 512,
  localparam int unsigned N_BANKS   = (N_ROWS + BANK_DEPTH - 1) / BANK_DEPTH,
  localparam int unsigned IW        = clog2_min1(N_ROWS),
  localparam int unsigned RW        = clog2_min1(BANK_DEPTH),
  localparam int unsigned BW        = clog2_min1(N_BANKS)
) (
  input  logic [IW-1:0] index,
  output logic [BW-1:0] bank,
  output logic [RW-1:0] row,
  output logic          valid
);

  logic [31:0] idx32;

  always_comb begin
    idx32 = 32'(index);
    bank  = BW'(idx32 / BANK_DEPTH);
    row   = RW'(idx32 % BANK_DEPTH);
    valid = (idx32 < N_ROWS);
  end

endmodule
