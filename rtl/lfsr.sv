// lfsr: maximal-length Fibonacci linear feedback shift register.
//
// Spiker draws one pseudo-random number per time step and shares it across
// every input of the spike generator. The paper names an LFSR as the source
// and notes that a maximal LFSR has a period of 2^width; a non-zero XOR LFSR
// in fact visits 2^width - 1 states, as this one does. Width, taps and seed
// are this design's choice: the taps come from the standard maximal-length
// table in spiker_pkg, and the seed must be non-zero.
//
// Interface: when `en` is high at a rising clock edge the register shifts
// left by one and the XOR of the tapped bits enters at bit 0. `value` is the
// register itself, so a new value is visible one cycle after `en`.
// Synchronous active-low reset loads SEED.
module lfsr
  import spiker_pkg::*;
#(
  parameter int unsigned       WIDTH = LFSR_W,
  parameter logic [WIDTH-1:0]  SEED  = {{(WIDTH-1){1'b0}}, 1'b1}
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  output logic [WIDTH-1:0] value
);

  localparam logic [31:0]      TAPS32 = lfsr_taps(WIDTH);
  localparam logic [WIDTH-1:0] TAPS   = TAPS32[WIDTH-1:0];

  logic feedback;
  assign feedback = ^(value & TAPS);

  always_ff @(posedge clk) begin
    if (!rst_n)  value <= SEED;
    else if (en) value <= {value[WIDTH-2:0], feedback};
  end

  initial begin
    assert (TAPS32 != 32'd0) else $error("lfsr: no tap table for WIDTH=%0d", WIDTH);
    assert (SEED != '0)      else $error("lfsr: SEED must be non-zero");
  end

endmodule
