// output_counters: Spiker's output interface, one spike counter per output
// neuron.
//
// The firing rate of neuron j is count[j] divided by the sequence length.
// That length is the same for every neuron, so the division is left out
// and the raw counts are the result: the most active neuron gives the
// class. This follows the paper. The counter width (12 bits, enough for
// 3500 steps) and the saturation at the maximum are this design's choices.
//
// Interface: `clear` zeroes all counters. In a cycle with `inc_valid`
// high, every counter whose `inc` bit is set advances by one at the clock
// edge. `clear` has priority.
module output_counters
  import spiker_pkg::*;
#(
  parameter int unsigned N  = N_NEURONS,
  parameter int unsigned CW = CNT_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          inc_valid,
  input  logic [N-1:0]  inc,
  output logic [CW-1:0] count [N]
);

  always_ff @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      if (!rst_n || clear)
        count[j] <= '0;
      else if (inc_valid && inc[j] && (count[j] != {CW{1'b1}}))
        count[j] <= count[j] + 1'b1;
    end
  end

endmodule
