// neuron: Spiker's leaky integrate-and-fire neuron, reduced to one adder, a
// shifter and a comparator.
//
// The paper moves every voltage so that the resting potential is 0. It also
// rounds dt/tau to a power of two, 2^-DECAY, so the clock-driven leak
//   V[n] = V[n-1] - (dt/tau) * V[n-1]
// becomes V - (V >>> DECAY), with no multiplier. This neuron applies that
// leak once per time step. The neuron runs one command per cycle, given by
// the layer control unit:
//   CMD_EXC  : V += weight    (excitatory synapse weight from BRAM), if spike_in
//   CMD_INH  : V += W_INH_V   (one inhibitory weight for all lateral links), if spike_in
//   CMD_FIRE : end of step. If V exceeds the threshold, spike_out <= 1 and
//              V <= V_RESET; otherwise spike_out <= 0 and V leaks.
//   CMD_NONE : hold.
// `rst_v` is the paper's synchronous "RESET V". It forces V to the rest
// potential 0 and clears spike_out at the end of a whole input sequence.
// The threshold sits in a per-neuron register, loaded through `thr_we`,
// so each neuron can have its own trained threshold. Reset loads V_TH_INIT.
//
// The paper gives the formats (Q13.3 potential, Q2.3 weight), the shift
// leak, the fire/reset rule, RESET V and the per-neuron threshold. This
// design makes its own choices for: saturation on every addition, so that
// heavy lateral inhibition cannot wrap the potential; the strict ">" in
// the threshold test; no leak in a step in which the neuron fires; and the
// command encoding.
//
// Timing: every command takes effect at the next rising edge. spike_out is
// a register that holds the result of the last CMD_FIRE. spike_now is the
// same value one cycle early: during a CMD_FIRE it shows the decision being
// made (combinational, from V and the threshold), otherwise spike_out.
module neuron
  import spiker_pkg::*;
#(
  parameter int unsigned      VW        = V_W,
  parameter int unsigned      WW        = W_W,
  parameter int unsigned      DECAY     = DECAY_SHIFT,
  parameter logic signed [VW-1:0] V_RESET_V = V_RESET,
  parameter logic signed [VW-1:0] V_TH_INIT = V_TH0,
  parameter logic signed [VW-1:0] W_INH_V   = W_INH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  neuron_cmd_e          cmd,
  input  logic                 spike_in,
  input  logic signed [WW-1:0] weight,
  input  logic                 rst_v,
  input  logic                 thr_we,
  input  logic signed [VW-1:0] thr_data,
  output logic signed [VW-1:0] v,
  output logic                 spike_out,
  output logic                 spike_now
);

  localparam logic signed [VW-1:0] V_MAX = {1'b0, {(VW-1){1'b1}}};
  localparam logic signed [VW-1:0] V_MIN = {1'b1, {(VW-1){1'b0}}};

  logic signed [VW-1:0] threshold;
  logic signed [VW-1:0] addend;
  logic signed [VW:0]   sum;       // one guard bit for saturation
  logic signed [VW-1:0] v_sat;
  logic signed [VW-1:0] v_leak;
  logic                 fire;

  always_comb begin
    addend = (cmd == CMD_INH) ? W_INH_V : VW'(weight);  // sign-extending cast
    sum    = {v[VW-1], v} + {addend[VW-1], addend};
    if (sum > $signed({V_MAX[VW-1], V_MAX}))      v_sat = V_MAX;
    else if (sum < $signed({V_MIN[VW-1], V_MIN})) v_sat = V_MIN;
    else                                          v_sat = sum[VW-1:0];
    v_leak = v - (v >>> DECAY);
    fire   = (v > threshold);
  end

  // The spike this neuron will hold after the current command: lets the
  // layer sample the inhibitory vector while a FIRE is still executing.
  assign spike_now = (cmd == CMD_FIRE) ? fire : spike_out;

  always_ff @(posedge clk) begin
    if (!rst_n)      threshold <= V_TH_INIT;
    else if (thr_we) threshold <= thr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || rst_v) begin
      v         <= '0;
      spike_out <= 1'b0;
    end else begin
      unique case (cmd)
        CMD_EXC, CMD_INH: if (spike_in) v <= v_sat;
        CMD_FIRE: begin
          if (fire) begin
            v         <= V_RESET_V;
            spike_out <= 1'b1;
          end else begin
            v         <= v_leak;
            spike_out <= 1'b0;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
