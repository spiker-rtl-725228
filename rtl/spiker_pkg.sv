// spiker_pkg: types, fixed-point formats and model constants shared by the
// Spiker spiking-neural-network accelerator.
//
// Membrane potentials are signed 16-bit fixed point with 3 fractional bits
// (Q13.3), and synaptic weights are signed 5-bit with 3 fractional bits
// (Q2.3). Both formats come from the paper. Because they share the binary
// point, a weight adds to a potential after sign extension alone. The
// potentials are offset so that the resting potential is 0: the reset
// potential is 5.0 mV, the default threshold is 13.0 mV and the lateral
// inhibitory weight is -15. All of these are the paper's values, stored
// as Q13.3 codes. The leak factor dt/tau is 2^-10, so the leak is a
// 10-bit arithmetic right shift.
//
// The command encoding between the layer control unit and the neurons, the
// LFSR width and the tap table are this design's own choices.
package spiker_pkg;

  // Network size of the evaluated configuration (MNIST, Diehl & Cook network).
  localparam int unsigned N_INPUTS   = 784;   // 28 x 28 pixels
  localparam int unsigned N_NEURONS  = 400;   // one layer, lateral inhibition
  localparam int unsigned N_STEPS    = 3500;  // 350 ms / 0.1 ms

  // Fixed-point formats.
  localparam int unsigned V_W        = 16;    // membrane potential width
  localparam int unsigned V_FRAC     = 3;     // fractional bits
  localparam int unsigned W_W        = 5;     // weight width
  localparam int unsigned W_FRAC     = 3;     // fractional bits (same point as V)
  localparam int unsigned PIXEL_W    = 8;     // input intensity width
  localparam int unsigned LFSR_W     = 15;    // random value width (assumed)
  localparam int unsigned CNT_W      = 12;    // output counter width (3500 < 4096)

  // Leak: dt/tau = 2^-DECAY_SHIFT.
  localparam int unsigned DECAY_SHIFT = 10;

  // Model voltages after moving V_rest to 0 (Q13.3 codes: value * 8).
  localparam logic signed [V_W-1:0] V_RESET = 16'sd40;    //  5.0 mV
  localparam logic signed [V_W-1:0] V_TH0   = 16'sd104;   // 13.0 mV
  localparam logic signed [V_W-1:0] W_INH   = -16'sd120;  // -15.0

  typedef logic signed [V_W-1:0] v_t;
  typedef logic signed [W_W-1:0] w_t;

  // One-hot-free command from the layer control unit to every neuron.
  typedef enum logic [1:0] {
    CMD_NONE = 2'd0,   // hold the membrane potential
    CMD_EXC  = 2'd1,   // add the excitatory weight if the spike is set
    CMD_INH  = 2'd2,   // add the inhibitory weight if the spike is set
    CMD_FIRE = 2'd3    // end of step: fire and reset, or leak
  } neuron_cmd_e;

  // Feedback taps of a maximal-length Fibonacci LFSR (bit n-1 is the
  // highest tap). Taps from the usual maximal-length tables.
  function automatic logic [31:0] lfsr_taps(input int unsigned width);
    case (width)
      3:  return 32'h0000_0006;  // 3,2
      4:  return 32'h0000_000C;  // 4,3
      5:  return 32'h0000_0014;  // 5,3
      6:  return 32'h0000_0030;  // 6,5
      7:  return 32'h0000_0060;  // 7,6
      8:  return 32'h0000_00B8;  // 8,6,5,4
      9:  return 32'h0000_0110;  // 9,5
      10: return 32'h0000_0240;  // 10,7
      11: return 32'h0000_0500;  // 11,9
      12: return 32'h0000_0829;  // 12,6,4,1
      13: return 32'h0000_100D;  // 13,4,3,1
      14: return 32'h0000_2015;  // 14,5,3,1
      15: return 32'h0000_6000;  // 15,14
      16: return 32'h0000_D008;  // 16,15,13,4
      24: return 32'h00E1_0000;  // 24,23,22,17
      32: return 32'h8020_0003;  // 32,22,2,1
      default: return 32'h0000_0000;
    endcase
  endfunction

  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
