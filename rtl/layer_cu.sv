// layer_cu: control unit of one Spiker layer.
//
// Each neuron handles one input spike per cycle. The layer control unit
// therefore serialises the step's spikes and broadcasts them, one index per
// cycle, to all neurons of the layer at once. On `start`, the unit samples
// both spike vectors in parallel:
//   * the excitatory spikes from the previous layer or the input interface;
//   * the inhibitory spikes, which are this layer's own outputs from the
//     previous step.
// It then visits every excitatory index in order, then every inhibitory
// index, and finally issues one end-of-step command, on which the neurons
// fire or leak. An OR over each sampled vector decides whether that phase
// runs at all. A step with no spikes costs only the end-of-step command,
// and that skip is where the speed of the design comes from. All of this
// follows the paper. The order within a phase (every index visited, one per
// cycle) is this design's choice. It matches the paper's 215 us per image
// (see README).
//
// Interface: `rd_en` and `rd_addr` address the weight memory during the
// excitatory phase. The memory answers one cycle later, so the commands to
// the neurons (`cmd`, `cmd_spike`, `cmd_idx`) are delayed by one register
// to line up with the weight row. `out_valid` pulses one cycle after the
// end-of-step command has run, when the neurons' spike outputs are new.
// `ready` is high while the unit is idle and can take the next `start`.
// A `start` given when it is not ready is a protocol error, flagged by an
// assertion. `quiet` also requires that no command is still in flight.
//
// Timing: a step without spikes costs one cycle. The unit issues the
// end-of-step command in the `start` cycle and stays ready, so a run of
// silent steps proceeds at one step per clock. The neurons then execute
// that command while the next step is being sampled. For this reason
// `inh_spikes` must be the neurons' `spike_now` outputs, which show the
// spike being decided in that cycle. A step with spikes costs
// 2 + (any excitatory ? N_EXC : 0) + (any inhibitory ? N_INH : 0) cycles.
module layer_cu
  import spiker_pkg::*;
#(
  parameter int unsigned N_EXC = N_INPUTS,
  parameter int unsigned N_INH = N_NEURONS,
  localparam int unsigned EAW  = clog2_min1(N_EXC),
  localparam int unsigned IAW  = clog2_min1(N_INH),
  localparam int unsigned IDXW = clog2_min1((N_EXC > N_INH) ? N_EXC : N_INH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N_EXC-1:0]  exc_spikes,
  input  logic [N_INH-1:0]  inh_spikes,
  output logic              ready,
  output logic              quiet,
  output logic              rd_en,
  output logic [EAW-1:0]    rd_addr,
  output neuron_cmd_e       cmd,
  output logic              cmd_spike,
  output logic [IDXW-1:0]   cmd_idx,
  output logic              out_valid,
  output logic              exc_phase_run,   // pulse: this step has excitatory spikes
  output logic              inh_phase_run,   // pulse: this step has inhibitory spikes
  output logic              step_skipped     // pulse: no spikes at all in this step
);

  typedef enum logic [1:0] {S_IDLE, S_EXC, S_INH, S_FIRE} state_e;

  state_e            state;
  logic [N_EXC-1:0]  exc_q;
  logic [N_INH-1:0]  inh_q;
  logic [IDXW-1:0]   idx;
  neuron_cmd_e       cmd_i;
  logic              spike_i;
  logic              any_exc_in, any_inh_in, any_inh_q;

  assign any_exc_in = |exc_spikes;
  assign any_inh_in = |inh_spikes;
  assign any_inh_q  = |inh_q;

  assign ready   = (state == S_IDLE);
  assign quiet   = ready && (cmd == CMD_NONE);
  assign rd_en   = (state == S_EXC);
  assign rd_addr = EAW'(idx);

  assign exc_phase_run = ready && start && any_exc_in;
  assign inh_phase_run = ready && start && any_inh_in;
  assign step_skipped  = ready && start && !any_exc_in && !any_inh_in;

  // Command issued this cycle, before the alignment register.
  always_comb begin
    cmd_i   = CMD_NONE;
    spike_i = 1'b0;
    unique case (state)
      S_IDLE: if (start && !any_exc_in && !any_inh_in) cmd_i = CMD_FIRE;  // silent step
      S_EXC:  begin cmd_i = CMD_EXC;  spike_i = exc_q[EAW'(idx)]; end
      S_INH:  begin cmd_i = CMD_INH;  spike_i = inh_q[IAW'(idx)]; end
      S_FIRE: cmd_i = CMD_FIRE;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      exc_q <= '0;
      inh_q <= '0;
      idx   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          exc_q <= exc_spikes;
          inh_q <= inh_spikes;
          idx   <= '0;
          if (any_exc_in)      state <= S_EXC;
          else if (any_inh_in) state <= S_INH;
          // else: silent step, FIRE issued this cycle, stay idle
        end
        S_EXC: begin
          if (32'(idx) == N_EXC - 1) begin
            idx   <= '0;
            state <= any_inh_q ? S_INH : S_FIRE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_INH: begin
          if (32'(idx) == N_INH - 1) begin
            idx   <= '0;
            state <= S_FIRE;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_FIRE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // One-cycle alignment with the synchronous weight memory.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd       <= CMD_NONE;
      cmd_spike <= 1'b0;
      cmd_idx   <= '0;
      out_valid <= 1'b0;
    end else begin
      cmd       <= cmd_i;
      cmd_spike <= spike_i;
      cmd_idx   <= idx;
      out_valid <= (cmd == CMD_FIRE);
    end
  end

  // Handshake rule: the central control unit starts a layer only when ready.
  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready)
    else $error("layer_cu: start while busy");

endmodule
