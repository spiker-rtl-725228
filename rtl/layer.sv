// layer: one fully connected Spiker layer of N_N LIF neurons with
// all-to-all lateral inhibition.
//
// All neurons are separate instances and update in parallel. The layer
// control unit (layer_cu) broadcasts one spike index per cycle. During the
// excitatory phase every neuron adds its own weight, taken from the
// weight-memory row that the index selects. Neuron j reads bits
// [j*W_W +: W_W] of that row. During the inhibitory phase every neuron
// adds the common inhibitory weight for each other neuron that fired in
// the previous step, and skips its own spike. The inhibitory spikes are
// the layer's own `out_spikes`, fed back and sampled at the start of each
// step. They are taken from the neurons' `spike_now` outputs, so they are
// right even while the previous step's fire decision is still executing.
// The structure follows the paper. The self-exclusion implements its
// wording "connected to all the other neurons". The row layout is this
// design's choice.
//
// Interface: `start` and `ready` form the handshake with the central
// control unit. `quiet` means ready with no command still in flight. `rd_en`, `rd_addr` and `rd_row` connect to the weight
// memory, which has a read latency of one cycle. `rst_v` returns every
// membrane to rest. `thr_we`, `thr_addr` and `thr_data` load neuron
// thr_addr's threshold. `out_spikes` holds the last step's spikes and is
// new when `out_valid` pulses.
module layer
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN = N_INPUTS,
  parameter int unsigned N_N  = N_NEURONS,
  localparam int unsigned EAW = clog2_min1(N_IN),
  localparam int unsigned NAW = clog2_min1(N_N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 ready,
  output logic                 quiet,
  input  logic [N_IN-1:0]      in_spikes,
  output logic                 rd_en,
  output logic [EAW-1:0]       rd_addr,
  input  logic [N_N*W_W-1:0]   rd_row,
  input  logic                 rst_v,
  input  logic                 thr_we,
  input  logic [NAW-1:0]       thr_addr,
  input  logic signed [V_W-1:0] thr_data,
  output logic [N_N-1:0]       out_spikes,
  output logic                 out_valid,
  output logic signed [V_W-1:0] v_mem [N_N],
  output logic                 exc_phase_run,
  output logic                 inh_phase_run,
  output logic                 step_skipped
);

  localparam int unsigned IDXW = clog2_min1((N_IN > N_N) ? N_IN : N_N);

  neuron_cmd_e     cmd;
  logic            cmd_spike;
  logic [IDXW-1:0] cmd_idx;
  logic [N_N-1:0]  spike_now;

  layer_cu #(.N_EXC(N_IN), .N_INH(N_N)) u_cu (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .exc_spikes    (in_spikes),
    .inh_spikes    (spike_now),
    .ready         (ready),
    .quiet         (quiet),
    .rd_en         (rd_en),
    .rd_addr       (rd_addr),
    .cmd           (cmd),
    .cmd_spike     (cmd_spike),
    .cmd_idx       (cmd_idx),
    .out_valid     (out_valid),
    .exc_phase_run (exc_phase_run),
    .inh_phase_run (inh_phase_run),
    .step_skipped  (step_skipped)
  );

  for (genvar j = 0; j < N_N; j++) begin : g_neuron
    logic self_inh;
    assign self_inh = (cmd == CMD_INH) && (32'(cmd_idx) == j);

    neuron u_neuron (
      .clk       (clk),
      .rst_n     (rst_n),
      .cmd       (cmd),
      .spike_in  (cmd_spike && !self_inh),
      .weight    (rd_row[j*W_W +: W_W]),
      .rst_v     (rst_v),
      .thr_we    (thr_we && (32'(thr_addr) == j)),
      .thr_data  (thr_data),
      .v         (v_mem[j]),
      .spike_out (out_spikes[j]),
      .spike_now (spike_now[j])
    );
  end

endmodule
