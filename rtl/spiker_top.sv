// spiker_top: the Spiker accelerator in its evaluated configuration. It is
// a rate-coded input interface for 784 pixels, one fully connected layer
// of 400 LIF neurons with all-to-all lateral inhibition, a BRAM weight
// store, and one spike counter per neuron.
//
// Data flow: spike_generator -> layer (layer_cu + N_N neurons, with the
// weight_memory answering each spike index) -> output_counters.
// central_cu paces the steps. The paper gives the block structure, the
// control flow between the units and all sizes. Ports, handshakes and the
// loading of data are this design's choices.
//
// Use: after reset, load the intensities (`pix_*`), the weight rows (`w_*`)
// and, if wanted, per-neuron thresholds (`thr_*`; the default is 13.0 mV).
// Pulse `start`. The accelerator runs N_STEPS steps and pulses `done`;
// `counts` then holds each neuron's spike count for the sequence, and the
// membranes are back at rest. The weights and thresholds stay loaded, so
// the next image needs only new intensities and another `start`.
// Latency, counting the cycle in which `start` is high up to the cycle in
// which `done` is high: 7 + the sum over all steps of the step cost. A
// silent step costs 1 cycle. A step with spikes costs 2, plus N_IN if any
// input spiked, plus N_N if any neuron fired in the previous step.
module spiker_top
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN       = N_INPUTS,
  parameter int unsigned N_N        = N_NEURONS,
  parameter int unsigned STEPS      = N_STEPS,
  parameter int unsigned BANK_DEPTH = 512,
  parameter int unsigned RAND_W     = LFSR_W,
  // Seed 1 is avoided: its first states are the powers of two, which make
  // every bright pixel fire in each of the first eight steps.
  parameter logic [RAND_W-1:0] SEED = RAND_W'(32'h5A5A),
  localparam int unsigned IW  = clog2_min1(N_IN),
  localparam int unsigned NAW = clog2_min1(N_N),
  localparam int unsigned SW  = clog2_min1(STEPS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [SW-1:0]         step,
  // input intensities
  input  logic                  pix_we,
  input  logic [IW-1:0]         pix_addr,
  input  logic [PIXEL_W-1:0]    pix_data,
  // weight rows
  input  logic                  w_we,
  input  logic [IW-1:0]         w_addr,
  input  logic [N_N*W_W-1:0]    w_data,
  // thresholds
  input  logic                  thr_we,
  input  logic [NAW-1:0]        thr_addr,
  input  logic signed [V_W-1:0] thr_data,
  // results
  output logic [CNT_W-1:0]      counts [N_N],
  output logic [N_N-1:0]        out_spikes,
  output logic                  out_valid,
  // activity of the current step (for monitoring)
  output logic                  exc_phase_run,
  output logic                  inh_phase_run,
  output logic                  step_skipped
);

  logic                  gen, gen_clear, layer_start, rst_v, cnt_clear;
  logic                  layer_ready, layer_quiet;
  logic [N_IN-1:0]       in_spikes;
  logic                  rd_en;
  logic [IW-1:0]         rd_addr;
  logic [N_N*W_W-1:0]    rd_row;
  logic signed [V_W-1:0] v_mem [N_N];
  logic [RAND_W-1:0]     rand_value;

  central_cu #(.N_STEPS_P(STEPS), .N_LAYERS(1)) u_cu (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .layers_ready (layer_ready),
    .layers_quiet (layer_quiet),
    .gen          (gen),
    .gen_clear    (gen_clear),
    .layer_start  (layer_start),
    .rst_v        (rst_v),
    .cnt_clear    (cnt_clear),
    .busy         (busy),
    .done         (done),
    .step         (step)
  );

  spike_generator #(.N_IN(N_IN), .PIX_W(PIXEL_W), .RAND_W(RAND_W), .SEED(SEED)) u_in (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (pix_we),
    .wr_addr    (pix_addr),
    .wr_data    (pix_data),
    .gen        (gen),
    .clear      (gen_clear),
    .spikes     (in_spikes),
    .rand_value (rand_value)
  );

  layer #(.N_IN(N_IN), .N_N(N_N)) u_layer (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (layer_start),
    .ready         (layer_ready),
    .quiet         (layer_quiet),
    .in_spikes     (in_spikes),
    .rd_en         (rd_en),
    .rd_addr       (rd_addr),
    .rd_row        (rd_row),
    .rst_v         (rst_v),
    .thr_we        (thr_we),
    .thr_addr      (thr_addr),
    .thr_data      (thr_data),
    .out_spikes    (out_spikes),
    .out_valid     (out_valid),
    .v_mem         (v_mem),
    .exc_phase_run (exc_phase_run),
    .inh_phase_run (inh_phase_run),
    .step_skipped  (step_skipped)
  );

  weight_memory #(.N_ROWS(N_IN), .N_N(N_N), .BANK_DEPTH(BANK_DEPTH)) u_wmem (
    .clk     (clk),
    .wr_en   (w_we),
    .wr_addr (w_addr),
    .wr_data (w_data),
    .rd_en   (rd_en),
    .rd_addr (rd_addr),
    .rd_data (rd_row)
  );

  output_counters #(.N(N_N), .CW(CNT_W)) u_out (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (cnt_clear),
    .inc_valid (out_valid),
    .inc       (out_spikes),
    .count     (counts)
  );

endmodule
