// central_cu: Spiker's central control unit, which sequences the time steps
// of one input sequence (one image).
//
// A run covers N_STEPS steps of length dt. For each step the unit has the
// input interface generate a new spike vector, enables every layer in
// parallel, and waits until all layers report ready. It repeats this until
// the whole sequence is done. It then pulses `rst_v`, which returns every
// membrane to rest so that the next sequence starts from the same state.
// That much is the paper's. Layers pass spikes forward, so the network
// works as a pipeline.
//
// This design adds an overlap. The `gen` pulse for step k+1 goes out in
// the same cycle as `layer_start` for step k. The layer samples the old
// spike vector at that edge while the generator writes the new one, so
// generation costs no time except at the first step.
//
// Sequence: IDLE --start--> CLEAR (clear counters and spikes) -> GEN
// (first spike vector) -> RUN (start the layers whenever all are ready,
// until N_STEPS steps have begun) -> DRAIN (wait until every layer is
// quiet, its last fire decision executed) ->
// RESET (rst_v) -> IDLE, with a one-cycle `done` pulse. `busy` is high from
// the cycle after `start` until `done`.
module central_cu
  import spiker_pkg::*;
#(
  parameter int unsigned N_STEPS_P = N_STEPS,
  parameter int unsigned N_LAYERS  = 1,
  localparam int unsigned SW       = clog2_min1(N_STEPS_P + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N_LAYERS-1:0] layers_ready,
  input  logic [N_LAYERS-1:0] layers_quiet,
  output logic                gen,
  output logic                gen_clear,
  output logic                layer_start,
  output logic                rst_v,
  output logic                cnt_clear,
  output logic                busy,
  output logic                done,
  output logic [SW-1:0]       step
);

  typedef enum logic [2:0] {C_IDLE, C_CLEAR, C_GEN, C_RUN, C_DRAIN, C_RESET} cstate_e;

  cstate_e state;
  logic    all_ready;

  assign all_ready = &layers_ready;

  always_comb begin
    gen         = 1'b0;
    gen_clear   = 1'b0;
    layer_start = 1'b0;
    rst_v       = 1'b0;
    cnt_clear   = 1'b0;
    unique case (state)
      C_CLEAR: begin gen_clear = 1'b1; cnt_clear = 1'b1; end
      C_GEN:   gen = 1'b1;
      C_RUN:   if (all_ready) begin
        layer_start = 1'b1;
        gen         = (32'(step) < N_STEPS_P - 1);  // spikes for the next step
      end
      C_RESET: rst_v = 1'b1;
      default: ;
    endcase
  end

  assign busy = (state != C_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE;
      step  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE:  if (start) state <= C_CLEAR;
        C_CLEAR: begin step <= '0; state <= C_GEN; end
        C_GEN:   state <= C_RUN;
        C_RUN:   if (all_ready) begin
          step <= step + 1'b1;
          if (32'(step) == N_STEPS_P - 1) state <= C_DRAIN;
        end
        C_DRAIN: if (&layers_quiet) state <= C_RESET;
        C_RESET: begin state <= C_IDLE; done <= 1'b1; end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
