// spike_generator: Spiker's input interface, converting input intensities
// into spike trains by rate coding.
//
// Every input i holds an intensity pixel[i]. The paper stores it in a
// PIXEL_W-bit register, 8 bits for MNIST. At each time step the
// generator compares that intensity with one pseudo-random number r, which
// is shared by all inputs. The paper chose a single LFSR for the whole
// input vector to save area. Input i spikes in that step when r < pixel[i],
// so its per-step spike probability is pixel[i] / 2^LFSR_W.
// The paper's text says a spike occurs "if n is greater than ASPS". That
// would make the brightest pixel the least active. This design keeps the
// paper's definition of ASPS as the average number of spikes per step
// instead.
//
// Interface: intensities are written one at a time through `wr_en`,
// `wr_addr` and `wr_data`; they are static data (an image). A one-cycle
// `gen` pulse samples all comparisons into `spikes` and advances the LFSR
// at the same edge. `spikes` then holds the step's spikes until the next
// `gen`. `clear` zeroes the spike vector. The write port, the `clear`
// input and the exact compare are this design's own choices.
module spike_generator
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN   = N_INPUTS,
  parameter int unsigned PIX_W  = PIXEL_W,
  parameter int unsigned RAND_W = LFSR_W,
  parameter logic [RAND_W-1:0] SEED = {{(RAND_W-1){1'b0}}, 1'b1},
  localparam int unsigned AW    = clog2_min1(N_IN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [PIX_W-1:0]  wr_data,
  input  logic              gen,
  input  logic              clear,
  output logic [N_IN-1:0]   spikes,
  output logic [RAND_W-1:0] rand_value
);

  logic [PIX_W-1:0] pixel [N_IN];

  lfsr #(.WIDTH(RAND_W), .SEED(SEED)) u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (gen),
    .value (rand_value)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_IN; i++) pixel[i] <= '0;
    end else if (wr_en && (32'(wr_addr) < N_IN)) begin
      pixel[wr_addr] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      spikes <= '0;
    end else if (gen) begin
      for (int i = 0; i < N_IN; i++)
        spikes[i] <= (rand_value < RAND_W'(pixel[i]));
    end
  end

  initial assert (RAND_W >= PIX_W)
    else $error("spike_generator: RAND_W must be at least PIX_W");

endmodule
