// weight_memory: the on-chip (BRAM) store of Spiker's excitatory synaptic
// weights.
//
// Each weight is a 5-bit Q2.3 value. Row i holds the weights from input i to
// all N_N neurons, neuron j in bits [j*W_W +: W_W]. One read therefore
// delivers every weight that one input spike needs, and all neurons update
// in the same cycle. For MNIST the store is 784 rows x 400 x 5 bits,
// 1,568,000 bits (196 KB). The paper fits this in 45 BRAMs, read in
// parallel. The rows are split over banks of BANK_DEPTH rows;
// weight_addr_translator turns the logical index into a (bank, row) pair.
// For MNIST that is one bank of 512 rows and one of 272.
// The paper's weights come from offline STDP training and are loaded
// through the write port.
//
// Interface: write a whole row with `wr_en`, `wr_addr` and `wr_data`. Read
// with `rd_en` and `rd_addr`; `rd_data` is valid on the next cycle and
// holds until the next read. Both addresses are logical input indices.
// The banking, the write port and the read latency are this design's
// choices; the paper gives only the content and the parallel access.
module weight_memory
  import spiker_pkg::*;
#(
  parameter int unsigned N_ROWS     = N_INPUTS,
  parameter int unsigned N_N        = N_NEURONS,
  parameter int unsigned BANK_DEPTH = 512,
  localparam int unsigned ROW_W     = N_N * W_W,
  localparam int unsigned N_BANKS   = (N_ROWS + BANK_DEPTH - 1) / BANK_DEPTH,
  localparam int unsigned IW        = clog2_min1(N_ROWS),
  localparam int unsigned RW        = clog2_min1(BANK_DEPTH),
  localparam int unsigned BW        = clog2_min1(N_BANKS)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [IW-1:0]    wr_addr,
  input  logic [ROW_W-1:0] wr_data,
  input  logic             rd_en,
  input  logic [IW-1:0]    rd_addr,
  output logic [ROW_W-1:0] rd_data
);

  logic [BW-1:0]    wr_bank, rd_bank, rd_bank_q;
  logic [RW-1:0]    wr_row, rd_row;
  logic             wr_ok, rd_ok;
  logic [ROW_W-1:0] bank_data [N_BANKS];

  weight_addr_translator #(.N_ROWS(N_ROWS), .BANK_DEPTH(BANK_DEPTH)) u_wr_xlate (
    .index (wr_addr), .bank (wr_bank), .row (wr_row), .valid (wr_ok)
  );

  weight_addr_translator #(.N_ROWS(N_ROWS), .BANK_DEPTH(BANK_DEPTH)) u_rd_xlate (
    .index (rd_addr), .bank (rd_bank), .row (rd_row), .valid (rd_ok)
  );

  // Every bank is BANK_DEPTH rows deep except the last, which holds only
  // the rows that remain (272 of 784 for MNIST).
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    localparam int unsigned DEPTH = (b == N_BANKS - 1) ? N_ROWS - b * BANK_DEPTH : BANK_DEPTH;
    localparam int unsigned AW    = clog2_min1(DEPTH);

    weight_bank #(.DEPTH(DEPTH), .WIDTH(ROW_W)) u_bank (
      .clk     (clk),
      .wr_en   (wr_en && wr_ok && (32'(wr_bank) == b)),
      .wr_addr (AW'(wr_row)),
      .wr_data (wr_data),
      .rd_en   (rd_en && rd_ok && (32'(rd_bank) == b)),
      .rd_addr (AW'(rd_row)),
      .rd_data (bank_data[b])
    );
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_bank_q <= rd_bank;
  end

  assign rd_data = bank_data[rd_bank_q];

endmodule
