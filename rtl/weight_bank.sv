// weight_bank: one synchronous block-RAM bank of the weight memory.
//
// DEPTH words of WIDTH bits, with one write port and one registered read
// port (read latency one cycle). The coding is the form FPGA tools infer as
// block RAM: an array written and read in a clocked process. A wide WIDTH
// maps onto several physical BRAMs that share the address. The read port
// holds its output when `rd_en` is low. Contents are undefined until
// written.
module weight_bank #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 2000,
  localparam int unsigned AW   = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
