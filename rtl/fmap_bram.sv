// fmap_bram: one channel of an input image or feature map.
//
// The accelerator keeps every channel in a block RAM of its own, so the
// filters of a layer can write their results to separate memories in the
// same cycle, and a read controller selects the channel it reads from.
// This is a simple dual-port RAM: one write port, one read port whose data
// appears on rd_data one clock after rd_en (registered read, as in an FPGA
// block RAM). Read-during-write to the same address returns the old word.
// One RAM per channel follows the published architecture; depth, width and
// latency are this design's choice.
module fmap_bram #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 8,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
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
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
