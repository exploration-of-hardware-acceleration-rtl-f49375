// fc_weight_bram: weight memory of a dense (fully connected) layer.
//
// One word per layer input holds that input's weight bit for every neuron
// (bit j = weight to neuron j, 1 meaning +1), so a single read supplies all
// neurons at once. The word is split into 32-bit lanes, each its own RAM,
// so a 32-bit host port can load it lane by lane (wr_lane selects the lane;
// the last lane may be narrower). Reads are registered: rd_data is valid
// one cycle after rd_en.
// One-word-per-input organisation follows the published accelerator; the
// lane split for loading is this design's choice.
module fc_weight_bram #(
  parameter int DEPTH = 3200,
  parameter int WIDTH = 512,
  localparam int LANES = (WIDTH + 31) / 32,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int LW = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [LW-1:0]    wr_lane,
  input  logic [31:0]      wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int LO  = 32 * l;
    localparam int LBW = ((WIDTH - LO) < 32) ? (WIDTH - LO) : 32;
    logic [LBW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_lane == LW'(l)) mem[wr_addr] <= wr_data[LBW-1:0];
      if (rd_en) rd_data[LO +: LBW] <= mem[rd_addr];
    end
  end

endmodule
