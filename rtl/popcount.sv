// popcount: pipelined Hamming-weight counter.
//
// Counts the ones of an N-bit vector with a binary adder tree: level s adds
// pairs of (s+1)-bit counts from level s-1, and every level is registered.
// The vector is padded with zeros to 2^S bits, S = ceil(log2 N), so the
// result appears S cycles after the input (5 cycles for the 25-bit context
// of a 5x5 filter, the figure the published accelerator quotes).
// in_valid travels alongside as out_valid.
module popcount #(
  parameter int N = 25,
  localparam int S  = (N > 1) ? $clog2(N) : 1,
  localparam int NP = 1 << S,
  localparam int OW = S + 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  logic [N-1:0]  in_vec,
  output logic          out_valid,
  output logic [OW-1:0] out_count
);

  // lvl[s][i]: i-th partial count after s adder levels
  logic [OW-1:0] lvl [S+1][NP];
  logic [S:0]    vld;

  always_comb begin
    for (int i = 0; i < NP; i++)
      lvl[0][i] = (i < N) ? OW'(in_vec[i]) : '0;
  end
  assign vld[0] = in_valid;

  for (genvar s = 0; s < S; s++) begin : g_level
    always_ff @(posedge clk) begin
      if (rst) begin
        vld[s+1] <= 1'b0;
        for (int i = 0; i < NP; i++) lvl[s+1][i] <= '0;
      end else begin
        vld[s+1] <= vld[s];
        for (int i = 0; i < NP; i++)
          lvl[s+1][i] <= (i < (NP >> (s + 1))) ? lvl[s][2*i] + lvl[s][2*i+1] : '0;
      end
    end
  end

  assign out_valid = vld[S];
  assign out_count = lvl[S][0];

endmodule
