// xnor_filter: one binary convolution filter (one output channel).
//
// Holds the flattened KK-bit filter of every input channel in a weight
// register. For each context it computes, in three pipelined steps,
//   1. X = ~(context ^ W[channel])              1 cycle
//   2. P = popcount(X)                          ceil(log2 KK) cycles (5 for 5x5)
//   3. C = 2P - KK                              1 cycle
// so p_sum is the +-1 dot product of context and filter for that channel,
// 7 cycles after ctx_valid for a 5x5 kernel. The tag ctx_last (last input
// channel of a position) travels with it as p_last.
// Weights are written through wr_en / wr_ch / wr_data (one channel's
// flattened filter per write). The three steps and their cycle counts follow
// the published accelerator; the load port is this design's choice.
module xnor_filter
  import xnor_pkg::*;
#(
  parameter int IN_CH = 64,
  parameter int KK    = 25,
  localparam int CW = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int S  = (KK > 1) ? $clog2(KK) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    wr_en,
  input  logic [CW-1:0]           wr_ch,
  input  logic [KK-1:0]           wr_data,
  input  logic                    ctx_valid,
  input  logic [KK-1:0]           ctx,
  input  logic [CW-1:0]           ctx_ch,
  input  logic                    ctx_last,
  output logic                    p_valid,
  output logic signed [ACC_W-1:0] p_sum,
  output logic                    p_last
);

  logic [KK-1:0] weights [IN_CH];

  always_ff @(posedge clk) begin
    if (wr_en) weights[wr_ch] <= wr_data;
  end

  // step 1: XNOR
  logic          x_valid;
  logic [KK-1:0] x_vec;
  always_ff @(posedge clk) begin
    if (rst) begin
      x_valid <= 1'b0;
      x_vec   <= '0;
    end else begin
      x_valid <= ctx_valid;
      x_vec   <= ~(ctx ^ weights[ctx_ch]);
    end
  end

  // step 2: popcount; the last-channel tag is delayed to match
  logic         pc_valid;
  logic [S:0]   pc_count;
  logic [S:0]   last_d;     // last_d[0] aligned with x_vec
  popcount #(.N(KK)) u_pc (
    .clk, .rst,
    .in_valid (x_valid),
    .in_vec   (x_vec),
    .out_valid(pc_valid),
    .out_count(pc_count)
  );

  always_ff @(posedge clk) begin
    if (rst) last_d <= '0;
    else     last_d <= {last_d[S-1:0], ctx_last};
  end

  // step 3: C = 2P - N
  always_ff @(posedge clk) begin
    if (rst) begin
      p_valid <= 1'b0;
      p_sum   <= '0;
      p_last  <= 1'b0;
    end else begin
      p_valid <= pc_valid;
      p_sum   <= ACC_W'(signed'({1'b0, pc_count}) <<< 1) - ACC_W'(KK);
      p_last  <= last_d[S];
    end
  end

endmodule
