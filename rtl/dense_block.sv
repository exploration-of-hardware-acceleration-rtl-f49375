// dense_block: fully connected binary layer.
//
// Inputs arrive serially, one binary value per cycle (in_valid, in_bit),
// in flattened order. For input i the block reads word i of its weight BRAM,
// which holds input i's weight for all N_OUT neurons, XNORs the input bit
// with every weight and adds +1 (equal) or -1 (different) to each neuron's
// accumulator, all neurons in the same cycle. An input counter supplies the
// read address, so the weights are fetched while the input bit waits one
// cycle in a register.
// After input N_IN-1 the accumulators are handed to the serializer and
// cleared. The serialised sums then get their bias added (1 cycle) and pass
// through a PPE (batch normalisation A*x+B, 2 cycles). out_bit is the sign
// activation (used when ACTIVATE=1, as for a hidden layer); out_val is the
// normalised value (the class score of the last layer, ACTIVATE=0).
// Timing: the first output appears 5 cycles after the last input; then one
// output per cycle for N_OUT cycles. Consecutive dense blocks can be chained
// directly (out_valid/out_bit -> in_valid/in_bit).
// Configuration: cfg_reg = R_WEIGHT writes 32-bit lane idx_a of weight word
// idx_b; R_BIAS, R_BN_A and R_BN_B write neuron idx_a.
// The per-input weight word, parallel accumulation, serialiser and PPE
// follow the published accelerator; formats, load port and latencies are
// this design's choice.
module dense_block
  import xnor_pkg::*;
#(
  parameter int N_IN     = 3200,
  parameter int N_OUT    = 512,
  parameter bit ACTIVATE = 1'b1,
  localparam int IW    = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int OIW   = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int LANES = (N_OUT + 31) / 32,
  localparam int LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       cfg_we,
  input  layer_reg_e                 cfg_reg,
  input  logic [15:0]                cfg_idx_a,
  input  logic [15:0]                cfg_idx_b,
  input  logic [CFG_D_W-1:0]         cfg_data,
  input  logic                       in_valid,
  input  logic                       in_bit,
  output logic                       out_valid,
  output logic [OIW-1:0]             out_idx,
  output logic                       out_bit,
  output logic signed [BN_OUT_W-1:0] out_val
);

  // ---- per-neuron bias and batch-norm registers
  logic signed [BIAS_W-1:0] bias [N_OUT];
  logic signed [BN_A_W-1:0] bn_a [N_OUT];
  logic signed [BN_B_W-1:0] bn_b [N_OUT];

  wire           cfg_n_ok = cfg_idx_a < 16'(N_OUT);
  wire [OIW-1:0] cfg_n    = cfg_idx_a[OIW-1:0];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_n_ok && cfg_reg == R_BIAS) bias[cfg_n] <= cfg_data[BIAS_W-1:0];
    if (cfg_we && cfg_n_ok && cfg_reg == R_BN_A) bn_a[cfg_n] <= cfg_data[BN_A_W-1:0];
    if (cfg_we && cfg_n_ok && cfg_reg == R_BN_B) bn_b[cfg_n] <= cfg_data[BN_B_W-1:0];
  end

  // ---- weight memory, read one cycle ahead of the XNOR
  logic [IW-1:0]    in_cnt;
  logic [N_OUT-1:0] w_word;

  fc_weight_bram #(.DEPTH(N_IN), .WIDTH(N_OUT)) u_wmem (
    .clk,
    .wr_en  (cfg_we && cfg_reg == R_WEIGHT),
    .wr_addr(cfg_idx_b[IW-1:0]),
    .wr_lane(cfg_idx_a[LW-1:0]),
    .wr_data(cfg_data),
    .rd_en  (in_valid),
    .rd_addr(in_cnt),
    .rd_data(w_word)
  );

  logic x_valid, x_bit, x_last;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_cnt  <= '0;
      x_valid <= 1'b0;
      x_bit   <= 1'b0;
      x_last  <= 1'b0;
    end else begin
      x_valid <= in_valid;
      x_bit   <= in_bit;
      x_last  <= in_valid && in_cnt == IW'(N_IN - 1);
      if (in_valid) in_cnt <= (in_cnt == IW'(N_IN - 1)) ? '0 : in_cnt + 1'b1;
    end
  end

  // ---- XNOR and one accumulator per neuron
  logic signed [ACC_W-1:0] acc      [N_OUT];
  logic signed [ACC_W-1:0] acc_next [N_OUT];

  always_comb begin
    for (int j = 0; j < N_OUT; j++)
      acc_next[j] = (x_bit ~^ w_word[j]) ? acc[j] + ACC_W'(1) : acc[j] - ACC_W'(1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 0; j < N_OUT; j++) acc[j] <= '0;
    end else if (x_valid) begin
      for (int j = 0; j < N_OUT; j++) acc[j] <= x_last ? '0 : acc_next[j];
    end
  end

  // ---- serialiser
  logic                    s_valid;
  logic [OIW-1:0]          s_idx;
  logic signed [ACC_W-1:0] s_data;
  logic                    s_busy;

  serializer #(.N(N_OUT)) u_ser (
    .clk, .rst,
    .load     (x_valid && x_last),
    .in_data  (acc_next),
    .busy     (s_busy),
    .out_valid(s_valid),
    .out_idx  (s_idx),
    .out_data (s_data)
  );

  // ---- bias, then PPE
  logic                     b_valid;
  logic [OIW-1:0]           b_idx;
  logic signed [ACC_W-1:0]  b_sum;
  logic signed [BN_A_W-1:0] b_a;
  logic signed [BN_B_W-1:0] b_b;

  always_ff @(posedge clk) begin
    if (rst) begin
      b_valid <= 1'b0;
      b_idx   <= '0;
      b_sum   <= '0;
      b_a     <= '0;
      b_b     <= '0;
    end else begin
      b_valid <= s_valid;
      b_idx   <= s_idx;
      b_sum   <= s_data + ACC_W'(bias[s_idx]);
      b_a     <= bn_a[s_idx];
      b_b     <= bn_b[s_idx];
    end
  end

  logic act_bit;

  ppe #(.IN_W(ACC_W), .TAG_W(OIW)) u_ppe (
    .clk, .rst,
    .in_valid (b_valid),
    .in_data  (b_sum),
    .in_tag   (b_idx),
    .a        (b_a),
    .b        (b_b),
    .out_valid(out_valid),
    .out_bit  (act_bit),
    .out_val  (out_val),
    .out_tag  (out_idx)
  );

  // the last layer has no activation: out_bit then reports the raw sign
  assign out_bit = ACTIVATE ? act_bit : (out_val >= 0);

endmodule
