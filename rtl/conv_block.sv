// conv_block: convolutional block (one convolutional layer with pooling,
// batch normalisation and activation).
//
// All OUT_CH filters run in parallel on the same tagged pixel stream from
// the input data controller. Per filter the chain is
//   filter -> channel accumulator + bias -> 2x2 max -> PPE (A*x+B, sign)
// For binary input (BINARY_IN=1) a shared context generator first gathers
// the K*K bits of one channel's window and each filter is an XNOR/popcount
// unit (7-cycle pipeline); for the real-valued first layer (BINARY_IN=0)
// each filter adds or subtracts the pixels as they arrive.
// Output: out_valid with one activation bit per filter, once per pooled
// pixel. Latency from the last pixel of a pooling window to out_valid:
// 1 (accumulator) + 1 (max) + 2 (PPE) cycles after the filter result, the
// filter taking 1 cycle (real) or 1 + 7 cycles (binary).
// Configuration: cfg_we with cfg_reg selecting weights (idx_a = filter,
// idx_b = input channel, data = K*K bits), bias, BN A or BN B (idx_a =
// filter). The structure follows the published accelerator; the register
// interface and number formats are this design's choice.
module conv_block
  import xnor_pkg::*;
#(
  parameter int IN_CH     = 3,
  parameter int OUT_CH    = 64,
  parameter int K         = 5,
  parameter bit BINARY_IN = 1'b0,
  parameter int PW        = PIX_W,   // pixel width (bit 0 used if binary)
  localparam int KK = K * K,
  localparam int CW = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int KW = $clog2(KK),
  localparam int FW = (OUT_CH > 1) ? $clog2(OUT_CH) : 1
) (
  input  logic               clk,
  input  logic               rst,
  // configuration writes
  input  logic               cfg_we,
  input  layer_reg_e         cfg_reg,
  input  logic [15:0]        cfg_idx_a,
  input  logic [15:0]        cfg_idx_b,
  input  logic [CFG_D_W-1:0] cfg_data,
  // tagged pixel stream
  input  logic               pix_valid,
  input  logic [PW-1:0]      pix,
  input  logic [CW-1:0]      pix_ch,
  input  logic [KW-1:0]      pix_k,
  input  logic               pix_k_last,
  input  logic               pix_ch_last,
  // pooled and activated results of all filters
  output logic               out_valid,
  output logic [OUT_CH-1:0]  out_bits
);

  logic signed [BN_A_W-1:0] bn_a [OUT_CH];
  logic signed [BN_B_W-1:0] bn_b [OUT_CH];

  wire          cfg_f_ok = cfg_idx_a < 16'(OUT_CH);
  wire [FW-1:0] cfg_f    = cfg_idx_a[FW-1:0];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_f_ok && cfg_reg == R_BN_A) bn_a[cfg_f] <= cfg_data[BN_A_W-1:0];
    if (cfg_we && cfg_f_ok && cfg_reg == R_BN_B) bn_b[cfg_f] <= cfg_data[BN_B_W-1:0];
  end

  // shared context generator (binary layers only)
  logic          ctx_valid, ctx_last;
  logic [KK-1:0] ctx;
  logic [CW-1:0] ctx_ch;

  if (BINARY_IN) begin : g_ctx
    context_gen #(.KK(KK), .CW(CW)) u_ctx (
      .clk, .rst,
      .in_valid  (pix_valid),
      .in_bit    (pix[0]),
      .in_k_last (pix_k_last),
      .in_ch     (pix_ch),
      .in_ch_last(pix_ch_last),
      .ctx_valid, .ctx, .ctx_ch, .ctx_last
    );
  end else begin : g_noctx
    assign ctx_valid = 1'b0;
    assign ctx       = '0;
    assign ctx_ch    = '0;
    assign ctx_last  = 1'b0;
  end

  logic [OUT_CH-1:0] f_valid;

  for (genvar f = 0; f < OUT_CH; f++) begin : g_filter
    logic                    w_we, b_we;
    logic                    p_valid, p_last, ws_valid, mx_valid;
    logic signed [ACC_W-1:0] p_sum, ws, mx;
    logic                    act_bit;
    logic signed [BN_OUT_W-1:0] act_val;
    logic                    act_tag;

    assign w_we = cfg_we && cfg_reg == R_WEIGHT && cfg_idx_a == 16'(f);
    assign b_we = cfg_we && cfg_reg == R_BIAS   && cfg_idx_a == 16'(f);

    if (BINARY_IN) begin : g_xnor
      xnor_filter #(.IN_CH(IN_CH), .KK(KK)) u_filt (
        .clk, .rst,
        .wr_en  (w_we),
        .wr_ch  (cfg_idx_b[CW-1:0]),
        .wr_data(cfg_data[KK-1:0]),
        .ctx_valid, .ctx, .ctx_ch, .ctx_last,
        .p_valid, .p_sum, .p_last
      );
    end else begin : g_real
      real_filter #(.IN_CH(IN_CH), .KK(KK), .PW(PW)) u_filt (
        .clk, .rst,
        .wr_en  (w_we),
        .wr_ch  (cfg_idx_b[CW-1:0]),
        .wr_data(cfg_data[KK-1:0]),
        .pix_valid,
        .pix    (signed'(pix)),
        .pix_ch, .pix_k, .pix_k_last, .pix_ch_last,
        .p_valid, .p_sum, .p_last
      );
    end

    conv_acc u_acc (
      .clk, .rst,
      .bias_we  (b_we),
      .bias_data(cfg_data[BIAS_W-1:0]),
      .p_valid, .p_sum, .p_last,
      .ws_valid, .ws
    );

    max_filter #(.WIN(4)) u_max (
      .clk, .rst,
      .in_valid (ws_valid),
      .in_data  (ws),
      .out_valid(mx_valid),
      .out_data (mx)
    );

    ppe #(.IN_W(ACC_W), .TAG_W(1)) u_ppe (
      .clk, .rst,
      .in_valid (mx_valid),
      .in_data  (mx),
      .in_tag   (1'b0),
      .a        (bn_a[f]),
      .b        (bn_b[f]),
      .out_valid(f_valid[f]),
      .out_bit  (act_bit),
      .out_val  (act_val),
      .out_tag  (act_tag)
    );

    assign out_bits[f] = act_bit;
  end

  // all filters run in lock step
  assign out_valid = f_valid[0];

endmodule
