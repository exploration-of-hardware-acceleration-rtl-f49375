// xnor_tsr_top: XNOR (binary) CNN traffic-sign classifier, one frame at a time.
//
// Network (default parameters): 32x32x3 image -> Conv-1 5x5, 64 filters,
// real-valued input -> 2x2 max -> BN -> sign -> Conv-2 5x5, 128 binary
// filters -> 2x2 max -> BN -> sign -> FC-1 3200->512 -> BN -> sign ->
// FC-2 512->43 -> BN -> 43 class scores.
//
// Datapath:
//   input BRAM set (one BRAM per colour channel)
//     -> conv_in_ctrl -> conv_block (Conv-1) -> conv_out_ctrl
//   feature-map BRAM set 1 (one 1-bit BRAM per Conv-1 filter)
//     -> conv_in_ctrl -> conv_block (Conv-2) -> conv_out_ctrl
//   feature-map BRAM set 2 (one 1-bit BRAM per Conv-2 filter)
//     -> fc_in_ctrl -> dense_block (FC-1) -> dense_block (FC-2) -> result
// The two dense blocks are chained directly: FC-2 consumes FC-1's serial
// output as it leaves FC-1's serialiser.
//
// Operation: the host loads the image and all coefficients through the
// configuration port (cfg_we, cfg; see xnor_pkg for the targets and index
// meaning), then pulses start. A sequencer runs Conv-1, then Conv-2, then
// the dense layers; each convolutional layer reads one pixel per cycle.
// The 43 scores leave one per cycle on res_valid/res_idx/res_val (signed,
// BN_FRAC fraction bits); done pulses the cycle after the last one. A frame takes
// about 28*28*3*25 + 10*10*64*25 + 3200 + 512 + 43 = 222,555 cycles plus
// pipeline latency, i.e. about 449 frames/s at 100 MHz.
// The block structure, layer sizes and read order follow the published
// accelerator; the sequencer, host port and number formats are this
// design's choice. Reset clears the sequencer and the pipelines but not the
// loaded image or coefficients.
module xnor_tsr_top
  import xnor_pkg::*;
#(
  parameter int IMG_W     = 32,
  parameter int IMG_CH    = 3,
  parameter int K         = 5,
  parameter int C1_OUT    = 64,
  parameter int C2_OUT    = 128,
  parameter int F1_OUT    = 512,
  parameter int N_CLASSES = 43,
  localparam int P1  = (IMG_W - K + 1) / 2,   // Conv-1 pooled width (14)
  localparam int P2  = (P1 - K + 1) / 2,      // Conv-2 pooled width (5)
  localparam int F1_IN = C2_OUT * P2 * P2,    // 3200
  localparam int RW  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       cfg_we,
  input  cfg_wr_t                    cfg,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic                       res_valid,
  output logic [RW-1:0]              res_idx,
  output logic signed [BN_OUT_W-1:0] res_val
);

  localparam int IA_W = $clog2(IMG_W * IMG_W);
  localparam int F1A_W = $clog2(P1 * P1);
  localparam int F2A_W = (P2 * P2 > 1) ? $clog2(P2 * P2) : 1;

  // ------------------------------------------------------------------
  // configuration decode
  logic       we_c1, we_c2, we_f1, we_f2, we_img;
  layer_reg_e reg_c1, reg_c2, reg_f1, reg_f2;

  always_comb begin
    we_img = cfg_we && cfg.target == T_IMAGE;
    we_c1  = cfg_we && cfg.target inside {[T_C1_W:T_C1_BN_B]};
    we_c2  = cfg_we && cfg.target inside {[T_C2_W:T_C2_BN_B]};
    we_f1  = cfg_we && cfg.target inside {[T_F1_W:T_F1_BN_B]};
    we_f2  = cfg_we && cfg.target inside {[T_F2_W:T_F2_BN_B]};
    reg_c1 = layer_reg_e'(cfg.target - T_C1_W);
    reg_c2 = layer_reg_e'(cfg.target - T_C2_W);
    reg_f1 = layer_reg_e'(cfg.target - T_F1_W);
    reg_f2 = layer_reg_e'(cfg.target - T_F2_W);
  end

  // ------------------------------------------------------------------
  // frame sequencer
  typedef enum logic [1:0] {S_IDLE, S_C1, S_C2, S_FC} seq_e;
  seq_e state;
  logic c1_start, c2_start, fc_start;
  logic c1_done, c2_done;
  logic f2_valid;
  logic [RW-1:0] f2_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      c1_start <= 1'b0;
      c2_start <= 1'b0;
      fc_start <= 1'b0;
      done     <= 1'b0;
    end else begin
      c1_start <= 1'b0;
      c2_start <= 1'b0;
      fc_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start)   begin state <= S_C1; c1_start <= 1'b1; end
        S_C1:   if (c1_done) begin state <= S_C2; c2_start <= 1'b1; end
        S_C2:   if (c2_done) begin state <= S_FC; fc_start <= 1'b1; end
        S_FC:   if (f2_valid && f2_idx == RW'(N_CLASSES - 1)) begin
                  state <= S_IDLE;
                  done  <= 1'b1;
                end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ------------------------------------------------------------------
  // input BRAM set
  logic            img_rd_en;
  logic [IA_W-1:0] img_rd_addr;
  logic [PIX_W-1:0] img_rd_data [IMG_CH];

  for (genvar c = 0; c < IMG_CH; c++) begin : g_img
    fmap_bram #(.DEPTH(IMG_W * IMG_W), .WIDTH(PIX_W)) u_bram (
      .clk,
      .wr_en  (we_img && cfg.idx_a == 16'(c)),
      .wr_addr(cfg.idx_b[IA_W-1:0]),
      .wr_data(cfg.data[PIX_W-1:0]),
      .rd_en  (img_rd_en),
      .rd_addr(img_rd_addr),
      .rd_data(img_rd_data[c])
    );
  end

  // ------------------------------------------------------------------
  // Conv-1
  localparam int C1_CW = (IMG_CH > 1) ? $clog2(IMG_CH) : 1;
  localparam int KW    = $clog2(K * K);

  logic             c1_busy, c1_rd_done;
  logic [C1_CW-1:0] c1_rd_ch, c1_pix_ch;
  logic             c1_pix_valid, c1_k_last, c1_ch_last;
  logic [PIX_W-1:0] c1_pix;
  logic [KW-1:0]    c1_k;
  logic             c1_out_valid;
  logic [C1_OUT-1:0] c1_out_bits;

  conv_in_ctrl #(.IN_W(IMG_W), .IN_CH(IMG_CH), .K(K), .PW(PIX_W)) u_c1_in (
    .clk, .rst,
    .start      (c1_start),
    .busy       (c1_busy),
    .rd_en      (img_rd_en),
    .rd_ch      (c1_rd_ch),
    .rd_addr    (img_rd_addr),
    .rd_data    (img_rd_data),
    .pix_valid  (c1_pix_valid),
    .pix        (c1_pix),
    .pix_ch     (c1_pix_ch),
    .pix_k      (c1_k),
    .pix_k_last (c1_k_last),
    .pix_ch_last(c1_ch_last),
    .done       (c1_rd_done)
  );

  conv_block #(.IN_CH(IMG_CH), .OUT_CH(C1_OUT), .K(K), .BINARY_IN(1'b0), .PW(PIX_W)) u_c1 (
    .clk, .rst,
    .cfg_we   (we_c1),
    .cfg_reg  (reg_c1),
    .cfg_idx_a(cfg.idx_a),
    .cfg_idx_b(cfg.idx_b),
    .cfg_data (cfg.data),
    .pix_valid(c1_pix_valid),
    .pix      (c1_pix),
    .pix_ch   (c1_pix_ch),
    .pix_k    (c1_k),
    .pix_k_last (c1_k_last),
    .pix_ch_last(c1_ch_last),
    .out_valid(c1_out_valid),
    .out_bits (c1_out_bits)
  );

  logic              fm1_wr_en;
  logic [F1A_W-1:0]  fm1_wr_addr;
  logic [C1_OUT-1:0] fm1_wr_bits;

  conv_out_ctrl #(.OUT_PIX(P1 * P1), .OUT_CH(C1_OUT)) u_c1_out (
    .clk, .rst,
    .start   (c1_start),
    .in_valid(c1_out_valid),
    .in_bits (c1_out_bits),
    .wr_en   (fm1_wr_en),
    .wr_addr (fm1_wr_addr),
    .wr_bits (fm1_wr_bits),
    .done    (c1_done)
  );

  // ------------------------------------------------------------------
  // feature-map BRAM set 1 and Conv-2
  localparam int C2_CW = $clog2(C1_OUT);

  logic             fm1_rd_en;
  logic [F1A_W-1:0] fm1_rd_addr;
  logic [0:0]       fm1_rd_data [C1_OUT];

  for (genvar c = 0; c < C1_OUT; c++) begin : g_fm1
    fmap_bram #(.DEPTH(P1 * P1), .WIDTH(1)) u_bram (
      .clk,
      .wr_en  (fm1_wr_en),
      .wr_addr(fm1_wr_addr),
      .wr_data(fm1_wr_bits[c]),
      .rd_en  (fm1_rd_en),
      .rd_addr(fm1_rd_addr),
      .rd_data(fm1_rd_data[c])
    );
  end

  logic             c2_busy, c2_rd_done;
  logic [C2_CW-1:0] c2_rd_ch, c2_pix_ch;
  logic             c2_pix_valid, c2_k_last, c2_ch_last;
  logic [0:0]       c2_pix;
  logic [KW-1:0]    c2_k;
  logic             c2_out_valid;
  logic [C2_OUT-1:0] c2_out_bits;

  conv_in_ctrl #(.IN_W(P1), .IN_CH(C1_OUT), .K(K), .PW(1)) u_c2_in (
    .clk, .rst,
    .start      (c2_start),
    .busy       (c2_busy),
    .rd_en      (fm1_rd_en),
    .rd_ch      (c2_rd_ch),
    .rd_addr    (fm1_rd_addr),
    .rd_data    (fm1_rd_data),
    .pix_valid  (c2_pix_valid),
    .pix        (c2_pix),
    .pix_ch     (c2_pix_ch),
    .pix_k      (c2_k),
    .pix_k_last (c2_k_last),
    .pix_ch_last(c2_ch_last),
    .done       (c2_rd_done)
  );

  conv_block #(.IN_CH(C1_OUT), .OUT_CH(C2_OUT), .K(K), .BINARY_IN(1'b1), .PW(1)) u_c2 (
    .clk, .rst,
    .cfg_we   (we_c2),
    .cfg_reg  (reg_c2),
    .cfg_idx_a(cfg.idx_a),
    .cfg_idx_b(cfg.idx_b),
    .cfg_data (cfg.data),
    .pix_valid(c2_pix_valid),
    .pix      (c2_pix),
    .pix_ch   (c2_pix_ch),
    .pix_k    (c2_k),
    .pix_k_last (c2_k_last),
    .pix_ch_last(c2_ch_last),
    .out_valid(c2_out_valid),
    .out_bits (c2_out_bits)
  );

  logic              fm2_wr_en;
  logic [F2A_W-1:0]  fm2_wr_addr;
  logic [C2_OUT-1:0] fm2_wr_bits;

  conv_out_ctrl #(.OUT_PIX(P2 * P2), .OUT_CH(C2_OUT)) u_c2_out (
    .clk, .rst,
    .start   (c2_start),
    .in_valid(c2_out_valid),
    .in_bits (c2_out_bits),
    .wr_en   (fm2_wr_en),
    .wr_addr (fm2_wr_addr),
    .wr_bits (fm2_wr_bits),
    .done    (c2_done)
  );

  // ------------------------------------------------------------------
  // feature-map BRAM set 2, FC input controller, dense blocks
  logic             fm2_rd_en;
  logic [F2A_W-1:0] fm2_rd_addr;
  logic             fm2_rd_bits [C2_OUT];

  for (genvar c = 0; c < C2_OUT; c++) begin : g_fm2
    logic [0:0] q;
    fmap_bram #(.DEPTH(P2 * P2), .WIDTH(1)) u_bram (
      .clk,
      .wr_en  (fm2_wr_en),
      .wr_addr(fm2_wr_addr),
      .wr_data(fm2_wr_bits[c]),
      .rd_en  (fm2_rd_en),
      .rd_addr(fm2_rd_addr),
      .rd_data(q)
    );
    assign fm2_rd_bits[c] = q[0];
  end

  logic fc_busy, fc_rd_done, fc_in_valid, fc_in_bit;

  fc_in_ctrl #(.IN_CH(C2_OUT), .PIX(P2 * P2)) u_fc_in (
    .clk, .rst,
    .start    (fc_start),
    .busy     (fc_busy),
    .rd_en    (fm2_rd_en),
    .rd_addr  (fm2_rd_addr),
    .rd_bits  (fm2_rd_bits),
    .out_valid(fc_in_valid),
    .out_bit  (fc_in_bit),
    .done     (fc_rd_done)
  );

  localparam int F1_OIW = (F1_OUT > 1) ? $clog2(F1_OUT) : 1;
  logic                       f1_valid, f1_bit, f2_bit;
  logic [F1_OIW-1:0]          f1_idx;
  logic signed [BN_OUT_W-1:0] f1_val;

  dense_block #(.N_IN(F1_IN), .N_OUT(F1_OUT), .ACTIVATE(1'b1)) u_fc1 (
    .clk, .rst,
    .cfg_we   (we_f1),
    .cfg_reg  (reg_f1),
    .cfg_idx_a(cfg.idx_a),
    .cfg_idx_b(cfg.idx_b),
    .cfg_data (cfg.data),
    .in_valid (fc_in_valid),
    .in_bit   (fc_in_bit),
    .out_valid(f1_valid),
    .out_idx  (f1_idx),
    .out_bit  (f1_bit),
    .out_val  (f1_val)
  );

  dense_block #(.N_IN(F1_OUT), .N_OUT(N_CLASSES), .ACTIVATE(1'b0)) u_fc2 (
    .clk, .rst,
    .cfg_we   (we_f2),
    .cfg_reg  (reg_f2),
    .cfg_idx_a(cfg.idx_a),
    .cfg_idx_b(cfg.idx_b),
    .cfg_data (cfg.data),
    .in_valid (f1_valid),
    .in_bit   (f1_bit),
    .out_valid(f2_valid),
    .out_idx  (f2_idx),
    .out_bit  (f2_bit),
    .out_val  (res_val)
  );

  assign res_valid = f2_valid;
  assign res_idx   = f2_idx;

  // configuration must not change coefficients while a frame is running
  a_no_cfg_while_busy: assert property (@(posedge clk) disable iff (rst)
    cfg_we |-> state == S_IDLE)
    else $error("configuration write during a frame");

endmodule
