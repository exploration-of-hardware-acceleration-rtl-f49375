// xnor_pkg: types and constants shared by the XNOR traffic-sign classifier.
//
// The network is the six-layer binary CNN for 32x32x3 GTSRB images:
// Conv-1 5x5x64 (real-valued input) -> 2x2 max -> Conv-2 5x5x128 (binary)
// -> 2x2 max -> FC-1 3200->512 -> FC-2 512->43. Those sizes follow the
// published network; the number formats below are this design's choice.
//
// Number formats (own choice):
//   * binary values: bit 1 = +1, bit 0 = -1
//   * input pixels: 8-bit two's complement, value = pix/128 in [-1, 1)
//   * accumulators: ACC_W-bit two's complement integers
//   * bias: BIAS_W-bit integer in accumulator units
//   * batch-norm A, B: signed fixed point with BN_FRAC fraction bits
//
// Configuration: a host writes image pixels, filter weights, biases and
// batch-norm coefficients through one write port carrying cfg_wr_t.
package xnor_pkg;

  localparam int ACC_W   = 20;
  localparam int BIAS_W  = 16;
  localparam int BN_A_W  = 16;
  localparam int BN_B_W  = 24;
  localparam int BN_FRAC = 8;
  localparam int PIX_W   = 8;
  localparam int CFG_D_W = 32;
  // width of a batch-normalised value: ACC_W x BN_A_W product plus one
  localparam int BN_OUT_W = ACC_W + BN_A_W + 1;

  // Which register file or memory a configuration write goes to.
  typedef enum logic [4:0] {
    T_IMAGE    = 5'd0,   // idx_a = channel, idx_b = pixel address, data = pixel
    T_C1_W     = 5'd1,   // idx_a = filter,  idx_b = input channel, data = K*K weight bits
    T_C1_BIAS  = 5'd2,   // idx_a = filter
    T_C1_BN_A  = 5'd3,
    T_C1_BN_B  = 5'd4,
    T_C2_W     = 5'd5,
    T_C2_BIAS  = 5'd6,
    T_C2_BN_A  = 5'd7,
    T_C2_BN_B  = 5'd8,
    T_F1_W     = 5'd9,   // idx_a = 32-bit lane, idx_b = input index
    T_F1_BIAS  = 5'd10,  // idx_a = neuron
    T_F1_BN_A  = 5'd11,
    T_F1_BN_B  = 5'd12,
    T_F2_W     = 5'd13,
    T_F2_BIAS  = 5'd14,
    T_F2_BN_A  = 5'd15,
    T_F2_BN_B  = 5'd16
  } cfg_target_e;

  typedef struct packed {
    cfg_target_e          target;
    logic [15:0]          idx_a;
    logic [15:0]          idx_b;
    logic [CFG_D_W-1:0]   data;
  } cfg_wr_t;

  // Register-file selector inside one layer.
  typedef enum logic [1:0] {
    R_WEIGHT = 2'd0,
    R_BIAS   = 2'd1,
    R_BN_A   = 2'd2,
    R_BN_B   = 2'd3
  } layer_reg_e;

endpackage
