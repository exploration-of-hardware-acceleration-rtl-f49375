// tb_conv_block: two small convolutional blocks, one with binary input
// (XNOR filters) and one with real-valued input (add/subtract filters),
// 3 input channels, 4 filters, 3x3 kernel. Each is fed a stream of random
// pixels in the controller's order (4 pooling positions x channels x
// kernel pixels per pooled output) and every activation bit is compared
// with a reference: per position sum of +-1 (or +-pixel) products plus
// bias, maximum of the 4 positions, A*x+B, sign.
module tb_conv_block;
  import xnor_pkg::*;
  localparam int IN_CH = 3, OUT_CH = 4, K = 3, KK = 9, NPOOL = 40;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic               cfg_we = 0;
  layer_reg_e         cfg_reg = R_WEIGHT;
  logic [15:0]        cfg_idx_a = 0, cfg_idx_b = 0;
  logic [CFG_D_W-1:0] cfg_data = 0;
  logic               pix_valid = 0, pix_k_last = 0, pix_ch_last = 0;
  logic [7:0]         pix = 0;
  logic [1:0]         pix_ch = 0;
  logic [3:0]         pix_k = 0;
  logic               bo_valid, ro_valid;
  logic [OUT_CH-1:0]  bo_bits, ro_bits;
  int checks = 0, failures = 0;

  conv_block #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .K(K), .BINARY_IN(1'b1), .PW(1)) u_bin (
    .clk, .rst, .cfg_we, .cfg_reg, .cfg_idx_a, .cfg_idx_b, .cfg_data,
    .pix_valid, .pix(pix[0]), .pix_ch, .pix_k, .pix_k_last, .pix_ch_last,
    .out_valid(bo_valid), .out_bits(bo_bits));
  conv_block #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .K(K), .BINARY_IN(1'b0), .PW(8)) u_real (
    .clk, .rst, .cfg_we, .cfg_reg, .cfg_idx_a, .cfg_idx_b, .cfg_data,
    .pix_valid, .pix, .pix_ch, .pix_k, .pix_k_last, .pix_ch_last,
    .out_valid(ro_valid), .out_bits(ro_bits));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [KK-1:0] w [OUT_CH][IN_CH];
  int bias [OUT_CH], a [OUT_CH], b [OUT_CH];
  logic [OUT_CH-1:0] exp_b [$];
  logic [OUT_CH-1:0] exp_r [$];
  int n_bo = 0, n_ro = 0, n_ones = 0, n_zeros = 0;

  task automatic wr(layer_reg_e r, int ia, int ib, int d);
    cfg_we = 1; cfg_reg = r; cfg_idx_a = 16'(ia); cfg_idx_b = 16'(ib); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  always @(negedge clk) if (!rst) begin
    if (bo_valid) begin
      checks++;
      if (exp_b.size() == 0) failures++;
      else begin
        logic [OUT_CH-1:0] e;
        e = exp_b.pop_front();
        for (int f = 0; f < OUT_CH; f++) if (bo_bits[f] != e[f]) begin
          failures++; $display("FAIL binary pooled %0d filter %0d", n_bo, f);
        end
        for (int f = 0; f < OUT_CH; f++) if (bo_bits[f]) n_ones++; else n_zeros++;
      end
      n_bo++;
    end
    if (ro_valid) begin
      checks++;
      if (exp_r.size() == 0) failures++;
      else begin
        logic [OUT_CH-1:0] e;
        e = exp_r.pop_front();
        for (int f = 0; f < OUT_CH; f++) if (ro_bits[f] != e[f]) begin
          failures++; $display("FAIL real pooled %0d filter %0d", n_ro, f);
        end
      end
      n_ro++;
    end
  end

  initial begin
    logic signed [7:0] px [4][IN_CH][KK];
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int f = 0; f < OUT_CH; f++) begin
      for (int c = 0; c < IN_CH; c++) begin
        w[f][c] = KK'($urandom);
        wr(R_WEIGHT, f, c, int'(w[f][c]));
      end
      bias[f] = int'($urandom % 11) - 5;   wr(R_BIAS, f, 0, bias[f]);
      a[f]    = int'($urandom % 600) - 100; wr(R_BN_A, f, 0, a[f]);
      b[f]    = int'($urandom % 2001) - 1000; wr(R_BN_B, f, 0, b[f]);
    end
    for (int p = 0; p < NPOOL; p++) begin
      logic [OUT_CH-1:0] eb, er;
      for (int s = 0; s < 4; s++)
        for (int c = 0; c < IN_CH; c++)
          for (int k = 0; k < KK; k++) px[s][c][k] = 8'($urandom);
      for (int f = 0; f < OUT_CH; f++) begin
        longint mb, mr;
        for (int s = 0; s < 4; s++) begin
          longint sb, sr;
          sb = bias[f];
          sr = bias[f];
          for (int c = 0; c < IN_CH; c++)
            for (int k = 0; k < KK; k++) begin
              sb += (px[s][c][k][0] == w[f][c][k]) ? 1 : -1;
              sr += w[f][c][k] ? px[s][c][k] : -px[s][c][k];
            end
          if (s == 0 || sb > mb) mb = sb;
          if (s == 0 || sr > mr) mr = sr;
        end
        eb[f] = (longint'(a[f]) * mb + b[f]) >= 0;
        er[f] = (longint'(a[f]) * mr + b[f]) >= 0;
      end
      exp_b.push_back(eb);
      exp_r.push_back(er);
      for (int s = 0; s < 4; s++)
        for (int c = 0; c < IN_CH; c++)
          for (int k = 0; k < KK; k++) begin
            pix_valid = 1; pix = px[s][c][k]; pix_ch = 2'(c); pix_k = 4'(k);
            pix_k_last = (k == KK-1); pix_ch_last = (k == KK-1 && c == IN_CH-1);
            @(negedge clk);
          end
      pix_valid = 0;
      if (p % 5 == 0) repeat (3) @(negedge clk);
    end
    repeat (30) @(negedge clk);
    checks++;
    if (n_bo != NPOOL || n_ro != NPOOL) begin
      failures++; $display("FAIL outputs %0d/%0d, expected %0d", n_bo, n_ro, NPOOL);
    end
    checks++;
    if (n_ones == 0 || n_zeros == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
