// tsr_tb_core: end-to-end self-checking bench for xnor_tsr_top.
//
// Loads random coefficients and random images through the host port, runs
// N_FRAMES frames and compares all class scores with a reference model of
// the network written here with plain integer arithmetic (conv, bias, 2x2
// max, A*x+B, sign; XNOR dot products as +-1 sums). It also checks the
// frame latency against the pixel-serial cycle budget, and counts how often
// each mechanism happened: real-valued (Conv-1) and binary (Conv-2)
// filtering, both activation values in every hidden layer, pooling that
// picks a later position than the first, the chained dense blocks, the
// serialised class output and the sequencer's layer switches.
// With FULL=1 the design is instantiated at its default size with no
// parameter override, and the latency is also held against 449.25 frames/s
// at 100 MHz (222,593 cycles per frame) within 0.1 %.
module tsr_tb_core #(
  parameter bit FULL      = 1'b0,
  parameter int IMG_W     = 16,
  parameter int IMG_CH    = 3,
  parameter int K         = 5,
  parameter int C1_OUT    = 6,
  parameter int C2_OUT    = 8,
  parameter int F1_OUT    = 20,
  parameter int N_CLASSES = 7,
  parameter int N_FRAMES  = 2
);
  import xnor_pkg::*;

  localparam int KK  = K * K;
  localparam int C1W = IMG_W - K + 1;
  localparam int P1  = C1W / 2;
  localparam int C2W = P1 - K + 1;
  localparam int P2  = C2W / 2;
  localparam int F1_IN = C2_OUT * P2 * P2;
  localparam int RW  = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic                       cfg_we = 1'b0;
  cfg_wr_t                    cfg;
  logic                       start = 1'b0;
  logic                       busy, done, res_valid;
  logic [RW-1:0]              res_idx;
  logic signed [BN_OUT_W-1:0] res_val;

  // internal probes for the mechanism counters
  logic              pr_c1_valid, pr_c2_valid, pr_f1_valid, pr_f1_bit, pr_switch;
  logic [C1_OUT-1:0] pr_c1_bits;
  logic [C2_OUT-1:0] pr_c2_bits;

  if (FULL) begin : g_full
    xnor_tsr_top dut (.*);
    assign pr_c1_valid = dut.c1_out_valid;
    assign pr_c1_bits  = dut.c1_out_bits;
    assign pr_c2_valid = dut.c2_out_valid;
    assign pr_c2_bits  = dut.c2_out_bits;
    assign pr_f1_valid = dut.f1_valid;
    assign pr_f1_bit   = dut.f1_bit;
    assign pr_switch   = dut.c2_start || dut.fc_start;
  end else begin : g_small
    xnor_tsr_top #(
      .IMG_W(IMG_W), .IMG_CH(IMG_CH), .K(K), .C1_OUT(C1_OUT),
      .C2_OUT(C2_OUT), .F1_OUT(F1_OUT), .N_CLASSES(N_CLASSES)
    ) dut (.*);
    assign pr_c1_valid = dut.c1_out_valid;
    assign pr_c1_bits  = dut.c1_out_bits;
    assign pr_c2_valid = dut.c2_out_valid;
    assign pr_c2_bits  = dut.c2_out_bits;
    assign pr_f1_valid = dut.f1_valid;
    assign pr_f1_bit   = dut.f1_bit;
    assign pr_switch   = dut.c2_start || dut.fc_start;
  end

  int checks = 0, failures = 0;

  // ---------------- watchdog
  localparam longint FRAME_BUDGET = longint'(P1*P1*4*IMG_CH*KK + P2*P2*4*C1_OUT*KK
                                             + F1_IN + F1_OUT + N_CLASSES);
  localparam longint WATCHDOG = (FRAME_BUDGET + 64 + 200000) * N_FRAMES
                                + longint'(F1_IN) * 20 + 400000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network coefficients and image
  logic signed [7:0]  img  [IMG_CH][IMG_W][IMG_W];
  logic [KK-1:0]      w1   [C1_OUT][IMG_CH];
  int                 bias1[C1_OUT], a1[C1_OUT], b1[C1_OUT];
  logic [KK-1:0]      w2   [C2_OUT][C1_OUT];
  int                 bias2[C2_OUT], a2[C2_OUT], b2[C2_OUT];
  logic [F1_OUT-1:0]  wf1  [F1_IN];
  int                 biasf1[F1_OUT], af1[F1_OUT], bf1[F1_OUT];
  logic [N_CLASSES-1:0] wf2 [F1_OUT];
  int                 biasf2[N_CLASSES], af2[N_CLASSES], bf2[N_CLASSES];
  longint             expect_score [N_CLASSES];

  // ---------------- mechanism counters
  int n_c1_pool, n_c2_pool, n_f1_out, n_res;
  int n_act [3][2];          // layer 0..2 (Conv-1, Conv-2, FC-1), value 0/1
  int n_pool_later;          // reference: pool max not at first position
  int n_layer_switch;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic wr(cfg_target_e t, int ia, int ib, logic [31:0] d);
    @(negedge clk);
    cfg_we     = 1'b1;
    cfg.target = t;
    cfg.idx_a  = 16'(ia);
    cfg.idx_b  = 16'(ib);
    cfg.data   = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic gen_and_load_coeffs();
    for (int f = 0; f < C1_OUT; f++) begin
      for (int c = 0; c < IMG_CH; c++) begin
        w1[f][c] = KK'({$urandom, $urandom});
        wr(T_C1_W, f, c, 32'(w1[f][c]));
      end
      bias1[f] = rnd(-200, 200);   wr(T_C1_BIAS, f, 0, 32'(bias1[f]));
      a1[f]    = rnd(-64, 512);    wr(T_C1_BN_A, f, 0, 32'(a1[f]));
      b1[f]    = rnd(-20000, 20000); wr(T_C1_BN_B, f, 0, 32'(b1[f]));
    end
    for (int f = 0; f < C2_OUT; f++) begin
      for (int c = 0; c < C1_OUT; c++) begin
        w2[f][c] = KK'({$urandom, $urandom});
        wr(T_C2_W, f, c, 32'(w2[f][c]));
      end
      bias2[f] = rnd(-4, 4);       wr(T_C2_BIAS, f, 0, 32'(bias2[f]));
      a2[f]    = rnd(-64, 512);    wr(T_C2_BN_A, f, 0, 32'(a2[f]));
      b2[f]    = rnd(-800, 800);   wr(T_C2_BN_B, f, 0, 32'(b2[f]));
    end
    for (int i = 0; i < F1_IN; i++) begin
      for (int l = 0; l < (F1_OUT + 31) / 32; l++) begin
        logic [31:0] d;
        d = $urandom;
        for (int j = 0; j < 32; j++) if (32*l + j < F1_OUT) wf1[i][32*l+j] = d[j];
        wr(T_F1_W, l, i, d);
      end
    end
    for (int j = 0; j < F1_OUT; j++) begin
      biasf1[j] = rnd(-2, 2);        wr(T_F1_BIAS, j, 0, 32'(biasf1[j]));
      af1[j]    = rnd(-64, 512);     wr(T_F1_BN_A, j, 0, 32'(af1[j]));
      bf1[j]    = rnd(-300, 300);    wr(T_F1_BN_B, j, 0, 32'(bf1[j]));
    end
    for (int i = 0; i < F1_OUT; i++) begin
      for (int l = 0; l < (N_CLASSES + 31) / 32; l++) begin
        logic [31:0] d;
        d = $urandom;
        for (int j = 0; j < 32; j++) if (32*l + j < N_CLASSES) wf2[i][32*l+j] = d[j];
        wr(T_F2_W, l, i, d);
      end
    end
    for (int j = 0; j < N_CLASSES; j++) begin
      biasf2[j] = rnd(-2, 2);        wr(T_F2_BIAS, j, 0, 32'(biasf2[j]));
      af2[j]    = rnd(-512, 512);    wr(T_F2_BN_A, j, 0, 32'(af2[j]));
      bf2[j]    = rnd(-3000, 3000);  wr(T_F2_BN_B, j, 0, 32'(bf2[j]));
    end
  endtask

  task automatic gen_and_load_image();
    for (int c = 0; c < IMG_CH; c++)
      for (int y = 0; y < IMG_W; y++)
        for (int x = 0; x < IMG_W; x++) begin
          img[c][y][x] = 8'($urandom);
          wr(T_IMAGE, c, y * IMG_W + x, 32'(img[c][y][x]));
        end
  endtask

  // ---------------- reference model
  task automatic reference();
    bit fm1 [C1_OUT][P1][P1];
    bit fm2 [C2_OUT][P2][P2];
    bit flat [F1_IN];
    bit h1 [F1_OUT];
    for (int f = 0; f < C1_OUT; f++)
      for (int py = 0; py < P1; py++)
        for (int px = 0; px < P1; px++) begin
          longint mx = 0, y;
          for (int s = 0; s < 4; s++) begin
            longint acc = bias1[f];
            for (int c = 0; c < IMG_CH; c++)
              for (int k = 0; k < KK; k++) begin
                int p = img[c][2*py + s/2 + k/K][2*px + s%2 + k%K];
                acc += w1[f][c][k] ? p : -p;
              end
            if (s == 0 || acc > mx) begin
              if (s != 0) n_pool_later++;
              mx = acc;
            end
          end
          y = longint'(a1[f]) * mx + b1[f];
          fm1[f][py][px] = (y >= 0);
        end
    for (int f = 0; f < C2_OUT; f++)
      for (int py = 0; py < P2; py++)
        for (int px = 0; px < P2; px++) begin
          longint mx = 0, y;
          for (int s = 0; s < 4; s++) begin
            longint acc = bias2[f];
            for (int c = 0; c < C1_OUT; c++)
              for (int k = 0; k < KK; k++) begin
                bit p = fm1[c][2*py + s/2 + k/K][2*px + s%2 + k%K];
                acc += (p == w2[f][c][k]) ? 1 : -1;
              end
            if (s == 0 || acc > mx) begin
              if (s != 0) n_pool_later++;
              mx = acc;
            end
          end
          y = longint'(a2[f]) * mx + b2[f];
          fm2[f][py][px] = (y >= 0);
        end
    for (int c = 0; c < C2_OUT; c++)
      for (int p = 0; p < P2 * P2; p++)
        flat[c * P2 * P2 + p] = fm2[c][p / P2][p % P2];
    for (int j = 0; j < F1_OUT; j++) begin
      longint acc = 0, y;
      for (int i = 0; i < F1_IN; i++) acc += (flat[i] == wf1[i][j]) ? 1 : -1;
      y = longint'(af1[j]) * (acc + biasf1[j]) + bf1[j];
      h1[j] = (y >= 0);
    end
    for (int j = 0; j < N_CLASSES; j++) begin
      longint acc = 0;
      for (int i = 0; i < F1_OUT; i++) acc += (h1[i] == wf2[i][j]) ? 1 : -1;
      expect_score[j] = longint'(af2[j]) * (acc + biasf2[j]) + bf2[j];
    end
  endtask

  // ---------------- monitors
  always @(posedge clk) if (!rst) begin
    if (pr_c1_valid) begin
      n_c1_pool++;
      for (int f = 0; f < C1_OUT; f++) n_act[0][pr_c1_bits[f]]++;
    end
    if (pr_c2_valid) begin
      n_c2_pool++;
      for (int f = 0; f < C2_OUT; f++) n_act[1][pr_c2_bits[f]]++;
    end
    if (pr_f1_valid) begin
      n_f1_out++;
      n_act[2][pr_f1_bit]++;
    end
    if (pr_switch) n_layer_switch++;
  end

  longint got_score [N_CLASSES];
  bit     got_seen  [N_CLASSES];
  int     n_order_err;
  int     next_idx;
  always @(posedge clk) if (!rst && res_valid) begin
    n_res++;
    if (int'(res_idx) != next_idx) n_order_err++;
    next_idx = next_idx + 1;
    got_score[res_idx] = longint'(res_val);
    got_seen[res_idx]  = 1'b1;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    longint t0, cycles, cyc;
    int frames_done;
    cyc = 0;
    n_c1_pool = 0; n_c2_pool = 0; n_f1_out = 0; n_res = 0; n_pool_later = 0;
    n_layer_switch = 0; n_order_err = 0; next_idx = 0;
    for (int l = 0; l < 3; l++) begin n_act[l][0] = 0; n_act[l][1] = 0; end
    cfg = '0;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    gen_and_load_coeffs();
    for (int fr = 0; fr < N_FRAMES; fr++) begin
      gen_and_load_image();
      reference();
      for (int j = 0; j < N_CLASSES; j++) got_seen[j] = 1'b0;
      next_idx = 0;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      t0 = 1;
      while (!done) begin
        @(negedge clk);
        t0++;
      end
      cycles = t0;
      for (int j = 0; j < N_CLASSES; j++) begin
        check(got_seen[j] && got_score[j] == expect_score[j],
              $sformatf("frame %0d class %0d: got %0d expected %0d", fr, j, got_score[j], expect_score[j]));
      end
      check(cycles >= FRAME_BUDGET && cycles <= FRAME_BUDGET + 64,
            $sformatf("frame %0d took %0d cycles, budget %0d..%0d", fr, cycles, FRAME_BUDGET, FRAME_BUDGET + 64));
      $display("frame %0d: %0d cycles (pixel-serial budget %0d)", fr, cycles, FRAME_BUDGET);
      if (FULL) begin
        real fps;
        fps = 100.0e6 / real'(cycles);
        $display("frame rate at 100 MHz: %0.2f frames/s (published: 449.25)", fps);
        check(fps > 449.25 * 0.999 && fps < 449.25 * 1.001, "frame rate within 0.1 % of 449.25 fps");
      end
      check(!busy, "idle after done");
      frames_done++;
    end
    // mechanisms
    check(n_order_err == 0, "class scores in index order");
    check(n_res == N_FRAMES * N_CLASSES, $sformatf("class outputs: %0d", n_res));
    check(n_c1_pool == N_FRAMES * P1 * P1, $sformatf("Conv-1 (real-valued filters) outputs: %0d", n_c1_pool));
    check(n_c2_pool == N_FRAMES * P2 * P2, $sformatf("Conv-2 (XNOR filters) outputs: %0d", n_c2_pool));
    check(n_f1_out == N_FRAMES * F1_OUT, $sformatf("FC-1 serialised outputs: %0d", n_f1_out));
    check(n_layer_switch == 2 * N_FRAMES, $sformatf("layer switches: %0d", n_layer_switch));
    check(n_pool_later > 0, $sformatf("pooling picked a later position %0d times", n_pool_later));
    for (int l = 0; l < 3; l++)
      check(n_act[l][0] > 0 && n_act[l][1] > 0,
            $sformatf("layer %0d activations -1:%0d +1:%0d", l, n_act[l][0], n_act[l][1]));
    $display("mechanisms: conv1 %0d, conv2 %0d, fc1 %0d, classes %0d, later-pool %0d, switches %0d",
             n_c1_pool, n_c2_pool, n_f1_out, n_res, n_pool_later, n_layer_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
