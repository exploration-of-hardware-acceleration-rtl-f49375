// tb_dense_block: two chained dense blocks, 40 inputs -> 37 neurons (with
// activation) -> 11 neurons (without), the same arrangement as FC-1 and
// FC-2. Random weights (loaded in 32-bit lanes), biases and batch-norm
// coefficients; random input bits with idle gaps, three frames. Checks
// every output of both blocks against a reference (sum of XNOR +-1 terms,
// plus bias, A*x+B, sign), output order, and that the first output of the
// first block comes 5 cycles after its last input.
module tb_dense_block;
  import xnor_pkg::*;
  localparam int N_IN = 40, N_H = 37, N_O = 11, FRAMES = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic               cfg_we = 0;
  layer_reg_e         cfg_reg = R_WEIGHT;
  logic [15:0]        cfg_idx_a = 0, cfg_idx_b = 0;
  logic [CFG_D_W-1:0] cfg_data = 0;
  logic               we1 = 0, we2 = 0;
  logic               in_valid = 0, in_bit = 0;
  logic               h_valid, h_bit, o_valid, o_bit;
  logic [5:0]         h_idx;
  logic [3:0]         o_idx;
  logic signed [BN_OUT_W-1:0] h_val, o_val;
  int checks = 0, failures = 0;

  dense_block #(.N_IN(N_IN), .N_OUT(N_H), .ACTIVATE(1'b1)) u_d1 (
    .clk, .rst, .cfg_we(cfg_we && we1), .cfg_reg, .cfg_idx_a, .cfg_idx_b, .cfg_data,
    .in_valid, .in_bit, .out_valid(h_valid), .out_idx(h_idx), .out_bit(h_bit), .out_val(h_val));
  dense_block #(.N_IN(N_H), .N_OUT(N_O), .ACTIVATE(1'b0)) u_d2 (
    .clk, .rst, .cfg_we(cfg_we && we2), .cfg_reg, .cfg_idx_a, .cfg_idx_b, .cfg_data,
    .in_valid(h_valid), .in_bit(h_bit), .out_valid(o_valid), .out_idx(o_idx), .out_bit(o_bit), .out_val(o_val));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N_H-1:0] w1 [N_IN];
  logic [N_O-1:0] w2 [N_H];
  int bias1 [N_H], a1 [N_H], b1 [N_H], bias2 [N_O], a2 [N_O], b2 [N_O];
  longint eh [N_H], eo [N_O];
  int nh = 0, no = 0, last_in_cyc = 0, first_out_cyc = -1, cyc = 0;

  task automatic wr(bit l2, layer_reg_e r, int ia, int ib, logic [31:0] d);
    we1 = !l2; we2 = l2;
    cfg_we = 1; cfg_reg = r; cfg_idx_a = 16'(ia); cfg_idx_b = 16'(ib); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  always @(negedge clk) begin
    cyc++;
    if (!rst && h_valid) begin
      checks++;
      if (int'(h_idx) != nh || longint'(h_val) != eh[nh] || h_bit != (eh[nh] >= 0)) begin
        failures++; $display("FAIL hidden %0d: idx %0d val %0d exp %0d", nh, h_idx, h_val, eh[nh]);
      end
      if (nh == 0) first_out_cyc = cyc;
      nh++;
    end
    if (!rst && o_valid) begin
      checks++;
      if (int'(o_idx) != no || longint'(o_val) != eo[no]) begin
        failures++; $display("FAIL out %0d: idx %0d val %0d exp %0d", no, o_idx, o_val, eo[no]);
      end
      no++;
    end
  end

  initial begin
    bit x [N_IN];
    bit h [N_H];
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < N_IN; i++)
      for (int l = 0; l < 2; l++) begin
        logic [31:0] d;
        d = $urandom;
        for (int j = 0; j < 32; j++) if (32*l + j < N_H) w1[i][32*l+j] = d[j];
        wr(0, R_WEIGHT, l, i, d);
      end
    for (int i = 0; i < N_H; i++) begin
      logic [31:0] d;
      d = $urandom;
      w2[i] = N_O'(d);
      wr(1, R_WEIGHT, 0, i, d);
    end
    for (int j = 0; j < N_H; j++) begin
      bias1[j] = int'($urandom % 11) - 5;      wr(0, R_BIAS, j, 0, 32'(bias1[j]));
      a1[j]    = int'($urandom % 700) - 200;   wr(0, R_BN_A, j, 0, 32'(a1[j]));
      b1[j]    = int'($urandom % 3001) - 1500; wr(0, R_BN_B, j, 0, 32'(b1[j]));
    end
    for (int j = 0; j < N_O; j++) begin
      bias2[j] = int'($urandom % 11) - 5;      wr(1, R_BIAS, j, 0, 32'(bias2[j]));
      a2[j]    = int'($urandom % 700) - 200;   wr(1, R_BN_A, j, 0, 32'(a2[j]));
      b2[j]    = int'($urandom % 3001) - 1500; wr(1, R_BN_B, j, 0, 32'(b2[j]));
    end
    for (int fr = 0; fr < FRAMES; fr++) begin
      for (int i = 0; i < N_IN; i++) x[i] = 1'($urandom);
      for (int j = 0; j < N_H; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < N_IN; i++) s += (x[i] == w1[i][j]) ? 1 : -1;
        eh[j] = longint'(a1[j]) * (s + bias1[j]) + b1[j];
        h[j]  = eh[j] >= 0;
      end
      for (int j = 0; j < N_O; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < N_H; i++) s += (h[i] == w2[i][j]) ? 1 : -1;
        eo[j] = longint'(a2[j]) * (s + bias2[j]) + b2[j];
      end
      nh = 0; no = 0; first_out_cyc = -1;
      for (int i = 0; i < N_IN; i++) begin
        in_valid = 1; in_bit = x[i];
        @(negedge clk);
        in_valid = 0; in_bit = 1'($urandom);
        if ($urandom % 4 == 0 && i != N_IN - 1) @(negedge clk);
      end
      last_in_cyc = cyc;
      repeat (N_H + N_O + 20) @(negedge clk);
      checks++;
      if (nh != N_H || no != N_O) begin
        failures++; $display("FAIL frame %0d: %0d hidden, %0d outputs", fr, nh, no);
      end
      checks++;
      if (first_out_cyc - last_in_cyc != 5) begin
        failures++; $display("FAIL first output %0d cycles after last input", first_out_cyc - last_in_cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
