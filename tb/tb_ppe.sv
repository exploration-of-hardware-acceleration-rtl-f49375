// tb_ppe: drives random values and batch-norm coefficients every cycle
// and checks y = A*x + B, the activation bit (y >= 0), the tag and the
// two-cycle latency, including cases with y exactly 0 and negative A.
module tb_ppe;
  import xnor_pkg::*;
  localparam int OW = ACC_W + BN_A_W + 1;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [ACC_W-1:0] in_data = 0;
  logic [5:0] in_tag = 0, out_tag;
  logic signed [BN_A_W-1:0] a = 0;
  logic signed [BN_B_W-1:0] b = 0;
  logic out_valid, out_bit;
  logic signed [OW-1:0] out_val;
  int checks = 0, failures = 0;

  ppe #(.IN_W(ACC_W), .TAG_W(6)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint ey [$];
  int     et [$], ev [$];
  always @(posedge clk) if (!rst) begin
    // model: an input sampled at edge t is on the outputs after edge t+1
    ey.push_back(longint'(in_data) * longint'(a) + longint'(b));
    et.push_back(int'(in_tag));
    ev.push_back(int'(in_valid));
    #1;
    if (ey.size() > 1) begin
      longint y;
      int t, v;
      y = ey.pop_front(); t = et.pop_front(); v = ev.pop_front();
      checks++;
      if (int'(out_valid) != v || (v && (longint'(out_val) != y || out_bit != (y >= 0) || int'(out_tag) != t))) begin
        failures++;
        $display("FAIL got v%0d %0d bit %0d tag %0d, exp v%0d %0d tag %0d", out_valid, out_val, out_bit, out_tag, v, y, t);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 400; i++) begin
      in_valid = 1'($urandom % 4 != 0);
      in_data  = ACC_W'(int'($urandom % 40001) - 20000);
      a        = BN_A_W'(int'($urandom % 2001) - 1000);
      b        = BN_B_W'(int'($urandom % 4000001) - 2000000);
      in_tag   = 6'($urandom);
      if (i % 50 == 5) begin in_data = 10; a = 3; b = -30; end   // y == 0 -> +1
      if (i % 50 == 6) begin in_data = 10; a = 3; b = -31; end   // y == -1 -> -1
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
