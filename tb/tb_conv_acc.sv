// tb_conv_acc: loads a bias, sends groups of random partial sums (group
// length 1..6, last one tagged) and checks that each weighted sum equals
// the group total plus the bias, one cycle after the last partial, and
// that nothing else comes out.
module tb_conv_acc;
  import xnor_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic bias_we = 0, p_valid = 0, p_last = 0;
  logic signed [BIAS_W-1:0] bias_data = 0;
  logic signed [ACC_W-1:0] p_sum = 0;
  logic ws_valid;
  logic signed [ACC_W-1:0] ws;
  int checks = 0, failures = 0;

  conv_acc dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias, e, len;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int g = 0; g < 120; g++) begin
      if (g % 30 == 0) begin
        bias = int'($urandom % 2001) - 1000;
        bias_we = 1; bias_data = BIAS_W'(bias);
        @(negedge clk) bias_we = 0;
      end
      len = 1 + $urandom % 6;
      e = bias;
      for (int i = 0; i < len; i++) begin
        p_valid = 1; p_last = (i == len - 1);
        p_sum = ACC_W'(int'($urandom % 20001) - 10000);
        e += int'(p_sum);
        @(negedge clk);
        p_valid = 0; p_last = 1'($urandom);
        checks++;
        if (ws_valid !== (i == len - 1)) begin
          failures++;
          $display("FAIL ws_valid at group %0d partial %0d", g, i);
        end
        if ($urandom % 4 == 0) @(negedge clk);
      end
      checks++;
      if (int'(ws) != e) begin
        failures++;
        $display("FAIL group %0d: got %0d exp %0d", g, ws, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
