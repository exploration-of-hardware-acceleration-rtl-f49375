// tb_max_filter: sends random signed weighted sums (with idle gaps) and
// checks that every fourth input produces the maximum of the last four,
// one cycle later, including windows whose maximum is the first, last or
// a repeated value.
module tb_max_filter;
  import xnor_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [ACC_W-1:0] in_data = 0;
  logic out_valid;
  logic signed [ACC_W-1:0] out_data;
  int checks = 0, failures = 0;

  max_filter #(.WIN(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [4];
    int e;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int wdw = 0; wdw < 200; wdw++) begin
      for (int i = 0; i < 4; i++) begin
        v[i] = int'($urandom % 4001) - 2000;
        if (wdw % 10 == 1) v[i] = -5 - i;           // max is the first
        if (wdw % 10 == 2) v[i] = -500 + 100 * i;   // max is the last, all negative
        if (wdw % 10 == 3) v[i] = 7;                // all equal
      end
      e = v[0];
      for (int i = 1; i < 4; i++) if (v[i] > e) e = v[i];
      for (int i = 0; i < 4; i++) begin
        in_valid = 1; in_data = ACC_W'(v[i]);
        @(negedge clk);
        in_valid = 0; in_data = ACC_W'(9999);
        checks++;
        if (out_valid !== (i == 3)) begin
          failures++;
          $display("FAIL out_valid at window %0d input %0d", wdw, i);
        end
        if ($urandom % 4 == 0) @(negedge clk);
      end
      checks++;
      if (int'(out_data) != e) begin
        failures++;
        $display("FAIL window %0d: got %0d exp %0d", wdw, out_data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
