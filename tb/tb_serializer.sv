// tb_serializer: loads 8 random sums at once, several times with gaps,
// and checks they come out one per cycle in index order starting the
// cycle after the load, with busy high for exactly 8 cycles.
module tb_serializer;
  import xnor_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic load = 0, busy, out_valid;
  logic signed [ACC_W-1:0] in_data [N];
  logic [2:0] out_idx;
  logic signed [ACC_W-1:0] out_data;
  int checks = 0, failures = 0;

  serializer #(.N(N)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [ACC_W-1:0] v [N];
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int r = 0; r < 20; r++) begin
      for (int i = 0; i < N; i++) begin
        v[i] = ACC_W'(int'($urandom % 2001) - 1000);
        in_data[i] = v[i];
      end
      load = 1;
      @(negedge clk);
      load = 0;
      for (int i = 0; i < N; i++) in_data[i] = '0;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (!out_valid || !busy || out_idx != 3'(i) || out_data != v[i]) begin
          failures++; $display("FAIL load %0d word %0d: %0d exp %0d", r, i, out_data, v[i]);
        end
        @(negedge clk);
      end
      checks++;
      if (out_valid || busy) begin
        failures++; $display("FAIL still busy after %0d words", N);
      end
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
