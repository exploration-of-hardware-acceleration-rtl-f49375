// tb_conv_out_ctrl: sends the 25 pooled results of a 5x5 map twice, with
// random gaps, and checks that they are written at addresses 0..24 with
// the same bits, and that done pulses exactly once per map, after the
// last write. A start pulse in the middle of a map must rewind the address.
module tb_conv_out_ctrl;
  localparam int OUT_PIX = 25, OUT_CH = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start = 0, in_valid = 0, wr_en, done;
  logic [OUT_CH-1:0] in_bits = 0, wr_bits;
  logic [4:0] wr_addr;
  int checks = 0, failures = 0;

  conv_out_ctrl #(.OUT_PIX(OUT_PIX), .OUT_CH(OUT_CH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int addr_exp, bit done_exp);
    in_valid = 1; in_bits = OUT_CH'($urandom);
    #1;
    checks++;
    if (!wr_en || wr_addr != 5'(addr_exp) || wr_bits != in_bits) begin
      failures++;
      $display("FAIL write %0d: addr %0d", addr_exp, wr_addr);
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (done !== done_exp) begin
      failures++;
      $display("FAIL done=%0d after write %0d", done, addr_exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    start = 1; @(negedge clk) start = 0;
    for (int i = 0; i < 10; i++) send(i, 0);
    start = 1; @(negedge clk) start = 0;        // rewind
    for (int m = 0; m < 2; m++)
      for (int i = 0; i < OUT_PIX; i++) begin
        send(i, i == OUT_PIX - 1);
        if ($urandom % 3 == 0) begin
          @(negedge clk);
          checks++;
          if (done) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
