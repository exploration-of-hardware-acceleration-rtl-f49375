// tb_fc_in_ctrl: 6 one-bit channel RAMs of 5 words each, filled with
// random bits, are streamed by the FC input controller twice; the bench
// checks every bit against the flattened order ch*5 + position, the
// count of 30 bits per pass and the done pulse.
module tb_fc_in_ctrl;
  localparam int IN_CH = 6, PIX = 5;
  logic clk = 0, rst = 1, start = 0;
  always #5 clk = ~clk;
  logic busy, rd_en, out_valid, out_bit, done;
  logic [2:0] rd_addr;
  logic rd_bits [IN_CH];
  bit   mem [IN_CH][PIX];
  int checks = 0, failures = 0, n = 0, n_done = 0;

  fc_in_ctrl #(.IN_CH(IN_CH), .PIX(PIX)) dut (.*);

  always_ff @(posedge clk)
    if (rd_en) for (int c = 0; c < IN_CH; c++) rd_bits[c] <= mem[c][rd_addr];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst) begin
    if (out_valid) begin
      int i;
      i = n % (IN_CH * PIX);
      checks++;
      if (out_bit != mem[i / PIX][i % PIX]) begin
        failures++; $display("FAIL bit %0d", i);
      end
      n++;
    end
    if (done) n_done++;
  end

  initial begin
    for (int c = 0; c < IN_CH; c++) for (int p = 0; p < PIX; p++) mem[c][p] = 1'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int r = 0; r < 2; r++) begin
      start = 1; @(negedge clk) start = 0;
      wait (done);
      repeat (4) @(negedge clk);
      checks++;
      if (n != (r + 1) * IN_CH * PIX || busy) begin
        failures++; $display("FAIL pass %0d: %0d bits", r, n);
      end
    end
    checks++;
    if (n_done != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
