// tb_real_filter: loads random weights for 3 channels, streams random
// signed 8-bit pixels in contexts of 25 (kernel index 0..24, with idle
// gaps) and checks each channel's partial sum, sum over k of +-pixel, its
// last-channel tag and the one-cycle latency after the last pixel.
module tb_real_filter;
  import xnor_pkg::*;
  localparam int IN_CH = 3, KK = 25;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [1:0] wr_ch = 0, pix_ch = 0;
  logic [KK-1:0] wr_data = 0;
  logic pix_valid = 0, pix_k_last = 0, pix_ch_last = 0;
  logic signed [7:0] pix = 0;
  logic [4:0] pix_k = 0;
  logic p_valid, p_last;
  logic signed [ACC_W-1:0] p_sum;
  logic [KK-1:0] w [IN_CH];
  int checks = 0, failures = 0;

  real_filter #(.IN_CH(IN_CH), .KK(KK), .PW(8)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < IN_CH; c++) begin
      w[c] = KK'({$urandom, $urandom});
      wr_en = 1; wr_ch = 2'(c); wr_data = w[c];
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 90; t++) begin
      int c;
      c = t % IN_CH;
      e = 0;
      for (int k = 0; k < KK; k++) begin
        pix_valid = 1; pix_ch = 2'(c); pix_k = 5'(k);
        pix = (t == 0) ? -8'sd128 : 8'($urandom);
        pix_k_last = (k == KK-1); pix_ch_last = (c == IN_CH-1);
        e += w[c][k] ? int'(pix) : -int'(pix);
        @(negedge clk);
        pix_valid = 0;
        checks++;
        if (p_valid !== (k == KK-1)) begin
          failures++;
          $display("FAIL p_valid timing at context %0d pixel %0d", t, k);
        end
        if ($urandom % 5 == 0) repeat (1 + $urandom % 2) @(negedge clk);
      end
      checks++;
      if (int'(p_sum) != e || p_last !== (c == IN_CH-1)) begin
        failures++;
        $display("FAIL context %0d: got %0d exp %0d", t, p_sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
