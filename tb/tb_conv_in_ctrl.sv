// tb_conv_in_ctrl: runs the input data controller on an 8x8 map with 2
// channels and a 3x3 kernel (pooled map 3x3). A model RAM answers its reads
// with data encoding (channel, address). The bench checks every tagged
// pixel against the read order worked out here (pooled row, pooled column,
// 2x2 sub-position, channel, kernel row, kernel column), the number of
// reads, and that done follows the last read.
module tb_conv_in_ctrl;
  localparam int IN_W = 8, IN_CH = 2, K = 3, PW = 8;
  localparam int OUT_P = (IN_W - K + 1) / 2;
  localparam int NREAD = OUT_P * OUT_P * 4 * IN_CH * K * K;
  logic clk = 0, rst = 1, start = 0;
  always #5 clk = ~clk;
  logic busy, rd_en, pix_valid, pix_k_last, pix_ch_last, done;
  logic [0:0] rd_ch, pix_ch;
  logic [5:0] rd_addr;
  logic [PW-1:0] rd_data [IN_CH];
  logic [PW-1:0] pix;
  logic [3:0] pix_k;
  int checks = 0, failures = 0;

  conv_in_ctrl #(.IN_W(IN_W), .IN_CH(IN_CH), .K(K), .PW(PW)) dut (.*);

  // model RAMs: word = {channel, address}
  always_ff @(posedge clk)
    if (rd_en) for (int c = 0; c < IN_CH; c++) rd_data[c] <= {1'(c), 7'(rd_addr)};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n = 0, n_done = 0, last_pix_cycle = -1, done_cycle = -1, cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (!rst) begin
    if (pix_valid) begin
      int py, px, s, c, ky, kx, r;
      r  = n % NREAD;
      kx = r % K;   r /= K;
      ky = r % K;   r /= K;
      c  = r % IN_CH; r /= IN_CH;
      s  = r % 4;   r /= 4;
      px = r % OUT_P; r /= OUT_P;
      py = r;
      checks++;
      if (pix !== {1'(c), 7'((2*py + s/2 + ky) * IN_W + 2*px + s%2 + kx)} ||
          pix_ch !== 1'(c) || pix_k !== 4'(ky*K + kx) ||
          pix_k_last !== (ky == K-1 && kx == K-1) ||
          pix_ch_last !== (ky == K-1 && kx == K-1 && c == IN_CH-1)) begin
        failures++;
        $display("FAIL read %0d: pix %h ch %0d k %0d", n, pix, pix_ch, pix_k);
      end
      n++;
      last_pix_cycle = cyc;
    end
    if (done) begin n_done++; done_cycle = cyc; end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      wait (done);
      repeat (3) @(posedge clk);
      checks++;
      if (n != NREAD * (run + 1) || busy) begin
        failures++;
        $display("FAIL run %0d: %0d reads, expected %0d", run, n, NREAD * (run + 1));
      end
      checks++;
      if (done_cycle != last_pix_cycle) begin
        failures++;
        $display("FAIL done at %0d, last pixel at %0d", done_cycle, last_pix_cycle);
      end
    end
    checks++;
    if (n_done != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
