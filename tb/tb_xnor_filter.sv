// tb_xnor_filter: loads random 5x5 weights for 6 input channels, feeds
// random contexts (some back to back, some spaced) and checks
// C = 2*popcount(~(ctx ^ w)) - 25 for each, the last-channel tag, and the
// published latency of 1 (XNOR) + 5 (popcount) + 1 (2P-N) = 7 cycles.
module tb_xnor_filter;
  import xnor_pkg::*;
  localparam int IN_CH = 6, KK = 25, LAT = 7;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_en = 0, ctx_valid = 0, ctx_last = 0;
  logic [2:0] wr_ch = 0, ctx_ch = 0;
  logic [KK-1:0] wr_data = 0, ctx = 0;
  logic p_valid, p_last;
  logic signed [ACC_W-1:0] p_sum;
  logic [KK-1:0] w [IN_CH];
  int checks = 0, failures = 0, cyc = 0;

  xnor_filter #(.IN_CH(IN_CH), .KK(KK)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue: value, last flag, issue cycle
  int exp_q[$], last_q[$], cyc_q[$];
  // inputs are sampled at the clock edge; outputs are read just after it.
  // An input taken at edge t must appear after edge t + LAT - 1.
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (ctx_valid) begin
      exp_q.push_back(2 * $countones(~(ctx ^ w[ctx_ch])) - KK);
      last_q.push_back(int'(ctx_last));
      cyc_q.push_back(cyc);
    end
    #1;
    if (p_valid) begin
      int e, l, c0;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = exp_q.pop_front(); l = last_q.pop_front(); c0 = cyc_q.pop_front();
        if (int'(p_sum) != e || int'(p_last) != l || cyc - c0 != LAT - 1) begin
          failures++;
          $display("FAIL got %0d/%0d after %0d cycles, exp %0d/%0d after %0d",
                   p_sum, p_last, cyc - c0 + 1, e, l, LAT);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int c = 0; c < IN_CH; c++) begin
      w[c] = KK'({$urandom, $urandom});
      wr_en = 1; wr_ch = 3'(c); wr_data = w[c];
      @(negedge clk);
    end
    wr_en = 0;
    // all-match and all-mismatch corners first
    ctx_valid = 1; ctx_ch = 0; ctx = w[0];  ctx_last = 0; @(negedge clk);
    ctx_valid = 1; ctx_ch = 1; ctx = ~w[1]; ctx_last = 1; @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      ctx_valid = 1;
      ctx_ch = 3'($urandom % IN_CH);
      ctx = KK'({$urandom, $urandom});
      ctx_last = 1'($urandom);
      @(negedge clk);
      if ($urandom % 3 == 0) begin
        ctx_valid = 0;
        repeat ($urandom % 4) @(negedge clk);
      end
    end
    ctx_valid = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
