// tb_context_gen: streams random binary pixels in groups of 25 (one 5x5
// context each, with gaps of idle cycles) and checks that each context
// vector holds pixel k in bit k, with its channel tags, one cycle after
// the last pixel.
module tb_context_gen;
  localparam int KK = 25, CW = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_bit = 0, in_k_last = 0, in_ch_last = 0;
  logic [CW-1:0] in_ch = 0;
  logic ctx_valid, ctx_last;
  logic [KK-1:0] ctx;
  logic [CW-1:0] ctx_ch;
  int checks = 0, failures = 0;

  context_gen #(.KK(KK), .CW(CW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [KK-1:0] v;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int t = 0; t < 60; t++) begin
      v = KK'({$urandom, $urandom});
      for (int k = 0; k < KK; k++) begin
        in_valid = 1; in_bit = v[k]; in_k_last = (k == KK-1);
        in_ch = CW'(t); in_ch_last = (t % 8 == 7);
        @(negedge clk);
        if (k != KK-1 && $urandom % 4 == 0) begin
          in_valid = 0; in_bit = 1'($urandom); in_k_last = 1'($urandom);
          @(negedge clk);
        end
        checks++;
        if (ctx_valid !== (k == KK-1)) begin
          failures++;
          $display("FAIL ctx_valid at context %0d pixel %0d", t, k);
        end
      end
      in_valid = 0;
      checks++;
      if (ctx !== v || ctx_ch !== CW'(t) || ctx_last !== (t % 8 == 7)) begin
        failures++;
        $display("FAIL context %0d: got %h exp %h", t, ctx, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
