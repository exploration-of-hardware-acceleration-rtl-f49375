// tb_fc_weight_bram: a 20-word memory of 43-bit words (two lanes, the
// second 11 bits wide) is loaded lane by lane with random data and read
// back in random order; each word must equal the lanes written, one cycle
// after the read.
module tb_fc_weight_bram;
  localparam int DEPTH = 20, WIDTH = 43;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [4:0] wr_addr = 0, rd_addr = 0;
  logic [0:0] wr_lane = 0;
  logic [31:0] wr_data = 0;
  logic [WIDTH-1:0] rd_data;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  fc_weight_bram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < 2; l++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 5'(a); wr_lane = 1'(l); wr_data = $urandom;
        if (l == 0) model[a][31:0] = wr_data; else model[a][42:32] = wr_data[10:0];
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 100; i++) begin
      logic [4:0] a;
      a = 5'($urandom % DEPTH);
      rd_en = 1; rd_addr = a;
      @(negedge clk);
      rd_en = 0; rd_addr = 5'($urandom % DEPTH);
      checks++;
      if (rd_data !== model[a]) begin
        failures++; $display("FAIL word %0d: %h exp %h", a, rd_data, model[a]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
