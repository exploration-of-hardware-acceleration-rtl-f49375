// tb_fmap_bram: writes random words to a 64x8 channel RAM, reads them back
// in random order and checks data and the one-cycle read latency.
module tb_fmap_bram;
  localparam int DEPTH = 64, WIDTH = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [WIDTH-1:0] wr_data = 0, rd_data;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  fmap_bram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a); wr_data = 8'($urandom); model[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      logic [5:0] a;
      a = 6'($urandom);
      @(negedge clk);
      rd_en = 1; rd_addr = a;
      @(negedge clk);
      rd_en = 0;
      rd_addr = ~a;                 // must not disturb the held word
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", a, rd_data, model[a]);
      end
      // overwrite sometimes
      if (i % 7 == 0) begin
        @(negedge clk);
        wr_en = 1; wr_addr = a; wr_data = 8'($urandom); model[a] = wr_data;
        @(negedge clk) wr_en = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
