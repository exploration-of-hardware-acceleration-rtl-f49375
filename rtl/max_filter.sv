// max_filter: max pooling over WIN consecutive weighted sums.
//
// Because the input controller reads the four convolution positions of one
// 2x2 pooling window back to back, pooling needs no line buffer: this block
// keeps a running maximum over WIN consecutive inputs and, on the WIN-th,
// emits the maximum one cycle later and starts a new window.
// Streaming max over consecutive values follows the published accelerator.
module max_filter
  import xnor_pkg::*;
#(
  parameter int WIN = 4,
  localparam int CNT_W = (WIN > 1) ? $clog2(WIN) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_data,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data
);

  logic [CNT_W-1:0]        cnt;
  logic signed [ACC_W-1:0] mx, cur;

  always_comb begin
    if (cnt == '0 || in_data > mx) cur = in_data;
    else                           cur = mx;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      mx        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt == CNT_W'(WIN - 1)) begin
          cnt       <= '0;
          out_valid <= 1'b1;
          out_data  <= cur;
        end else begin
          cnt <= cnt + 1'b1;
          mx  <= cur;
        end
      end
    end
  end

endmodule
