// conv_acc: channel accumulator with bias register of one filter.
//
// Adds up the per-channel partial convolutions of one output position.
// When the partial tagged p_last (last input channel) arrives, the bias is
// added and the weighted sum leaves on ws with ws_valid one cycle later;
// the accumulator then restarts for the next position.
// The bias register is loaded with bias_we / bias_data and is an integer in
// accumulator units (own choice of format).
module conv_acc
  import xnor_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     bias_we,
  input  logic signed [BIAS_W-1:0] bias_data,
  input  logic                     p_valid,
  input  logic signed [ACC_W-1:0]  p_sum,
  input  logic                     p_last,
  output logic                     ws_valid,
  output logic signed [ACC_W-1:0]  ws
);

  logic signed [BIAS_W-1:0] bias;
  logic signed [ACC_W-1:0]  acc;

  always_ff @(posedge clk) begin
    if (bias_we) bias <= bias_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc      <= '0;
      ws_valid <= 1'b0;
      ws       <= '0;
    end else begin
      ws_valid <= p_valid && p_last;
      if (p_valid) begin
        if (p_last) begin
          ws  <= acc + p_sum + ACC_W'(bias);
          acc <= '0;
        end else begin
          acc <= acc + p_sum;
        end
      end
    end
  end

endmodule
