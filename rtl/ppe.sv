// ppe: point processing element (batch normalisation and binary activation).
//
// Batch normalisation is folded into one multiply-add, y = A*x + B, with
// A = gamma/sigma and B = beta - gamma*mu/sigma computed offline. A and B
// are signed fixed point with BN_FRAC fraction bits, x is an integer, so y
// carries BN_FRAC fraction bits. The binary activation is out_bit = (y >= 0)
// (1 meaning +1); out_val is y itself, used where a layer has no activation.
// Two pipeline stages: the product is registered, then the sum. A tag of
// TAG_W bits (e.g. a neuron index) travels alongside. a and b are sampled
// with in_valid (b is held for the second stage).
// The A*x+B form follows the published accelerator; formats and pipelining
// are this design's choice.
module ppe
  import xnor_pkg::*;
#(
  parameter int IN_W  = ACC_W,
  parameter int TAG_W = 1,
  localparam int OW = IN_W + BN_A_W + 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic signed [BN_A_W-1:0] a,
  input  logic signed [BN_B_W-1:0] b,
  output logic                     out_valid,
  output logic                     out_bit,
  output logic signed [OW-1:0]     out_val,
  output logic [TAG_W-1:0]         out_tag
);

  logic                     v1;
  logic signed [OW-1:0]     prod;
  logic signed [BN_B_W-1:0] b1;
  logic [TAG_W-1:0]         tag1;
  logic signed [OW-1:0]     y;

  assign y = prod + OW'(b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      v1        <= 1'b0;
      prod      <= '0;
      b1        <= '0;
      tag1      <= '0;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      out_val   <= '0;
      out_tag   <= '0;
    end else begin
      v1        <= in_valid;
      prod      <= OW'(in_data) * OW'(a);
      b1        <= b;
      tag1      <= in_tag;
      out_valid <= v1;
      out_val   <= y;
      out_bit   <= (y >= 0);
      out_tag   <= tag1;
    end
  end

endmodule
