// serializer: parallel-to-serial converter of a dense block.
//
// On load it captures the N neuron sums of a dense layer and, starting the
// next cycle, sends them out one per cycle, neuron 0 first, on out_data
// with out_idx and out_valid; it is busy for N cycles. It is a shift
// register: each cycle the words move one place towards the output.
// A load while busy is a protocol error (flagged by an assertion).
// Serialisation follows the published accelerator; the shift-register form
// is this design's choice.
module serializer
  import xnor_pkg::*;
#(
  parameter int N = 512,
  localparam int IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    load,
  input  logic signed [ACC_W-1:0] in_data [N],
  output logic                    busy,
  output logic                    out_valid,
  output logic [IW-1:0]           out_idx,
  output logic signed [ACC_W-1:0] out_data
);

  logic signed [ACC_W-1:0] sh [N];

  assign out_valid = busy;
  assign out_data  = sh[0];

  always_ff @(posedge clk) begin
    if (load) begin
      sh <= in_data;
    end else if (busy) begin
      for (int i = 0; i < N - 1; i++) sh[i] <= sh[i+1];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      out_idx <= '0;
    end else if (load) begin
      busy    <= 1'b1;
      out_idx <= '0;
    end else if (busy) begin
      if (out_idx == IW'(N - 1)) begin
        busy    <= 1'b0;
        out_idx <= '0;
      end else begin
        out_idx <= out_idx + 1'b1;
      end
    end
  end

  property p_no_load_while_busy;
    @(posedge clk) disable iff (rst) load |-> !busy;
  endproperty
  a_no_load_while_busy: assert property (p_no_load_while_busy)
    else $error("serializer loaded while still sending");

endmodule
