// fc_in_ctrl: FC input data controller.
//
// Streams the binary feature maps of the last convolutional block to the
// first dense block, one bit per cycle. The maps sit in IN_CH one-bit BRAMs
// of PIX words each; the controller reads channel 0 positions 0..PIX-1,
// then channel 1, and so on (flattened index = ch*PIX + position). All
// BRAMs get the same address; one cycle later the addressed channel's bit
// leaves on out_bit with out_valid. start runs one pass of IN_CH*PIX reads;
// done pulses after the last read is issued.
// Serial reading follows the published accelerator; the flattening order is
// this design's choice.
module fc_in_ctrl #(
  parameter int IN_CH = 128,
  parameter int PIX   = 25,
  localparam int CW = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int AW = (PIX > 1) ? $clog2(PIX) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          busy,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic          rd_bits [IN_CH],
  output logic          out_valid,
  output logic          out_bit,
  output logic          done
);

  logic [CW-1:0] ch, ch_d;
  logic [AW-1:0] pos;

  wire last_pos = (pos == AW'(PIX - 1));
  wire last_ch  = (ch  == CW'(IN_CH - 1));

  assign rd_en   = busy;
  assign rd_addr = pos;
  assign out_bit = rd_bits[ch_d];

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      ch        <= '0;
      pos       <= '0;
      ch_d      <= '0;
      out_valid <= 1'b0;
    end else begin
      done      <= 1'b0;
      out_valid <= rd_en;
      ch_d      <= ch;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          ch   <= '0;
          pos  <= '0;
        end
      end else begin
        pos <= last_pos ? '0 : pos + 1'b1;
        if (last_pos) begin
          ch <= last_ch ? '0 : ch + 1'b1;
          if (last_ch) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
