// conv_out_ctrl: output data controller of a convolutional block.
//
// The pooled, activated results of all filters of a layer arrive together
// (in_valid with OUT_CH bits, one per filter) in raster order of the pooled
// map. The controller writes them in parallel, bit f to the BRAM of output
// channel f, all at the same address, which it counts from 0 to OUT_PIX-1.
// The write happens in the cycle in_valid is high; done pulses one cycle
// after the last pixel of the map is written. start rewinds the address.
// Parallel writes to per-channel BRAMs follow the published accelerator; the
// counter and done pulse are this design's choice.
module conv_out_ctrl #(
  parameter int OUT_PIX = 196,
  parameter int OUT_CH  = 64,
  localparam int AW = (OUT_PIX > 1) ? $clog2(OUT_PIX) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              in_valid,
  input  logic [OUT_CH-1:0] in_bits,
  output logic              wr_en,
  output logic [AW-1:0]     wr_addr,
  output logic [OUT_CH-1:0] wr_bits,
  output logic              done
);

  logic [AW-1:0] cnt;

  always_comb begin
    wr_en   = in_valid;
    wr_addr = cnt;
    wr_bits = in_bits;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cnt <= '0;
      end else if (in_valid) begin
        if (cnt == AW'(OUT_PIX - 1)) begin
          cnt  <= '0;
          done <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
