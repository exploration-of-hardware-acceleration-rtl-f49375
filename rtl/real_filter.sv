// real_filter: first-layer filter (one output channel) for real-valued input.
//
// The first layer sees signed multi-bit pixels, so instead of XNOR and
// popcount it accumulates: each incoming pixel is added when its weight is
// +1 (bit 1) and subtracted when it is -1 (bit 0). The weight is picked from
// the weight register by the pixel's channel and kernel index. After the
// last pixel of a context (pix_k_last) the channel's partial sum leaves on
// p_sum with p_valid, one cycle later, and the accumulator restarts.
// The add/subtract accumulator follows the published accelerator; pixel
// width and tags are this design's choice.
module real_filter
  import xnor_pkg::*;
#(
  parameter int IN_CH = 3,
  parameter int KK    = 25,
  parameter int PW    = PIX_W,
  localparam int CW = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int KW = $clog2(KK)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    wr_en,
  input  logic [CW-1:0]           wr_ch,
  input  logic [KK-1:0]           wr_data,
  input  logic                    pix_valid,
  input  logic signed [PW-1:0]    pix,
  input  logic [CW-1:0]           pix_ch,
  input  logic [KW-1:0]           pix_k,
  input  logic                    pix_k_last,
  input  logic                    pix_ch_last,
  output logic                    p_valid,
  output logic signed [ACC_W-1:0] p_sum,
  output logic                    p_last
);

  logic [KK-1:0] weights [IN_CH];

  always_ff @(posedge clk) begin
    if (wr_en) weights[wr_ch] <= wr_data;
  end

  logic signed [ACC_W-1:0] acc, acc_next;

  always_comb begin
    if (weights[pix_ch][pix_k]) acc_next = acc + ACC_W'(pix);
    else                        acc_next = acc - ACC_W'(pix);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc     <= '0;
      p_valid <= 1'b0;
      p_sum   <= '0;
      p_last  <= 1'b0;
    end else begin
      p_valid <= pix_valid && pix_k_last;
      if (pix_valid) begin
        if (pix_k_last) begin
          p_sum  <= acc_next;
          p_last <= pix_ch_last;
          acc    <= '0;
        end else begin
          acc <= acc_next;
        end
      end
    end
  end

endmodule
