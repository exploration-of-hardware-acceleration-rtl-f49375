// context_gen: the "delay" context generator of a binary convolutional block.
//
// Binary pixels of one context (the K*K window of one channel) arrive one
// per cycle. They are shifted into a KK-bit register so that bit k holds
// the k-th pixel of the window (kernel row-major). One cycle after the
// pixel flagged in_k_last, ctx_valid pulses with the full vector and the
// channel tags that came with that last pixel.
// The block's role follows the published architecture; the shift-register
// form and the tags are this design's choice.
module context_gen #(
  parameter int KK = 25,
  parameter int CW = 6
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  logic          in_bit,
  input  logic          in_k_last,
  input  logic [CW-1:0] in_ch,
  input  logic          in_ch_last,
  output logic          ctx_valid,
  output logic [KK-1:0] ctx,
  output logic [CW-1:0] ctx_ch,
  output logic          ctx_last
);

  logic [KK-1:0] shreg;
  wire  [KK-1:0] shifted = {in_bit, shreg[KK-1:1]};

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg     <= '0;
      ctx_valid <= 1'b0;
      ctx       <= '0;
      ctx_ch    <= '0;
      ctx_last  <= 1'b0;
    end else begin
      ctx_valid <= in_valid && in_k_last;
      if (in_valid) begin
        shreg <= shifted;
        if (in_k_last) begin
          ctx      <= shifted;
          ctx_ch   <= in_ch;
          ctx_last <= in_ch_last;
        end
      end
    end
  end

endmodule
