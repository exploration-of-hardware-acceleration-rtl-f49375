// conv_in_ctrl: input data controller of a convolutional block.
//
// Issues one BRAM read per cycle in the order that lets convolution and
// 2x2 max pooling run back to back with no extra buffer:
//   for each pooled row py, pooled column px
//     for each of the 4 conv positions (dy,dx) of that pooling window
//       for each input channel c
//         for each kernel row ky, kernel column kx
//           read channel c at ((2py+dy+ky), (2px+dx+kx))
// so the filters see one whole context (K*K pixels of one channel), then
// the same context position in the next channel, and the four convolution
// results of one pooling window come out consecutively.
// Every read goes to all BRAMs of the set at once (same address); one cycle
// later, when the data is out, the controller picks the addressed channel's
// word and presents it as a tagged pixel: pix_ch, the kernel index pix_k,
// pix_k_last (last pixel of a context) and pix_ch_last (last pixel of the
// last channel of a position). A start pulse runs one full layer; done
// pulses in the cycle after the last read is issued.
// The read order follows the published description; the exact loop nesting
// and the tag format are this design's choice.
module conv_in_ctrl #(
  parameter int IN_W  = 32,   // input map is IN_W x IN_W
  parameter int IN_CH = 3,
  parameter int K     = 5,
  parameter int PW    = 8,    // pixel width in the BRAM set
  localparam int OUT_P = (IN_W - K + 1) / 2,   // pooled map width
  localparam int AW    = $clog2(IN_W * IN_W),
  localparam int CW    = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int KW    = $clog2(K * K),
  localparam int PCW   = (OUT_P > 1) ? $clog2(OUT_P) : 1,
  localparam int KXW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          busy,
  output logic          rd_en,
  output logic [CW-1:0] rd_ch,
  output logic [AW-1:0] rd_addr,
  input  logic [PW-1:0] rd_data [IN_CH],
  output logic          pix_valid,
  output logic [PW-1:0] pix,
  output logic [CW-1:0] pix_ch,
  output logic [KW-1:0] pix_k,
  output logic          pix_k_last,
  output logic          pix_ch_last,
  output logic          done
);

  logic [KW-1:0] tag_k;
  logic          tag_k_last, tag_ch_last;

  logic [PCW-1:0] py, px;
  logic [1:0]     sub;          // {dy, dx}
  logic [CW-1:0]  ch;
  logic [KXW-1:0] ky, kx;

  wire last_kx  = (kx  == KXW'(K - 1));
  wire last_ky  = (ky  == KXW'(K - 1));
  wire last_ch  = (ch  == CW'(IN_CH - 1));
  wire last_sub = (sub == 2'd3);
  wire last_px  = (px  == PCW'(OUT_P - 1));
  wire last_py  = (py  == PCW'(OUT_P - 1));

  always_comb begin
    rd_en       = busy;
    rd_ch       = ch;
    rd_addr     = AW'((2 * int'(py) + int'(sub[1]) + int'(ky)) * IN_W
                      + (2 * int'(px) + int'(sub[0]) + int'(kx)));
    tag_k       = KW'(int'(ky) * K + int'(kx));
    tag_k_last  = last_kx && last_ky;
    tag_ch_last = last_kx && last_ky && last_ch;
    pix         = rd_data[pix_ch];
  end

  // tags delayed by the BRAM read latency
  always_ff @(posedge clk) begin
    if (rst) begin
      pix_valid   <= 1'b0;
      pix_ch      <= '0;
      pix_k       <= '0;
      pix_k_last  <= 1'b0;
      pix_ch_last <= 1'b0;
    end else begin
      pix_valid   <= rd_en;
      pix_ch      <= rd_ch;
      pix_k       <= tag_k;
      pix_k_last  <= tag_k_last;
      pix_ch_last <= tag_ch_last;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      py <= '0; px <= '0; sub <= '0; ch <= '0; ky <= '0; kx <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          py <= '0; px <= '0; sub <= '0; ch <= '0; ky <= '0; kx <= '0;
        end
      end else begin
        kx <= last_kx ? '0 : kx + 1'b1;
        if (last_kx) begin
          ky <= last_ky ? '0 : ky + 1'b1;
          if (last_ky) begin
            ch <= last_ch ? '0 : ch + 1'b1;
            if (last_ch) begin
              sub <= sub + 2'd1;
              if (last_sub) begin
                px <= last_px ? '0 : px + 1'b1;
                if (last_px) begin
                  py <= last_py ? '0 : py + 1'b1;
                  if (last_py) begin
                    busy <= 1'b0;
                    done <= 1'b1;
                  end
                end
              end
            end
          end
        end
      end
    end
  end

endmodule
