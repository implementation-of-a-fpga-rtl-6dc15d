// Bayer-to-RGB conversion with 2x2 down-sampling.
//
// The sensor delivers one colour per pixel in the Bayer layout
//      even rows (0,2,..):  R  G  R  G ...
//      odd rows  (1,3,..):  G  B  G  B ...
// Each 2x2 block R,G1 / G2,B becomes one RGB pixel with
//      red = R,  blue = B,  green = (G1 + G2) / 2
// so a RAW_W x RAW_H frame becomes RAW_W/2 x RAW_H/2.
//
// How: every raw pixel is shifted into a line buffer one row long, whose
// tap returns the pixel of the same column one row up. When a pixel of an
// odd row at an odd column arrives, the live pixel (B), the tap (G1) and
// the previous live and tap values (G2, R) form the block, and one output
// pixel is produced at coordinates (x/2, y/2).
//
// Interface: in is the raw stream (rows must be RAW_W contiguous valid
// pixels); out is valid for one clock per 2x2 block, 2 clocks after the
// block's last (bottom-right) pixel is on the input.
//
// The Bayer order and the three equations follow the paper. The paper
// buffers two rows (two taps); this design uses the live row as the
// template's bottom row, which needs one tap and also converts the last
// row pair of a frame. The choice of one output per block as the
// down-sampling is this design's.
module raw2rgb
  import tm_pkg::*;
#(
  parameter int RAW_W = RAW_W_DEF
) (
  input  logic     clk,
  input  logic     rst_n,
  input  raw_pix_t in,
  output rgb_pix_t out
);
  logic [0:0][CW-1:0] taps;
  logic [CW-1:0]      cur, prev_cur, prev_up;
  logic [XW-1:0]      cur_x, cur_y;
  logic               cur_v;

  line_buffer #(.WIDTH(CW), .TAP_DIST(RAW_W), .TAPS(1)) u_lb (
    .clk      (clk),
    .rst_n    (rst_n),
    .shift_en (in.valid),
    .din      (in.d),
    .taps     (taps)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur      <= '0;
      prev_cur <= '0;
      prev_up  <= '0;
      cur_x    <= '0;
      cur_y    <= '0;
      cur_v    <= 1'b0;
      out      <= '0;
    end else begin
      cur_v <= in.valid;
      if (in.valid) begin
        cur      <= in.d;
        cur_x    <= in.x;
        cur_y    <= in.y;
        prev_cur <= cur;
        prev_up  <= taps[0];
      end

      out.valid <= cur_v && cur_x[0] && cur_y[0];
      if (cur_v && cur_x[0] && cur_y[0]) begin
        out.x <= cur_x >> 1;
        out.y <= cur_y >> 1;
        out.r <= prev_up;                                        // R  (y-1, x-1)
        out.g <= CW'(({1'b0, taps[0]} + {1'b0, prev_cur}) >> 1); // G1 (y-1, x), G2 (y, x-1)
        out.b <= cur;                                            // B  (y, x)
      end
    end
  end

endmodule
