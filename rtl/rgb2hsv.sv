// RGB to HSV conversion, three pipeline stages, one pixel per clock.
//
// Hexcone model with integer results:
//   V = max(R,G,B)
//   S = 255 * (max - min) / max                  (0 when max = 0)
//   H = 60 * (G - B) / (max - min)        if max = R   (wrapped into 0..359)
//       120 + 60 * (B - R) / (max - min)  if max = G
//       240 + 60 * (R - G) / (max - min)  if max = B
//   H = 0 when max = min.
// Stage 1 finds max, min and the hue numerator, stage 2 does the two
// divisions (truncating), stage 3 adds the sector base and wraps.
//
// Interface: in_valid/rgb in, out_valid/h/s/v out exactly LAT = 3 clocks
// later. The paper says the detector works in HSV; the formula, the
// integer precision and the pipeline are this design's.
module rgb2hsv #(
  parameter int CW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [CW-1:0] r,
  input  logic [CW-1:0] g,
  input  logic [CW-1:0] b,
  output logic          out_valid,
  output logic [8:0]    h,
  output logic [7:0]    s,
  output logic [CW-1:0] v
);
  typedef enum logic [1:0] {SEC_R, SEC_G, SEC_B} sector_e;

  // stage 1
  logic          v1;
  logic [CW-1:0] max1, del1;
  logic [CW:0]   num1;      // signed hue numerator
  sector_e       sec1;
  // stage 2
  logic          v2;
  logic [CW-1:0] max2;
  logic [6:0]    hf2;       // 0..60
  logic          neg2;
  logic [7:0]    s2;
  sector_e       sec2;

  logic [CW-1:0] mx, mn;
  logic [CW:0]   anum1;     // |num1|
  assign anum1 = num1[CW] ? -num1 : num1;

  always_comb begin
    mx = r;
    if (g > mx) mx = g;
    if (b > mx) mx = b;
    mn = r;
    if (g < mn) mn = g;
    if (b < mn) mn = b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; max1 <= '0; del1 <= '0; num1 <= '0; sec1 <= SEC_R;
      v2 <= 1'b0; max2 <= '0; hf2 <= '0; neg2 <= 1'b0; s2 <= '0; sec2 <= SEC_R;
      out_valid <= 1'b0; h <= '0; s <= '0; v <= '0;
    end else begin
      // stage 1
      v1   <= in_valid;
      max1 <= mx;
      del1 <= mx - mn;
      if (mx == r) begin
        sec1 <= SEC_R;
        num1 <= {1'b0, g} - {1'b0, b};
      end else if (mx == g) begin
        sec1 <= SEC_G;
        num1 <= {1'b0, b} - {1'b0, r};
      end else begin
        sec1 <= SEC_B;
        num1 <= {1'b0, r} - {1'b0, g};
      end

      // stage 2
      v2   <= v1;
      max2 <= max1;
      sec2 <= sec1;
      neg2 <= num1[CW];
      if (del1 == '0) begin
        hf2 <= '0;
        s2  <= '0;
      end else begin
        hf2 <= 7'((32'd60 * 32'(anum1)) / 32'(del1));
        s2  <= 8'((32'd255 * 32'(del1)) / 32'(max1));
      end

      // stage 3
      out_valid <= v2;
      v         <= max2;
      s         <= s2;
      unique case (sec2)
        SEC_R:   h <= neg2 ? ((hf2 == 0) ? 9'd0 : 9'd360 - 9'(hf2)) : 9'(hf2);
        SEC_G:   h <= neg2 ? 9'd120 - 9'(hf2) : 9'd120 + 9'(hf2);
        default: h <= neg2 ? 9'd240 - 9'(hf2) : 9'd240 + 9'(hf2);
      endcase
    end
  end
endmodule
