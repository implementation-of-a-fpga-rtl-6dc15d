// Camera capture: turns the sensor's pixel bus into a coordinate-tagged
// raw pixel stream and counts frames.
//
// The sensor drives a 12-bit sample with two strobes: FVAL high for the
// whole frame and LVAL high for each row's valid pixels. Inputs are
// registered once, a pixel is valid when both strobes are high, the column
// counter x advances on each valid pixel and clears when LVAL falls, the
// row counter y advances at the end of each row and clears at the rising
// edge of FVAL, where frame_cnt is incremented.
//
// Interface: cam_* in the pixel clock domain; pix is the registered raw
// stream, two clocks after the sample is on cam_d. frame_cnt feeds the
// 7-segment display. The FVAL/LVAL convention is the sensor's; the paper
// names the module and its role only.
module ccd_capture
  import tm_pkg::*;
#(
  parameter int RAW_W = RAW_W_DEF,
  parameter int RAW_H = RAW_H_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] cam_d,
  input  logic          cam_fval,
  input  logic          cam_lval,
  output raw_pix_t      pix,
  output logic [31:0]   frame_cnt
);
  logic [CW-1:0] d_r;
  logic          fval_r, lval_r, fval_q, lval_q;
  logic [XW-1:0] x_cnt, y_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_r       <= '0;
      fval_r    <= 1'b0;
      lval_r    <= 1'b0;
      fval_q    <= 1'b0;
      lval_q    <= 1'b0;
      x_cnt     <= '0;
      y_cnt     <= '0;
      frame_cnt <= '0;
      pix       <= '0;
    end else begin
      d_r    <= cam_d;
      fval_r <= cam_fval;
      lval_r <= cam_lval;
      fval_q <= fval_r;
      lval_q <= lval_r;

      pix.valid <= fval_r && lval_r;
      pix.d     <= d_r;
      pix.x     <= x_cnt;
      pix.y     <= y_cnt;

      if (fval_r && !fval_q) begin
        frame_cnt <= frame_cnt + 1'b1;
        y_cnt     <= '0;
        x_cnt     <= '0;
      end else begin
        if (fval_r && lval_r) x_cnt <= x_cnt + 1'b1;
        if (lval_q && !lval_r && fval_r) begin
          x_cnt <= '0;
          y_cnt <= y_cnt + 1'b1;
        end
      end
    end
  end

  // The sensor is programmed for RAW_W x RAW_H; larger coordinates mean a
  // sensor set-up that does not match the rest of the pipeline.
  property p_in_frame;
    @(posedge clk) disable iff (!rst_n) pix.valid |-> (pix.x < XW'(RAW_W) && pix.y < XW'(RAW_H));
  endproperty
  a_in_frame: assert property (p_in_frame);

endmodule
