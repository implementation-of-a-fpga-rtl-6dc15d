// Number-plate detector (pixel-serial, one pixel per clock).
//
// The plate background is yellow. Each pixel is converted to HSV and
// called yellow when its hue lies in [H_MIN, H_MAX] degrees, its
// saturation is at least S_MIN (of 255) and its value at least V_MIN.
// Along each line a counter measures runs of consecutive yellow pixels,
// remembering where the run began. A run longer than RUN_THRESH marks the
// line as a plate line (its extent is kept); shorter runs are noise and
// are dropped.
//
// A small state machine works over the frame:
//   SEARCH_TOP  the first plate line found is the upper line of the plate;
//   SEARCH_BOT  every further plate line moves the bottom line down and
//               widens the left/right extent; MAX_GAP lines in a row
//               without a plate line end the search (the characters of
//               the plate interrupt the yellow runs, so a few missing
//               lines must not end it);
//   DONE        nothing more is searched in this frame.
// At the last pixel of the frame the rectangle is latched into plate (with
// found = 0 when no upper line was seen) and the search restarts.
//
// Output image: with the rectangle of the previous frame, pixels inside it
// are white when yellow and black otherwise (the characters), a BORDER
// pixel wide frame just outside it is red, everything else is black.
//
// Interface: in is the RGB stream with coordinates (IMG_W x IMG_H, lines
// in order); out carries the class of the same pixel 5 clocks later.
// ev_* pulse for one clock when a noise run is rejected, an upper line is
// found and a bottom line is accepted. plate changes only at the end of a
// frame.
//
// The algorithm (HSV yellow test, run counter against a threshold, upper
// line then bottom line, white/black output with a red rectangle) is the
// paper's. All thresholds, the gap rule and the one-frame delay of the
// rectangle are this design's choices.
module detect
  import tm_pkg::*;
#(
  parameter int IMG_W      = IMG_W_DEF,
  parameter int IMG_H      = IMG_H_DEF,
  parameter int RUN_THRESH = 32,
  parameter int MAX_GAP    = 24,
  parameter int H_MIN      = 35,
  parameter int H_MAX      = 75,
  parameter int S_MIN      = 90,
  parameter int V_MIN      = 1024,
  parameter int BORDER     = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  rgb_pix_t   in,
  output cls_pix_t   out,
  output plate_box_t plate,
  output logic       ev_noise,
  output logic       ev_upper,
  output logic       ev_bottom
);
  typedef enum logic [1:0] {SEARCH_TOP, SEARCH_BOT, DONE} det_state_e;

  // ---------------------------------------------------------------- HSV
  logic          hsv_v;
  logic [8:0]    hue;
  logic [7:0]    sat;
  logic [CW-1:0] val;

  rgb2hsv #(.CW(CW)) u_hsv (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in.valid), .r(in.r), .g(in.g), .b(in.b),
    .out_valid(hsv_v), .h(hue), .s(sat), .v(val)
  );

  // coordinates travel alongside the 3-stage conversion
  logic [2:0][XW-1:0] xd, yd;
  always_ff @(posedge clk) begin
    xd <= {xd[1:0], in.x};
    yd <= {yd[1:0], in.y};
  end

  // ------------------------------------------------------ yellow marking
  logic          p_v, p_yel;
  logic [XW-1:0] p_x, p_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_v <= 1'b0; p_yel <= 1'b0; p_x <= '0; p_y <= '0;
    end else begin
      p_v   <= hsv_v;
      p_x   <= xd[2];
      p_y   <= yd[2];
      p_yel <= (hue >= 9'(H_MIN)) && (hue <= 9'(H_MAX)) &&
               (sat >= 8'(S_MIN)) && (val >= CW'(V_MIN));
    end
  end

  // ------------------------------------------------------- run counting
  localparam int RW = $clog2(IMG_W + 1);
  localparam int GW = $clog2(MAX_GAP + 1);

  logic [RW-1:0] run_len;
  logic [XW-1:0] run_start;
  logic          row_hit;
  logic [XW-1:0] row_l, row_r;

  det_state_e    state;
  logic [XW-1:0] c_top, c_bot, c_l, c_r;
  logic [GW-1:0] gap;

  // combinational view of the run that ends at this pixel
  logic          eol, eof;
  logic          close_run;          // a run ends here
  logic [RW-1:0] len_eff;
  logic [XW-1:0] start_eff, end_eff;
  logic          run_ok;             // ...and it is long enough
  logic          hit_now;
  logic [XW-1:0] l_now, r_now;

  always_comb begin
    eol       = p_v && (p_x == XW'(IMG_W - 1));
    eof       = eol && (p_y == XW'(IMG_H - 1));
    len_eff   = p_yel ? run_len + 1'b1 : run_len;
    start_eff = (p_yel && run_len == '0) ? p_x : run_start;
    end_eff   = p_yel ? p_x : p_x - 1'b1;
    close_run = p_v && (len_eff != '0) && (!p_yel || eol);
    run_ok    = close_run && (len_eff > RW'(RUN_THRESH));
    hit_now   = row_hit || run_ok;
    l_now     = row_l;
    r_now     = row_r;
    if (run_ok) begin
      if (!row_hit || start_eff < row_l) l_now = start_eff;
      if (!row_hit || end_eff > row_r)   r_now = end_eff;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_len <= '0; run_start <= '0;
      row_hit <= 1'b0; row_l <= '0; row_r <= '0;
      state <= SEARCH_TOP;
      c_top <= '0; c_bot <= '0; c_l <= '0; c_r <= '0; gap <= '0;
      plate <= '0;
      ev_noise <= 1'b0; ev_upper <= 1'b0; ev_bottom <= 1'b0;
    end else begin
      ev_noise  <= close_run && !run_ok;
      ev_upper  <= 1'b0;
      ev_bottom <= 1'b0;

      if (p_v) begin
        // run counter
        if (p_yel && !eol) begin
          if (run_len == '0) run_start <= p_x;
          run_len <= len_eff;
        end else begin
          run_len <= '0;
        end
        // best extent of this line
        if (eol) begin
          row_hit <= 1'b0;
        end else begin
          row_hit <= hit_now;
          row_l   <= l_now;
          row_r   <= r_now;
        end

        // line-level state machine
        if (eol) begin
          unique case (state)
            SEARCH_TOP: if (hit_now) begin
              state <= SEARCH_BOT;
              c_top <= p_y; c_bot <= p_y; c_l <= l_now; c_r <= r_now;
              gap   <= '0;
              ev_upper <= 1'b1;
            end
            SEARCH_BOT: if (hit_now) begin
              c_bot <= p_y;
              if (l_now < c_l) c_l <= l_now;
              if (r_now > c_r) c_r <= r_now;
              gap   <= '0;
              ev_bottom <= 1'b1;
            end else if (gap == GW'(MAX_GAP - 1)) begin
              state <= DONE;
            end else begin
              gap <= gap + 1'b1;
            end
            default: ;
          endcase

          if (eof) begin
            state        <= SEARCH_TOP;
            plate.found  <= (state != SEARCH_TOP) || hit_now;
            plate.top    <= (state == SEARCH_TOP) ? p_y : c_top;
            plate.bottom <= (state == SEARCH_TOP || (state == SEARCH_BOT && hit_now)) ? p_y : c_bot;
            plate.left   <= (state == SEARCH_TOP) ? l_now :
                            (state == SEARCH_BOT && hit_now && l_now < c_l) ? l_now : c_l;
            plate.right  <= (state == SEARCH_TOP) ? r_now :
                            (state == SEARCH_BOT && hit_now && r_now > c_r) ? r_now : c_r;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- output
  logic [XW:0] ex, ey;
  logic        in_box, in_frame;
  always_comb begin
    ex = {1'b0, p_x} + (XW+1)'(BORDER);
    ey = {1'b0, p_y} + (XW+1)'(BORDER);
    in_box   = (p_x >= plate.left) && (p_x <= plate.right) &&
               (p_y >= plate.top)  && (p_y <= plate.bottom);
    in_frame = (ex >= {1'b0, plate.left}) && ({1'b0, p_x} <= {1'b0, plate.right} + (XW+1)'(BORDER)) &&
               (ey >= {1'b0, plate.top})  && ({1'b0, p_y} <= {1'b0, plate.bottom} + (XW+1)'(BORDER));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      out.valid <= p_v;
      out.x     <= p_x;
      out.y     <= p_y;
      if (plate.found && in_box)
        out.cls <= p_yel ? CLS_WHITE : CLS_BLACK;
      else if (plate.found && in_frame)
        out.cls <= CLS_RED;
      else
        out.cls <= CLS_BLACK;
    end
  end

endmodule
