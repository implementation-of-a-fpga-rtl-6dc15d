// VGA display controller.
//
// Horizontal and vertical counters sweep the standard 640x480 at 60 Hz
// raster (800 x 525 clocks per frame at 25.175 MHz, negative syncs). While
// the counters are inside the active area, the pixel class at address
// y*H_ACT + x is requested from the frame store; its 2-bit class is then
// turned into 10-bit colour channels: black = 0, white = all ones,
// red = red channel only.
//
// Interface: rd_addr goes to the frame store (one clock read latency);
// vga carries syncs, blank_n (1 in active video), the pixel's x,y and its
// colour, all aligned, 2 clocks after the counters.
//
// The paper names the VGA module and gives its 10-bit colour channels;
// the raster timing is the VGA standard's and the colour mapping is this
// design's.
module vga_ctrl
  import tm_pkg::*;
#(
  parameter int H_ACT  = 640,
  parameter int H_FP   = 16,
  parameter int H_SYNC = 96,
  parameter int H_BP   = 48,
  parameter int V_ACT  = 480,
  parameter int V_FP   = 10,
  parameter int V_SYNC = 2,
  parameter int V_BP   = 33,
  localparam int AW    = $clog2(H_ACT * V_ACT)
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic [AW-1:0] rd_addr,
  input  pix_cls_e      rd_cls,
  output vga_t          vga
);
  localparam int H_TOT = H_ACT + H_FP + H_SYNC + H_BP;
  localparam int V_TOT = V_ACT + V_FP + V_SYNC + V_BP;

  logic [XW-1:0] hc, vc;
  logic          de0, hs0, vs0;
  logic          de1, hs1, vs1;
  logic [XW-1:0] x1, y1;

  always_comb begin
    de0 = (hc < XW'(H_ACT)) && (vc < XW'(V_ACT));
    hs0 = !((hc >= XW'(H_ACT + H_FP)) && (hc < XW'(H_ACT + H_FP + H_SYNC)));
    vs0 = !((vc >= XW'(V_ACT + V_FP)) && (vc < XW'(V_ACT + V_FP + V_SYNC)));
    rd_addr = de0 ? AW'(vc) * AW'(H_ACT) + AW'(hc) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc <= '0; vc <= '0;
      de1 <= 1'b0; hs1 <= 1'b1; vs1 <= 1'b1; x1 <= '0; y1 <= '0;
      vga <= '{hs_n: 1'b1, vs_n: 1'b1, default: '0};
    end else begin
      if (hc == XW'(H_TOT - 1)) begin
        hc <= '0;
        vc <= (vc == XW'(V_TOT - 1)) ? '0 : vc + 1'b1;
      end else begin
        hc <= hc + 1'b1;
      end

      de1 <= de0; hs1 <= hs0; vs1 <= vs0; x1 <= hc; y1 <= vc;

      vga.hs_n    <= hs1;
      vga.vs_n    <= vs1;
      vga.blank_n <= de1;
      vga.x       <= x1;
      vga.y       <= y1;
      vga.r       <= (de1 && rd_cls != CLS_BLACK) ? '1 : '0;
      vga.g       <= (de1 && rd_cls == CLS_WHITE) ? '1 : '0;
      vga.b       <= (de1 && rd_cls == CLS_WHITE) ? '1 : '0;
    end
  end

endmodule
