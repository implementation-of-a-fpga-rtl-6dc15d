// Frame store between the detector and the VGA output.
//
// Holds one IMG_W x IMG_H frame of 2-bit pixel classes in a simple
// dual-port, dual-clock array. The detector writes each pixel at address
// y*IMG_W + x in the pixel clock domain; the VGA controller reads by
// address in its own clock domain with one clock of read latency. The
// frame is not double-buffered: the reader may see a frame being replaced,
// which shows only as a tear while the plate rectangle moves.
//
// The paper keeps the frame in the board's off-chip SDRAM behind a
// memory controller; since the detector output has only three colours,
// this design keeps it on chip instead (614,400 bits at 640x480), which
// preserves the store-and-regenerate role but not the SDRAM interface.
module frame_store
  import tm_pkg::*;
#(
  parameter int IMG_W = IMG_W_DEF,
  parameter int IMG_H = IMG_H_DEF,
  localparam int AW   = $clog2(IMG_W * IMG_H)
) (
  input  logic          clk_w,
  input  cls_pix_t      wr,
  input  logic          clk_r,
  input  logic [AW-1:0] rd_addr,
  output pix_cls_e      rd_data
);
  pix_cls_e      mem [IMG_W * IMG_H];
  logic [AW-1:0] wr_addr;

  assign wr_addr = AW'(wr.y) * AW'(IMG_W) + AW'(wr.x);

  always_ff @(posedge clk_w) begin
    if (wr.valid) mem[wr_addr] <= wr.cls;
  end

  always_ff @(posedge clk_r) begin
    rd_data <= mem[rd_addr];
  end

endmodule
