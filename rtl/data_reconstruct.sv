// Data format reconstruction for the Ethernet path.
//
// The picture sent over the network has only two colours, so each active
// VGA pixel is reduced from its 10-bit channel to one byte: the eight high
// bits of the green channel, which gives 0xFF for white and 0x00 for black
// (the red rectangle, having no green, is sent as black). Bytes are
// produced only from the first pixel of a frame onwards after reset, so
// that every packet starts at a multiple of 1024 bytes from a frame
// start; a 640x480 frame is exactly 300 packets.
//
// Interface: vga is the VGA controller's output bundle; wr_en/wr_data is
// one byte per active pixel, one clock later, for the ping-pong buffer.
// sof marks the byte of pixel (0,0).
//
// The byte-per-pixel reduction of the 10-bit VGA data follows the paper;
// the choice of channel and the frame alignment are this design's.
module data_reconstruct
  import tm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  vga_t       vga,
  output logic       wr_en,
  output logic [7:0] wr_data,
  output logic       sof
);
  logic armed;   // seen a frame start since reset
  logic first;

  assign first = vga.blank_n && (vga.x == '0) && (vga.y == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed   <= 1'b0;
      wr_en   <= 1'b0;
      wr_data <= '0;
      sof     <= 1'b0;
    end else begin
      if (first) armed <= 1'b1;
      wr_en   <= vga.blank_n && (armed || first);
      wr_data <= vga.g[VW-1 -: 8];
      sof     <= first;
    end
  end

endmodule
