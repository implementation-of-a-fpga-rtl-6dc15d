// Shared types and constants of the traffic-monitor pipeline.
//
// The video path carries pixels as small structs that bundle the data with
// its valid strobe and its coordinates, so every stage knows where in the
// frame a pixel lies without counting on its own. Three streams exist:
//   raw_pix_t : 12-bit Bayer sample from the sensor, raw coordinates
//   rgb_pix_t : demosaiced 12-bit R,G,B at half resolution
//   cls_pix_t : detector result, one of three display classes
// The raw row length 1280 and the 12-bit sample follow the paper; the
// raw frame height, the 640x480 processed size and the class encoding are
// this design's choices.
package tm_pkg;

  localparam int RAW_W_DEF = 1280;   // raw row length (paper)
  localparam int RAW_H_DEF = 960;    // raw rows per frame (assumed)
  localparam int IMG_W_DEF = 640;    // after 2x2 down-sampling
  localparam int IMG_H_DEF = 480;

  localparam int CW  = 12;           // camera / RGB channel width (paper)
  localparam int XW  = 11;           // coordinate width, covers 0..2047
  localparam int VW  = 10;           // VGA channel width (paper)

  typedef struct packed {
    logic          valid;
    logic [XW-1:0] x;
    logic [XW-1:0] y;
    logic [CW-1:0] d;
  } raw_pix_t;

  typedef struct packed {
    logic          valid;
    logic [XW-1:0] x;
    logic [XW-1:0] y;
    logic [CW-1:0] r;
    logic [CW-1:0] g;
    logic [CW-1:0] b;
  } rgb_pix_t;

  // Display class written to the frame store.
  typedef enum logic [1:0] {
    CLS_BLACK = 2'd0,
    CLS_WHITE = 2'd1,
    CLS_RED   = 2'd2
  } pix_cls_e;

  typedef struct packed {
    logic          valid;
    logic [XW-1:0] x;
    logic [XW-1:0] y;
    pix_cls_e      cls;
  } cls_pix_t;

  // Plate rectangle found by the detector (inclusive bounds).
  typedef struct packed {
    logic          found;
    logic [XW-1:0] left;
    logic [XW-1:0] right;
    logic [XW-1:0] top;
    logic [XW-1:0] bottom;
  } plate_box_t;

  // VGA output bundle.
  typedef struct packed {
    logic          hs_n;
    logic          vs_n;
    logic          blank_n;   // 1 during active video
    logic [XW-1:0] x;
    logic [XW-1:0] y;
    logic [VW-1:0] r;
    logic [VW-1:0] g;
    logic [VW-1:0] b;
  } vga_t;

  // Ethernet frame layout (byte numbers of the user-defined frame).
  localparam int PAYLOAD_DEF = 1024;
  localparam int HDR_BYTES   = 50;            // preamble .. UDP checksum
  localparam int FCS_BYTES   = 4;

  // Ones-complement 16-bit add with end-around carry.
  function automatic logic [15:0] oc_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

endpackage
