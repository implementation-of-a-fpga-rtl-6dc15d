// Traffic monitor: camera in, plate-highlighting video and UDP stream out.
//
// Data path, one clock domain per interface:
//   pixel clock  ccd_capture -> raw2rgb -> detect -> frame_store (write)
//   VGA clock    frame_store (read) -> vga_ctrl -> data_reconstruct
//                -> pingpong_buffer (write)
//   125 MHz      pingpong_buffer (read) -> packet_gen -> rgmii_tx
//   board clock  reset_ctrl, i2c_ccd_config
// seg7_display shows the number of frames captured (pixel-clock counter,
// shown without synchronisation since a display tolerates a torn value).
//
// Interface: the four clocks come from outside (camera, and PLLs for
// 25 MHz VGA and 125 MHz Ethernet); camera bus, open-drain I2C, VGA DAC
// signals, RGMII transmit pins and the 7-segment digits are ports.
// plate and the ev_* pulses expose what the detector and the Ethernet
// path are doing (each in its own clock domain, see the ports).
//
// The chain of modules follows the paper's block diagram; the on-chip
// frame store stands in for the board's SDRAM and its controller.
module traffic_monitor_top
  import tm_pkg::*;
#(
  parameter int RAW_W       = RAW_W_DEF,
  parameter int RAW_H       = RAW_H_DEF,
  parameter int RST_DELAY   = 1_000_000,
  parameter int I2C_CLK_DIV = 125,
  parameter int RUN_THRESH  = 32,
  parameter int MAX_GAP     = 24,
  parameter int H_FP        = 16,
  parameter int H_SYNC      = 96,
  parameter int H_BP        = 48,
  parameter int V_FP        = 10,
  parameter int V_SYNC      = 2,
  parameter int V_BP        = 33,
  parameter int PAYLOAD     = PAYLOAD_DEF
) (
  // board
  input  logic            clk_50,
  input  logic            key_rst_n,
  input  logic [15:0]     exposure,
  input  logic            zoom,
  output logic [7:0][6:0] hex,
  // camera
  input  logic            cam_pixclk,
  input  logic [CW-1:0]   cam_d,
  input  logic            cam_fval,
  input  logic            cam_lval,
  output logic            i2c_scl_oe,
  output logic            i2c_sda_oe,
  input  logic            i2c_sda_in,
  output logic            cfg_done,
  output logic            cfg_ack_err,
  // VGA (clk_vga domain)
  input  logic            clk_vga,
  output logic [VW-1:0]   vga_r,
  output logic [VW-1:0]   vga_g,
  output logic [VW-1:0]   vga_b,
  output logic            vga_hs_n,
  output logic            vga_vs_n,
  output logic            vga_blank_n,
  // Ethernet (clk_eth domain)
  input  logic            clk_eth,
  output logic            eth_rst_n,
  output logic            eth_gtx_clk,
  output logic [3:0]      eth_txd,
  output logic            eth_tx_ctl,
  // observation
  output plate_box_t      plate,        // cam_pixclk domain
  output logic            ev_noise,     // cam_pixclk domain
  output logic            ev_upper,     // cam_pixclk domain
  output logic            ev_bottom,    // cam_pixclk domain
  output logic            ev_drop,      // clk_vga domain
  output logic            ev_frame      // clk_eth domain
);
  localparam int IMG_W = RAW_W / 2;
  localparam int IMG_H = RAW_H / 2;
  localparam int AW    = $clog2(IMG_W * IMG_H);

  logic rst_n_ref, rst_n_pix, rst_n_vga, rst_n_eth;

  reset_ctrl #(.DELAY(RST_DELAY)) u_reset (
    .clk_ref(clk_50), .key_rst_n(key_rst_n),
    .clk_pix(cam_pixclk), .clk_vga(clk_vga), .clk_eth(clk_eth),
    .rst_n_ref(rst_n_ref), .rst_n_pix(rst_n_pix), .rst_n_vga(rst_n_vga), .rst_n_eth(rst_n_eth)
  );
  assign eth_rst_n = rst_n_eth;

  i2c_ccd_config #(.CLK_DIV(I2C_CLK_DIV)) u_i2c (
    .clk(clk_50), .rst_n(rst_n_ref), .exposure(exposure), .zoom(zoom),
    .scl_oe(i2c_scl_oe), .sda_oe(i2c_sda_oe), .sda_in(i2c_sda_in),
    .done(cfg_done), .ack_err(cfg_ack_err)
  );

  // ------------------------------------------------------ pixel domain
  raw_pix_t    raw;
  rgb_pix_t    rgb;
  cls_pix_t    cls;
  logic [31:0] frame_cnt;

  ccd_capture #(.RAW_W(RAW_W), .RAW_H(RAW_H)) u_ccd (
    .clk(cam_pixclk), .rst_n(rst_n_pix),
    .cam_d(cam_d), .cam_fval(cam_fval), .cam_lval(cam_lval),
    .pix(raw), .frame_cnt(frame_cnt)
  );

  seg7_display #(.DIGITS(8)) u_seg (.value(frame_cnt), .hex(hex));

  raw2rgb #(.RAW_W(RAW_W)) u_raw2rgb (
    .clk(cam_pixclk), .rst_n(rst_n_pix), .in(raw), .out(rgb)
  );

  detect #(.IMG_W(IMG_W), .IMG_H(IMG_H), .RUN_THRESH(RUN_THRESH), .MAX_GAP(MAX_GAP)) u_detect (
    .clk(cam_pixclk), .rst_n(rst_n_pix), .in(rgb), .out(cls), .plate(plate),
    .ev_noise(ev_noise), .ev_upper(ev_upper), .ev_bottom(ev_bottom)
  );

  // --------------------------------------------------------- frame store
  logic [AW-1:0] fs_addr;
  pix_cls_e      fs_data;

  frame_store #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_fs (
    .clk_w(cam_pixclk), .wr(cls), .clk_r(clk_vga), .rd_addr(fs_addr), .rd_data(fs_data)
  );

  // -------------------------------------------------------- VGA domain
  vga_t       vga;
  logic       byte_en, byte_sof;
  logic [7:0] byte_d;

  vga_ctrl #(.H_ACT(IMG_W), .H_FP(H_FP), .H_SYNC(H_SYNC), .H_BP(H_BP),
             .V_ACT(IMG_H), .V_FP(V_FP), .V_SYNC(V_SYNC), .V_BP(V_BP)) u_vga (
    .clk(clk_vga), .rst_n(rst_n_vga), .rd_addr(fs_addr), .rd_cls(fs_data), .vga(vga)
  );
  assign vga_r       = vga.r;
  assign vga_g       = vga.g;
  assign vga_b       = vga.b;
  assign vga_hs_n    = vga.hs_n;
  assign vga_vs_n    = vga.vs_n;
  assign vga_blank_n = vga.blank_n;

  data_reconstruct u_recon (
    .clk(clk_vga), .rst_n(rst_n_vga), .vga(vga),
    .wr_en(byte_en), .wr_data(byte_d), .sof(byte_sof)
  );

  // ---------------------------------------------------- Ethernet domain
  logic        pp_ready, pp_rd_en;
  logic [15:0] pp_sum;
  logic [7:0]  pp_data, tx_data;
  logic        tx_en;

  pingpong_buffer #(.PAYLOAD(PAYLOAD)) u_pp (
    .wclk(clk_vga), .wrst_n(rst_n_vga), .wr_en(byte_en), .wr_data(byte_d), .ev_drop(ev_drop),
    .rclk(clk_eth), .rrst_n(rst_n_eth), .ready(pp_ready), .data_sum(pp_sum),
    .rd_en(pp_rd_en), .rd_data(pp_data)
  );

  packet_gen #(.PAYLOAD(PAYLOAD)) u_pkt (
    .clk(clk_eth), .rst_n(rst_n_eth), .ready(pp_ready), .data_sum(pp_sum),
    .rd_en(pp_rd_en), .rd_data(pp_data), .tx_en(tx_en), .tx_data(tx_data), .ev_frame(ev_frame)
  );

  rgmii_tx u_rgmii (
    .clk(clk_eth), .rst_n(rst_n_eth), .tx_en(tx_en), .tx_data(tx_data),
    .gtx_clk(eth_gtx_clk), .txd(eth_txd), .tx_ctl(eth_tx_ctl)
  );

  // byte_sof is only used to check frame alignment of the Ethernet stream
  a_sof_aligned: assert property (@(posedge clk_vga) disable iff (!rst_n_vga)
    byte_sof |-> byte_en);

endmodule
