// System testbench at reduced size: 64x48 raw frames, 64-byte payloads, short VGA blanking.
//
// A camera model streams Bayer frames of a scene with a yellow plate, a
// short yellow blob and plate characters through the whole system. The
// testbench checks, end to end:
//  - the I2C configuration completes, and is sent again after a zoom change;
//  - the detector finds exactly the plate rectangle and rejects the blob;
//  - one whole VGA frame, pixel by pixel: white plate background, black
//    characters, red ring round the plate, black elsewhere;
//  - the 7-segment digits show the number of frames the camera started;
//  - every Ethernet frame decoded from the RGMII pins: length, preamble,
//    frame table bytes, IP header checksum, FCS, and that every payload
//    sent after the picture settled is a run of the expected picture bytes;
//  - stopping the Ethernet clock for a frame makes the ping-pong buffer drop
//    whole payloads, and transmission resumes with correct payloads
// Each mechanism (noise rejection, upper line, bottom line, reconfiguration,
// frame transmission, payload drop) is counted and must happen at least once.
//
// The checked behaviour (plate found as the yellow rectangle, white plate /
// black characters / red frame on VGA, UDP frames after Table I) follows
// the paper; the scene, the sizes, the one-frame delay of the rectangle
// and the picture-byte format (0xFF white, 0x00 otherwise) are this
// design's.
module tb_traffic_monitor_top;
  import tm_pkg::*;
  localparam int RAW_W = 64, RAW_H = 48;
  localparam int IMG_W = RAW_W / 2, IMG_H = RAW_H / 2;
  localparam int P     = 64;
  localparam int PL = 8, PR = 23, PT = 8, PB = 15, CT = 11, CB = 12;
  int checks = 0, failures = 0;

  logic clk_50 = 0, key_rst_n = 1, zoom = 0, cam_pixclk = 0, clk_vga = 0, clk_eth = 0;
  logic eth_gate = 1;
  logic [15:0] exposure = 16'h0300;
  logic [7:0][6:0] hex;
  logic [11:0] cam_d;
  logic cam_fval, cam_lval, i2c_scl_oe, i2c_sda_oe, cfg_done, cfg_ack_err;
  logic [9:0] vga_r, vga_g, vga_b;
  logic vga_hs_n, vga_vs_n, vga_blank_n, eth_rst_n, eth_gtx_clk, eth_tx_ctl;
  logic [3:0] eth_txd;
  plate_box_t plate;
  logic ev_noise, ev_upper, ev_bottom, ev_drop, ev_frame;
  logic cam_run = 0;
  int frames_started;

  traffic_monitor_top #(.RAW_W(64), .RAW_H(48), .RST_DELAY(50), .I2C_CLK_DIV(4), .RUN_THRESH(6), .MAX_GAP(3),
                        .H_FP(2), .H_SYNC(4), .H_BP(2), .V_FP(1), .V_SYNC(1), .V_BP(1), .PAYLOAD(64)) dut (
    .clk_50, .key_rst_n, .exposure, .zoom, .hex,
    .cam_pixclk, .cam_d, .cam_fval, .cam_lval,
    .i2c_scl_oe, .i2c_sda_oe, .i2c_sda_in(1'b0), .cfg_done, .cfg_ack_err,
    .clk_vga, .vga_r, .vga_g, .vga_b, .vga_hs_n, .vga_vs_n, .vga_blank_n,
    .clk_eth(clk_eth && eth_gate), .eth_rst_n, .eth_gtx_clk, .eth_txd, .eth_tx_ctl,
    .plate, .ev_noise, .ev_upper, .ev_bottom, .ev_drop, .ev_frame
  );

  cam_model #(.RAW_W(RAW_W), .RAW_H(RAW_H), .HBLANK(8), .VBLANK(40),
              .PL(PL), .PR(PR), .PT(PT), .PB(PB), .CT(CT), .CB(CB)) u_cam (
    .clk(cam_pixclk), .run(cam_run), .d(cam_d), .fval(cam_fval), .lval(cam_lval),
    .frames_started(frames_started)
  );

  always #10 clk_50     = ~clk_50;
  always #5  cam_pixclk = ~cam_pixclk;
  always #10 clk_vga    = ~clk_vga;
  always #4  clk_eth    = ~clk_eth;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------- expected picture
  function automatic pix_cls_e exp_cls(int x, int y);
    bit yel;
    yel = (x >= PL && x <= PR && y >= PT && y <= PB) && !(y >= CT && y <= CB && ((x - PL) % 4 == 2));
    if (x >= PL && x <= PR && y >= PT && y <= PB) return yel ? CLS_WHITE : CLS_BLACK;
    if (x >= PL - 2 && x <= PR + 2 && y >= PT - 2 && y <= PB + 2) return CLS_RED;
    return CLS_BLACK;
  endfunction

  function automatic logic [7:0] exp_byte(int n);
    return (exp_cls(n % IMG_W, n / IMG_W) == CLS_WHITE) ? 8'hFF : 8'h00;
  endfunction

  // ------------------------------------------------------------ counters
  int n_noise, n_upper, n_bottom, n_drop, n_frame, n_reconf;
  always @(posedge cam_pixclk) begin
    n_noise += int'(ev_noise); n_upper += int'(ev_upper); n_bottom += int'(ev_bottom);
  end
  always @(posedge clk_vga) n_drop += int'(ev_drop);
  always @(posedge clk_eth) n_frame += int'(ev_frame);

  // -------------------------------------------------------- VGA checking
  bit vga_check_on, vga_checked;
  int vga_pix;
  always @(posedge clk_vga) begin
    if (vga_check_on && vga_blank_n && dut.vga.x == 0 && dut.vga.y == 0) begin
      if (vga_pix == 0) vga_pix = 1; else begin vga_check_on = 0; vga_checked = 1; end
    end else if (vga_check_on && vga_pix > 0 && vga_blank_n) vga_pix++;
    if (vga_check_on && vga_pix > 0 && vga_blank_n) begin
      pix_cls_e c;
      c = exp_cls(int'(dut.vga.x), int'(dut.vga.y));
      checks++;
      if (vga_r != ((c != CLS_BLACK) ? 10'h3FF : 10'h0) || vga_g != ((c == CLS_WHITE) ? 10'h3FF : 10'h0)) begin
        failures++;
        if (failures < 30) $display("VGA pixel (%0d,%0d) r=%h g=%h", dut.vga.x, dut.vga.y, vga_r, vga_g);
      end
    end
  end

  // ---------------------------------------------- RGMII receive and parse
  logic [7:0] rx [$];
  logic [3:0] hi_nib;
  logic       hi_en;
  bit  payload_check_on;
  int  n_rx, n_payload_ok;

  function automatic logic [31:0] fcs_of(input logic [7:0] q [$], int from, int to);
    logic [31:0] c;
    c = '1;
    for (int i = from; i <= to; i++)
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ q[i][k];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    return ~c;
  endfunction

  function automatic logic [15:0] oc(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] t;
    t = {1'b0, a} + {1'b0, b};
    return t[15:0] + 16'(t[16]);
  endfunction

  task automatic parse(input logic [7:0] f [$]);
    logic [15:0] s;
    logic [31:0] fcs;
    bit ok;
    n_rx++;
    check(f.size() == 50 + P + 4, $sformatf("Ethernet frame length %0d", f.size()));
    if (f.size() != 50 + P + 4) return;
    ok = 1;
    for (int i = 0; i < 7; i++) ok &= (f[i] == 8'h55);
    ok &= f[7] == 8'hD5 && f[20] == 8'h08 && f[21] == 8'h88 && f[22] == 8'h45 && f[30] == 8'h80 && f[31] == 8'h11;
    check(ok, "frame table bytes");
    s = 0;
    for (int i = 22; i < 42; i += 2) s = oc(s, {f[i], f[i+1]});
    check(s == 16'hFFFF, "IP header checksum");
    fcs = fcs_of(f, 8, 50 + P - 1);
    check({f[53+P], f[52+P], f[51+P], f[50+P]} == fcs, "FCS");
    if (payload_check_on) begin
      bit found;
      found = 0;
      for (int k = 0; k < (IMG_W * IMG_H) / P && !found; k++) begin
        bit m;
        m = 1;
        for (int i = 0; i < P && m; i++) m = (f[50 + i] == exp_byte(k * P + i));
        found = m;
      end
      check(found, "payload is a chunk of the expected picture");
      n_payload_ok += int'(found);
    end
  endtask

  always @(posedge clk_eth) if (eth_gate) begin
    #1;
    hi_nib = eth_txd;
    hi_en  = eth_tx_ctl;
    if (!hi_en && rx.size() > 0) begin parse(rx); rx = {}; end
  end
  always @(negedge clk_eth) if (eth_gate) begin
    #1;
    if (hi_en) rx.push_back({hi_nib, eth_txd});
  end

  // ---------------------------------------------------------------- flow
  task automatic wait_frames(int n);
    int f0;
    f0 = frames_started;
    while (frames_started < f0 + n) @(posedge cam_pixclk);
  endtask

  initial begin
    $assertoff;          // flops hold power-up garbage until the reset reaches them
    #1 key_rst_n = 0;     // a falling edge, so the asynchronous resets act
    #100;
    key_rst_n = 1;
    $asserton;
    while (!dut.rst_n_pix) @(posedge cam_pixclk);
    while (!cfg_done) @(posedge clk_50);
    check(!cfg_ack_err, "configuration acknowledged");
    cam_run = 1;
    wait_frames(2);          // frame 1 detected, frame 2 drawn with the box
    check(plate.found && plate.left == PL && plate.right == PR && plate.top == PT && plate.bottom == PB,
          $sformatf("plate box %0d %0d %0d %0d %0d", plate.found, plate.left, plate.right, plate.top, plate.bottom));
    wait_frames(1);          // frame 2 complete in the frame store
    vga_check_on = 1;
    payload_check_on = 1;
    while (!vga_checked) @(posedge clk_vga);
    wait_frames(1);
    repeat (4) @(posedge cam_pixclk);   // capture registers the frame-valid edge
    begin
      logic [31:0] fc;
      for (int i = 0; i < 8; i++) begin
        logic [6:0] seg;
        unique case (dut.frame_cnt[4*i +: 4])
          0: seg = 7'h40; 1: seg = 7'h79; 2: seg = 7'h24; 3: seg = 7'h30; 4: seg = 7'h19;
          5: seg = 7'h12; 6: seg = 7'h02; 7: seg = 7'h78; 8: seg = 7'h00; 9: seg = 7'h10;
          default: seg = 7'h7F;
        endcase
        check(hex[i] == seg, $sformatf("7-segment digit %0d", i));
      end
      fc = dut.frame_cnt;
      check(int'(fc) == frames_started, $sformatf("frame count %0d vs %0d", fc, frames_started));
    end
    // stop the Ethernet clock for a while: the ping-pong writer must drop
    payload_check_on = 0;
    eth_gate = 0;
    wait_frames(1);
    eth_gate = 1;
    wait_frames(1);
    payload_check_on = 1;
    wait_frames(1);
    // zoom change: the sensor table is written again
    zoom = 1;
    while (cfg_done) @(posedge clk_50);
    n_reconf++;
    while (!cfg_done) @(posedge clk_50);
    check(!cfg_ack_err, "reconfiguration acknowledged");
    cam_run = 0;

    check(n_noise > 0,    $sformatf("noise runs rejected: %0d", n_noise));
    check(n_upper > 0,    $sformatf("upper lines found: %0d", n_upper));
    check(n_bottom > 0,   $sformatf("bottom lines found: %0d", n_bottom));
    check(n_frame > 0 && n_rx > 0, $sformatf("Ethernet frames sent %0d, decoded %0d", n_frame, n_rx));
    check(n_payload_ok > 0, $sformatf("payloads checked: %0d", n_payload_ok));
    check(n_reconf > 0,   "reconfiguration");
    check(n_drop > 0,     $sformatf("payloads dropped while the link stalled: %0d", n_drop));
    $display("mechanisms: noise=%0d upper=%0d bottom=%0d eth_frames=%0d payloads_ok=%0d drops=%0d reconf=%0d",
             n_noise, n_upper, n_bottom, n_frame, n_payload_ok, n_drop, n_reconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd5_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
