// Testbench for detect: a 64x48 scene with a grey background, a yellow
// plate (columns 20..43, rows 10..21) whose middle rows are cut by dark
// "characters", and a small yellow blob (noise). Frame 1 must find the
// plate at exactly that rectangle, reject the blob, and raise the upper /
// bottom line events; frame 2 is then drawn with that rectangle: every
// output pixel is compared with the expected class (white yellow pixels
// inside, black characters, red 2-pixel ring, black elsewhere), 5 clocks
// after its input. A frame without a plate must clear found.
module tb_detect;
  import tm_pkg::*;
  localparam int W = 64, H = 48, TH = 8, GAP = 4;
  localparam int PL = 20, PR = 43, PT = 10, PB = 21;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  rgb_pix_t   in;
  cls_pix_t   out;
  plate_box_t plate;
  logic ev_noise, ev_upper, ev_bottom;
  int n_noise, n_upper, n_bottom, cycle, nout;
  int in_cycle [$];
  bit with_plate, expect_box;

  detect #(.IMG_W(W), .IMG_H(H), .RUN_THRESH(TH), .MAX_GAP(GAP)) dut (.*);
  always #5 clk = ~clk;

  function automatic bit is_yellow(int x, int y);
    if (!with_plate) return 0;
    if (x >= 2 && x <= 5 && y >= 3 && y <= 4) return 1;                 // noise blob
    if (x < PL || x > PR || y < PT || y > PB) return 0;
    if (y >= 14 && y <= 16 && ((x - PL) % 5 == 3)) return 0;            // characters
    return 1;
  endfunction

  function automatic pix_cls_e exp_cls(int x, int y);
    if (!expect_box) return CLS_BLACK;
    if (x >= PL && x <= PR && y >= PT && y <= PB) return is_yellow(x, y) ? CLS_WHITE : CLS_BLACK;
    if (x >= PL - 2 && x <= PR + 2 && y >= PT - 2 && y <= PB + 2) return CLS_RED;
    return CLS_BLACK;
  endfunction

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      n_noise += int'(ev_noise); n_upper += int'(ev_upper); n_bottom += int'(ev_bottom);
      if (out.valid) begin
        int c0;
        c0 = in_cycle.pop_front();
        check(cycle - c0 == 5, $sformatf("latency %0d", cycle - c0));
        check(out.cls == exp_cls(int'(out.x), int'(out.y)),
              $sformatf("class at (%0d,%0d): %s", out.x, out.y, out.cls.name()));
        nout++;
      end
      if (in.valid) in_cycle.push_back(cycle);
    end
  end

  task automatic send_frame();
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        in.valid <= 1; in.x <= XW'(x); in.y <= XW'(y);
        if (is_yellow(x, y)) begin in.r <= 12'hF00; in.g <= 12'hD00; in.b <= 12'h100; end
        else if (x >= PL && x <= PR && y >= PT && y <= PB && with_plate)
                             begin in.r <= 12'h080; in.g <= 12'h080; in.b <= 12'h080; end
        else                 begin in.r <= 12'h500; in.g <= 12'h480; in.b <= 12'h400; end
        @(posedge clk);
      end
      in.valid <= 0;
      repeat (2) @(posedge clk);
    end
    repeat (8) @(posedge clk);
  endtask

  initial begin
    in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    with_plate = 1; expect_box = 0;
    send_frame();
    check(plate.found && plate.left == PL && plate.right == PR && plate.top == PT && plate.bottom == PB,
          $sformatf("box found=%0d l=%0d r=%0d t=%0d b=%0d", plate.found, plate.left, plate.right, plate.top, plate.bottom));
    check(n_noise >= 2, $sformatf("noise runs rejected: %0d", n_noise));
    check(n_upper == 1, $sformatf("upper lines: %0d", n_upper));
    check(n_bottom == PB - PT - 3, $sformatf("bottom-line updates: %0d", n_bottom));
    expect_box = 1;
    send_frame();
    with_plate = 0;
    send_frame();                 // still drawn with the frame-2 box
    check(!plate.found, "no plate -> found cleared");
    expect_box = 0;
    send_frame();
    check(nout == 4 * W * H, $sformatf("outputs %0d", nout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
