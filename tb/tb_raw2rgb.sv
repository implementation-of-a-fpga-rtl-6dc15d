// Testbench for raw2rgb: two random Bayer frames of W x H raw pixels (rows
// streamed with gaps between them). Each 2x2 block R,G1/G2,B must give one
// output pixel at (x/2, y/2) with red = R, blue = B, green = (G1+G2)/2,
// in raster order, 2 clocks after the block's bottom-right pixel.
module tb_raw2rgb;
  import tm_pkg::*;
  localparam int W = 12, H = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  raw_pix_t in;
  rgb_pix_t out;
  logic [CW-1:0] img [H][W];
  int nout, last_b_cycle, cycle;

  raw2rgb #(.RAW_W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // one monitor samples both sides at the same edge: the output must be
  // seen on the second edge after the edge that took the B pixel
  always @(posedge clk) begin
    cycle++;
    if (rst_n && out.valid) check_out();
    if (in.valid && in.x[0] && in.y[0]) last_b_cycle = cycle;
  end
  task automatic check_out();
    int bx, by;
    bx = int'(out.x); by = int'(out.y);
    check(bx == nout % (W/2) && by == nout / (W/2), $sformatf("order: got (%0d,%0d) for #%0d", bx, by, nout));
    check(out.r == img[2*by][2*bx], "red");
    check(out.b == img[2*by+1][2*bx+1], "blue");
    check(out.g == CW'((int'(img[2*by][2*bx+1]) + int'(img[2*by+1][2*bx])) / 2), "green");
    check(cycle - last_b_cycle == 2, $sformatf("latency %0d", cycle - last_b_cycle));
    nout++;
  endtask

  initial begin
    in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++) begin
      nout = 0;
      foreach (img[y, x]) img[y][x] = CW'($urandom);
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          in.valid <= 1; in.x <= XW'(x); in.y <= XW'(y); in.d <= img[y][x];
          @(posedge clk);
        end
        in.valid <= 0;
        repeat (3) @(posedge clk);
      end
      repeat (5) @(posedge clk);
      check(nout == (W/2) * (H/2), $sformatf("frame %0d outputs %0d", f, nout));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
