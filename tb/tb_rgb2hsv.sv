// Testbench for rgb2hsv: fixed colours with known hue (red 0, yellow 60,
// green 120, cyan 180, blue 240, magenta 300, grey) and random colours
// checked against a reference computed in real arithmetic and truncated;
// the result must appear exactly 3 clocks after the input.
module tb_rgb2hsv;
  localparam int CW = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [CW-1:0] r, g, b, v;
  logic [8:0] h;
  logic [7:0] s;
  typedef struct { int h; int s; int v; } hsv_t;
  hsv_t expq [$];
  int vq [$];

  rgb2hsv #(.CW(CW)) dut (.*);
  always #5 clk = ~clk;

  function automatic hsv_t ref_hsv(int rr, int gg, int bb);
    hsv_t o;
    int mx, mn, dl;
    real hh;
    mx = rr > gg ? rr : gg; mx = mx > bb ? mx : bb;
    mn = rr < gg ? rr : gg; mn = mn < bb ? mn : bb;
    dl = mx - mn;
    o.v = mx;
    o.s = (mx == 0) ? 0 : (255 * dl) / mx;
    if (dl == 0) o.h = 0;
    else begin
      int frac;
      if (mx == rr)      begin frac = (60 * (gg > bb ? gg - bb : bb - gg)) / dl; o.h = (gg >= bb) ? frac : (frac == 0 ? 0 : 360 - frac); end
      else if (mx == gg) begin frac = (60 * (bb > rr ? bb - rr : rr - bb)) / dl; o.h = (bb >= rr) ? 120 + frac : 120 - frac; end
      else               begin frac = (60 * (rr > gg ? rr - gg : gg - rr)) / dl; o.h = (rr >= gg) ? 240 + frac : 240 - frac; end
    end
    return o;
  endfunction

  int fixed_rgb [8][3] = '{'{4095,0,0}, '{4095,4095,0}, '{0,4095,0}, '{0,4095,4095},
                          '{0,0,4095}, '{4095,0,4095}, '{2000,2000,2000}, '{3840,3328,256}};
  int fixed_h [8] = '{0, 60, 120, 180, 240, 300, 0, 51};

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 408; n++) begin
      int rr, gg, bb;
      if (n < 8) begin rr = fixed_rgb[n][0]; gg = fixed_rgb[n][1]; bb = fixed_rgb[n][2]; end
      else begin rr = $urandom % 4096; gg = $urandom % 4096; bb = $urandom % 4096; end
      in_valid <= 1; r <= CW'(rr); g <= CW'(gg); b <= CW'(bb);
      expq.push_back(ref_hsv(rr, gg, bb));
      if (n < 8) begin
        checks++;
        if (ref_hsv(rr, gg, bb).h != fixed_h[n]) begin failures++; $display("reference hue wrong for %0d", n); end
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: out_valid must follow in_valid by exactly 3 clocks
  logic [2:0] vpipe;
  always @(posedge clk) begin
    vpipe <= {vpipe[1:0], in_valid && rst_n};
    if (rst_n) begin
      checks++;
      if (out_valid !== vpipe[2]) begin failures++; $display("latency mismatch at %0t", $time); end
    end
    if (rst_n && out_valid && expq.size() > 0) begin
      hsv_t e;
      e = expq.pop_front();
      checks++;
      if (int'(h) != e.h || int'(s) != e.s || int'(v) != e.v) begin
        failures++;
        $display("got h=%0d s=%0d v=%0d expected %0d %0d %0d", h, s, v, e.h, e.s, e.v);
      end
    end
  end
  initial vpipe = '0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
