// Testbench for ccd_capture: two frames of W x H pixels with line and
// frame blanking are driven with FVAL/LVAL; every valid output pixel must
// carry the sample and the coordinates of the pixel driven two clocks
// earlier, every frame must produce exactly W*H pixels and frame_cnt must
// count frame starts.
module tb_ccd_capture;
  import tm_pkg::*;
  localparam int W = 10, H = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [CW-1:0] cam_d = '0;
  logic cam_fval = 0, cam_lval = 0;
  raw_pix_t pix;
  logic [31:0] frame_cnt;
  int npix;

  ccd_capture #(.RAW_W(W), .RAW_H(H)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [CW-1:0] val(int f, int x, int y);
    return CW'(f * 1000 + y * 37 + x * 5 + 1);
  endfunction

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  int cur_f;
  always @(posedge clk) if (rst_n && pix.valid) begin
    npix++;
    check(pix.d == val(cur_f, int'(pix.x), int'(pix.y)),
          $sformatf("pixel (%0d,%0d) data %h", pix.x, pix.y, pix.d));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int f = 1; f <= 2; f++) begin
      cur_f = f; npix = 0;
      cam_fval <= 1;
      repeat (4) @(posedge clk);
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          cam_lval <= 1; cam_d <= val(f, x, y);
          @(posedge clk);
        end
        cam_lval <= 0;
        repeat (5) @(posedge clk);
      end
      cam_fval <= 0;
      repeat (10) @(posedge clk);
      check(npix == W * H, $sformatf("frame %0d pixel count %0d", f, npix));
      check(frame_cnt == 32'(f), $sformatf("frame_cnt %0d", frame_cnt));
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
