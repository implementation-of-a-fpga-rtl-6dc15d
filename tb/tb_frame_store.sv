// Testbench for frame_store: a whole 16x12 frame of random classes is
// written in the write clock; then every address is read in the read clock
// and must return the class written there one clock later.
module tb_frame_store;
  import tm_pkg::*;
  localparam int W = 16, H = 12, AW = $clog2(W * H);
  int checks = 0, failures = 0;
  logic clk_w = 0, clk_r = 0;
  cls_pix_t wr;
  logic [AW-1:0] rd_addr;
  pix_cls_e rd_data;
  pix_cls_e img [H][W];

  frame_store #(.IMG_W(W), .IMG_H(H)) dut (.*);
  always #5 clk_w = ~clk_w;
  always #7 clk_r = ~clk_r;

  initial begin
    wr = '0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        img[y][x] = pix_cls_e'($urandom % 3);
        wr.valid <= 1; wr.x <= XW'(x); wr.y <= XW'(y); wr.cls <= img[y][x];
        @(posedge clk_w);
      end
    wr.valid <= 0;
    // a write with valid low must not land
    wr.x <= 0; wr.y <= 0; wr.cls <= (img[0][0] == CLS_RED) ? CLS_WHITE : CLS_RED;
    repeat (2) @(posedge clk_w);
    for (int a = 0; a < W * H; a++) begin
      rd_addr <= AW'(a);
      @(posedge clk_r);
      #1;
      checks++;
      if (rd_data != img[a / W][a % W]) begin failures++; $display("addr %0d: %0d", a, rd_data); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
