// Testbench for data_reconstruct: a VGA-like stream of 6x3 frames with
// blanking, starting in the middle of a frame. No byte may come out before
// the first frame start; after it each active pixel must give exactly one
// byte equal to the top 8 bits of its green channel, one clock later, with
// sof on pixel (0,0).
module tb_data_reconstruct;
  import tm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  vga_t vga;
  logic wr_en, sof;
  logic [7:0] wr_data;
  logic [7:0] expq [$];
  int nbytes, nsof;
  bit started;

  data_reconstruct dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      checks++;
      if (expq.size() == 0 || wr_data != expq.pop_front()) begin failures++; $display("byte %h unexpected", wr_data); end
      nbytes++;
    end
    if (sof) nsof++;
  end

  initial begin
    vga = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 3; f++)
      for (int y = (f == 0 ? 1 : 0); y < 3; y++) begin
        for (int x = 0; x < 6; x++) begin
          logic [9:0] g;
          g = 10'($urandom);
          vga.blank_n <= 1; vga.x <= XW'(x); vga.y <= XW'(y); vga.g <= g; vga.r <= 10'($urandom);
          if (x == 0 && y == 0) started = 1;
          if (started) expq.push_back(g[9:2]);
          @(posedge clk);
        end
        vga.blank_n <= 0; vga.g <= 10'h3FF;
        repeat (3) @(posedge clk);
      end
    repeat (3) @(posedge clk);
    checks++;
    if (nbytes != 2 * 18 || expq.size() != 0) begin failures++; $display("bytes %0d", nbytes); end
    checks++;
    if (nsof != 2) begin failures++; $display("sof %0d", nsof); end
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
