// Testbench for vga_ctrl with a small raster (8x4 active, short porches)
// and a one-clock-latency memory model whose class depends on the address.
// Over two frames it checks: the frame period, the number of active pixels,
// the hsync pulse width and position, the vsync line count, and that each
// active pixel's x,y and colour match the address that was requested.
module tb_vga_ctrl;
  import tm_pkg::*;
  localparam int HA = 8, HF = 2, HS = 3, HB = 2, VA = 4, VF = 1, VS = 2, VB = 1;
  localparam int HT = HA + HF + HS + HB, VT = VA + VF + VS + VB;
  localparam int AW = $clog2(HA * VA);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [AW-1:0] rd_addr;
  pix_cls_e rd_cls;
  vga_t vga;
  int cyc, nact, hs_len, vs_lines, last_sof, nframes;
  logic hs_prev;

  vga_ctrl #(.H_ACT(HA), .H_FP(HF), .H_SYNC(HS), .H_BP(HB),
             .V_ACT(VA), .V_FP(VF), .V_SYNC(VS), .V_BP(VB)) dut (.*);
  always #5 clk = ~clk;

  function automatic pix_cls_e cls_of(int a);
    return pix_cls_e'(a % 3);
  endfunction
  always @(posedge clk) rd_cls <= cls_of(int'(rd_addr));

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0d", what, cyc); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (vga.blank_n) begin
      pix_cls_e c;
      c = cls_of(int'(vga.y) * HA + int'(vga.x));
      nact++;
      check(vga.x < HA && vga.y < VA, "active coordinates");
      check(vga.r == ((c != CLS_BLACK) ? '1 : '0) && vga.g == ((c == CLS_WHITE) ? '1 : '0)
            && vga.b == vga.g, "colour");
      if (vga.x == 0 && vga.y == 0) begin
        if (nframes > 0) begin
          check(cyc - last_sof == HT * VT, $sformatf("frame period %0d", cyc - last_sof));
          check(nact == HA * VA + 1, $sformatf("active pixels %0d", nact));
        end
        nframes++; last_sof = cyc; nact = 1;
      end
    end
    if (!vga.hs_n) hs_len++;
    if (hs_prev == 0 && vga.hs_n == 1) begin
      check(hs_len == HS, $sformatf("hsync width %0d", hs_len));
      hs_len = 0;
      if (!vga.vs_n) vs_lines++;
    end
    hs_prev = vga.hs_n;
  end

  initial begin
    hs_prev = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3 * HT * VT + 5) @(posedge clk);
    check(nframes == 4, $sformatf("frames %0d", nframes));
    check(vs_lines == 2 * VS || vs_lines == 3 * VS, $sformatf("vsync lines %0d", vs_lines));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
