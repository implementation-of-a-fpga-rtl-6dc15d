// Testbench for reset_ctrl: with DELAY = 40 the board-clock reset must
// release 21 cycles after the key and the domain resets after the counter
// reaches DELAY plus their two synchroniser edges; pressing the key again
// must reassert all of them at once.
module tb_reset_ctrl;
  int checks = 0, failures = 0;
  logic clk_ref = 0, clk_pix = 0, clk_vga = 0, clk_eth = 0, key_rst_n = 0;
  logic rst_n_ref, rst_n_pix, rst_n_vga, rst_n_eth;
  int ref_cyc, ref_rel, pix_rel;

  reset_ctrl #(.DELAY(40)) dut (.*);
  always #10 clk_ref = ~clk_ref;
  always #7  clk_pix = ~clk_pix;
  always #20 clk_vga = ~clk_vga;
  always #4  clk_eth = ~clk_eth;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #55;
    check(!rst_n_ref && !rst_n_pix && !rst_n_vga && !rst_n_eth, "all in reset");
    @(negedge clk_ref); key_rst_n = 1;
    ref_cyc = 0; ref_rel = -1;
    while (!rst_n_eth || !rst_n_pix || !rst_n_vga) begin
      @(posedge clk_ref); ref_cyc++;
      #1;
      if (rst_n_ref && ref_rel < 0) ref_rel = ref_cyc;
      if (ref_cyc < 40) check(!rst_n_pix && !rst_n_vga && !rst_n_eth, "domain held before DELAY");
      if (ref_cyc > 60) break;
    end
    check(ref_rel == 21, $sformatf("ref release at %0d", ref_rel));
    check(ref_cyc >= 41 && ref_cyc <= 48, $sformatf("domain release at %0d", ref_cyc));
    repeat (4) @(posedge clk_vga);
    check(rst_n_ref && rst_n_pix && rst_n_vga && rst_n_eth, "all released");
    #3 key_rst_n = 0;
    #1;
    check(!rst_n_ref && !rst_n_pix && !rst_n_vga && !rst_n_eth, "key reasserts");
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
