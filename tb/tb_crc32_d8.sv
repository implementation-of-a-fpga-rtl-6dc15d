// Testbench for crc32_d8: known CRC-32 check values ("123456789" gives
// 0xCBF43926, the pangram gives 0x414FA339), and a random message whose
// register after appending its own FCS must equal the fixed residue
// 0xDEBB20E3.
module tb_crc32_d8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [7:0]  d;
  logic [31:0] crc;

  crc32_d8 dut (.*);
  always #5 clk = ~clk;

  task automatic feed(input string s);
    init <= 1; @(posedge clk); init <= 0;
    for (int i = 0; i < s.len(); i++) begin en <= 1; d <= s[i]; @(posedge clk); end
    en <= 0; @(posedge clk);
  endtask

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    feed("123456789");
    check(~crc, 32'hCBF43926, "check string");
    feed("The quick brown fox jumps over the lazy dog");
    check(~crc, 32'h414FA339, "pangram");
    for (int t = 0; t < 5; t++) begin
      logic [31:0] fcs;
      init <= 1; @(posedge clk); init <= 0;
      for (int i = 0; i < 20 + t * 7; i++) begin en <= 1; d <= 8'($urandom); @(posedge clk); end
      en <= 0; @(posedge clk);
      fcs = ~crc;
      for (int k = 0; k < 4; k++) begin en <= 1; d <= fcs[8*k +: 8]; @(posedge clk); end
      en <= 0; @(posedge clk);
      check(crc, 32'hDEBB20E3, "residue");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
