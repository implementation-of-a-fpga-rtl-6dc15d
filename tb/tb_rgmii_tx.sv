// Testbench for rgmii_tx: random bytes with random enables. The pins are
// sampled in the middle of each clock half: the high half must carry bits
// 7:4 and the low half bits 3:0 of the byte taken at the previous rising
// edge, tx_ctl its enable in both halves, and gtx_clk must follow the
// clock (high in the high half, low in the low half).
module tb_rgmii_tx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, tx_en = 0, gtx_clk, tx_ctl;
  logic [7:0] tx_data = 0;
  logic [3:0] txd;
  logic [8:0] sent [$];

  rgmii_tx dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [8:0] e;
      tx_en   <= ($urandom % 4 != 0);
      tx_data <= 8'($urandom);
      @(posedge clk);
      sent.push_back({tx_en, tx_data});
      if (sent.size() > 1) begin
        e = sent[sent.size() - 2];   // taken at the previous edge
        #2;   // middle of the high half
        check(gtx_clk == 1, "gtx_clk high");
        check(txd == e[7:4], $sformatf("high nibble %h expected %h", txd, e[7:4]));
        check(tx_ctl == e[8], "tx_ctl high half");
        #4;   // middle of the low half
        check(gtx_clk == 0, "gtx_clk low");
        check(txd == e[3:0], $sformatf("low nibble %h expected %h", txd, e[3:0]));
        check(tx_ctl == e[8], "tx_ctl low half");
      end
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
