// Testbench for i2c_ccd_config (CLK_DIV = 4) with an I2C slave model on
// the open-drain lines. The slave decodes start, data bits on SCL rising
// edges, acknowledges each byte and records each write at the stop
// condition. After reset the five table writes must arrive with the
// sensor address 0xBA, the register numbers and the values for the
// current exposure and zoom; a new exposure and then a zoom change must
// each send the table again with the new values; a slave that does not
// acknowledge must set ack_err.
module tb_i2c_ccd_config;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, zoom = 0, scl_oe, sda_oe, sda_in, done, ack_err;
  logic [15:0] exposure = 16'h0400;
  logic scl, sda, scl_p = 1, sda_p = 1, slave_drive = 0, nack = 0;
  int bitcnt;
  logic [7:0] sh;
  logic [7:0] cur [$];
  logic [31:0] writes [$];

  i2c_ccd_config #(.CLK_DIV(4)) dut (.*);
  always #10 clk = ~clk;

  assign scl    = !scl_oe;
  assign sda    = !(sda_oe || slave_drive);
  assign sda_in = sda;

  always @(posedge clk) begin
    if (scl && scl_p && sda_p && !sda) begin bitcnt = 0; cur = {}; end                    // start
    else if (scl && scl_p && !sda_p && sda) begin                                         // stop
      if (cur.size() == 4) writes.push_back({cur[0], cur[1], cur[2], cur[3]});
      else begin checks++; failures++; $display("write of %0d bytes", cur.size()); end
    end
    if (scl && !scl_p) begin
      if (bitcnt < 8) begin sh = {sh[6:0], sda}; bitcnt++; end
      else begin cur.push_back(sh); bitcnt = 0; end
    end
    if (!scl && scl_p) slave_drive = (bitcnt == 8) && !nack;
    scl_p = scl; sda_p = sda;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic expect_table(input logic [15:0] e, input logic z);
    logic [31:0] exp_w [5];
    exp_w[0] = {8'hBA, 8'h09, e};
    exp_w[1] = {8'hBA, 8'h22, z ? 16'h0000 : 16'h0011};
    exp_w[2] = {8'hBA, 8'h23, z ? 16'h0000 : 16'h0011};
    exp_w[3] = {8'hBA, 8'h03, z ? 16'd959 : 16'd1919};
    exp_w[4] = {8'hBA, 8'h04, z ? 16'd1279 : 16'd2559};
    check(writes.size() == 5, $sformatf("%0d writes", writes.size()));
    for (int i = 0; i < 5 && i < writes.size(); i++)
      check(writes[i] == exp_w[i], $sformatf("write %0d = %h expected %h", i, writes[i], exp_w[i]));
    writes = {};
  endtask

  task automatic wait_done();
    int n;
    n = 0;
    @(posedge clk); @(posedge clk);
    while (!done && n < 20000) begin @(posedge clk); n++; end
    repeat (4) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait_done();
    check(done && !ack_err, "first table acknowledged");
    expect_table(16'h0400, 0);
    exposure <= 16'h0123;
    wait_done();
    expect_table(16'h0123, 0);
    zoom <= 1;
    wait_done();
    expect_table(16'h0123, 1);
    nack = 1;
    exposure <= 16'h0777;
    wait_done();
    check(ack_err, "missing acknowledge flagged");
    writes = {};
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
