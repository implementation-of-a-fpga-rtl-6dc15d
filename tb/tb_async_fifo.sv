// Testbench for async_fifo (depth 16) with unrelated write and read
// clocks: random writes (never into a full queue) and random reads; every
// word read must be the next word written, the queue must report full
// after 16 unread words, the writer's empty view must return after a
// drain, and the reader's count must reach the depth.
module tb_async_fifo;
  localparam int D = 16;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en = 0, wr_full, wr_empty, rd_empty;
  logic [7:0] wr_data, rd_data;
  logic [4:0] rd_count;
  logic [7:0] model [$];
  int nread, max_count;
  bit rd_pending;

  async_fifo #(.WIDTH(8), .DEPTH(D)) dut (.*);
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // reader: rd_data is valid the clock after an accepted rd_en
  bit rd_phase;   // 0: fill, 1: random
  always @(posedge rclk) if (rrst_n) begin
    if (rd_pending) begin
      check(model.size() > 0 && rd_data == model.pop_front(), $sformatf("read #%0d %h", nread, rd_data));
      nread++;
    end
    if (int'(rd_count) > max_count) max_count = int'(rd_count);
    rd_pending = rd_en && !rd_empty;
    rd_en <= rd_phase && ($urandom % 2 == 0);
  end

  initial begin
    repeat (3) @(posedge wclk);
    wrst_n <= 1; rrst_n <= 1;
    // fill until full
    for (int i = 0; i < D + 4; i++) begin
      @(negedge wclk);
      if (!wr_full) begin wr_en = 1; wr_data = 8'($urandom); end else wr_en = 0;
      @(posedge wclk); #1;
      if (wr_en) model.push_back(wr_data);
      wr_en = 0;
    end
    check(wr_full, "full after depth writes");
    check(model.size() == D, "accepted words");
    repeat (6) @(posedge rclk);
    check(rd_count == 5'(D), $sformatf("reader count %0d", rd_count));
    rd_phase = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge wclk);
      wr_en = !wr_full && ($urandom % 3 != 0); wr_data = 8'($urandom);
      @(posedge wclk); #1;
      if (wr_en) model.push_back(wr_data);
      wr_en = 0;
    end
    repeat (80) @(posedge rclk);
    check(model.size() == 0, $sformatf("left unread %0d", model.size()));
    repeat (4) @(posedge wclk);
    check(wr_empty, "writer sees empty after drain");
    check(max_count == D, "max count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
