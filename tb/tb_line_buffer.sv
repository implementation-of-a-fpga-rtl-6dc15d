// Testbench for line_buffer: random data shifted with random gaps; after
// each shift tap t must equal the value shifted in (t+1)*TAP_DIST shifts
// earlier, and taps must hold while shift_en is low.
module tb_line_buffer;
  localparam int W = 12, D = 7, T = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, shift_en = 0;
  logic [W-1:0]        din;
  logic [T-1:0][W-1:0] taps;
  logic [W-1:0] hist [$];

  line_buffer #(.WIDTH(W), .TAP_DIST(D), .TAPS(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 300; n++) begin
      logic s;
      s = ($urandom % 3) != 0;
      shift_en <= s;
      din      <= W'($urandom);
      @(posedge clk);
      if (s) hist.push_front(din);
      #1;
      if (hist.size() > T * D) begin
        for (int t = 0; t < T; t++) begin
          checks++;
          if (taps[t] !== hist[(t + 1) * D]) begin
            failures++;
            $display("shift %0d tap %0d: got %h expected %h", hist.size(), t, taps[t], hist[(t+1)*D]);
          end
        end
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
