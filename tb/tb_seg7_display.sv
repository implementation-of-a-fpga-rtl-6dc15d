// Testbench for seg7_display: every hex digit value on every position is
// compared with the segment patterns of a 7-segment hex font.
module tb_seg7_display;
  int checks = 0, failures = 0;
  logic [31:0]     value;
  logic [7:0][6:0] hex;
  // segments gfedcba, active low, for 0..F
  logic [6:0] font [16] = '{7'h40, 7'h79, 7'h24, 7'h30, 7'h19, 7'h12, 7'h02, 7'h78,
                            7'h00, 7'h10, 7'h08, 7'h03, 7'h46, 7'h21, 7'h06, 7'h0E};

  seg7_display #(.DIGITS(8)) dut (.value(value), .hex(hex));

  initial begin
    for (int n = 0; n < 40; n++) begin
      value = (n < 16) ? {8{n[3:0]}} : $urandom;
      #1;
      for (int d = 0; d < 8; d++) begin
        checks++;
        if (hex[d] !== font[value[4*d +: 4]]) begin
          failures++;
          $display("digit %0d of %h: got %b", d, value, hex[d]);
        end
      end
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
