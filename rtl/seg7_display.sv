// Frame counter display on seven-segment digits.
//
// Shows value in hexadecimal, digit i displaying bits 4i+3..4i. Each digit
// is decoded combinationally to segments {g,f,e,d,c,b,a}, active low, as
// the board's displays are wired. Interface: value in, hex out, no clock.
// Showing the frame count follows the paper; the hex format and the
// number of digits are this design's.
module seg7_display #(
  parameter int DIGITS = 8
) (
  input  logic [4*DIGITS-1:0]       value,
  output logic [DIGITS-1:0][6:0]    hex
);
  function automatic logic [6:0] seg(input logic [3:0] n);
    unique case (n)
      4'h0: return 7'b1000000;
      4'h1: return 7'b1111001;
      4'h2: return 7'b0100100;
      4'h3: return 7'b0110000;
      4'h4: return 7'b0011001;
      4'h5: return 7'b0010010;
      4'h6: return 7'b0000010;
      4'h7: return 7'b1111000;
      4'h8: return 7'b0000000;
      4'h9: return 7'b0010000;
      4'hA: return 7'b0001000;
      4'hB: return 7'b0000011;
      4'hC: return 7'b1000110;
      4'hD: return 7'b0100001;
      4'hE: return 7'b0000110;
      default: return 7'b0001110;
    endcase
  endfunction

  always_comb begin
    for (int i = 0; i < DIGITS; i++) hex[i] = seg(value[4*i +: 4]);
  end
endmodule
