// Ethernet frame check sequence, one byte per clock.
//
// IEEE 802.3 CRC-32 in its bit-reversed form (polynomial 0xEDB88320,
// bits taken least significant first): init loads all ones, each enabled
// clock folds in one byte. The FCS to send is the complement of the
// register, least significant byte first. Interface: crc shows the
// register after the last enabled edge. The polynomial is the Ethernet
// standard's; the paper only says a CRC is appended.
module crc32_d8 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        en,
  input  logic [7:0]  d,
  output logic [31:0] crc
);
  function automatic logic [31:0] crc_byte(input logic [31:0] c, input logic [7:0] b);
    logic [31:0] r;
    r = c ^ {24'd0, b};
    for (int i = 0; i < 8; i++) r = r[0] ? ((r >> 1) ^ 32'hEDB8_8320) : (r >> 1);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     crc <= '1;
    else if (init)  crc <= '1;
    else if (en)    crc <= crc_byte(crc, d);
  end
endmodule
