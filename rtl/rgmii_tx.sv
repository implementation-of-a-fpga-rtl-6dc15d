// RGMII transmitter to the Ethernet PHY (1000BASE-T).
//
// Three parts, as in the reference flow:
//   sending signal control  the transmit clock gtx_clk, forwarded through a
//                           DDR cell fed with constant 1/0, so it is
//                           aligned with the data cells;
//   data sending            the byte and its enable are registered;
//   double-speed sending    a 4-bit DDR cell sends the byte's high nibble
//                           (bits 7:4) while the clock is high and its low
//                           nibble (bits 3:0) while it is low, so a byte
//                           leaves in one 125 MHz cycle.
// tx_ctl carries TX_EN in both halves (TX_ER is never raised).
//
// Interface: tx_en/tx_data from the packet generator in clk (125 MHz).
// A byte presented before rising edge k is on txd during the cycle after
// edge k+1 (one register stage, then the DDR cell).
//
// High nibble on the rising edge follows the paper's description; note
// that the RGMII specification puts bits 3:0 on the rising edge, so a
// standard PHY would see the nibbles of each byte swapped.
module rgmii_tx (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_en,
  input  logic [7:0] tx_data,
  output logic       gtx_clk,
  output logic [3:0] txd,
  output logic       tx_ctl
);
  logic [7:0] data_r;
  logic       en_r;

  // data sending: register the byte stream
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_r <= '0;
      en_r   <= 1'b0;
    end else begin
      data_r <= tx_data;
      en_r   <= tx_en;
    end
  end

  // double-speed sending
  ddr_out #(.WIDTH(4)) u_ddr_d   (.clk(clk), .rst_n(rst_n), .d_hi(data_r[7:4]), .d_lo(data_r[3:0]), .q(txd));
  ddr_out #(.WIDTH(1)) u_ddr_ctl (.clk(clk), .rst_n(rst_n), .d_hi(en_r),        .d_lo(en_r),        .q(tx_ctl));
  // sending signal control: forwarded transmit clock
  ddr_out #(.WIDTH(1)) u_ddr_clk (.clk(clk), .rst_n(rst_n), .d_hi(1'b1),        .d_lo(1'b0),        .q(gtx_clk));

endmodule
