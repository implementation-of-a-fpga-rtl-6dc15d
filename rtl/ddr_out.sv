// Double-data-rate output cell.
//
// d_hi is registered on the rising edge and driven while clk is high;
// d_lo is registered on the rising edge, moved to a falling-edge register
// and driven while clk is low. So the pair presented before rising edge k
// leaves the pin as d_hi in the high half and d_lo in the low half of the
// cycle after edge k. With d_hi = 1 and d_lo = 0 the cell forwards the
// clock itself, aligned with the data it sends.
module ddr_out #(
  parameter int WIDTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d_hi,
  input  logic [WIDTH-1:0] d_lo,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] hi_r, lo_r, lo_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_r <= '0;
      lo_r <= '0;
    end else begin
      hi_r <= d_hi;
      lo_r <= d_lo;
    end
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) lo_n <= '0;
    else        lo_n <= lo_r;
  end

  assign q = clk ? hi_r : lo_n;
endmodule
