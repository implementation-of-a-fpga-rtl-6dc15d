// Reset synchroniser: asynchronous assertion, release after two rising
// edges of clk. Used by reset_ctrl once per clock domain.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic meta;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      meta  <= 1'b0;
      rst_n <= 1'b0;
    end else begin
      meta  <= 1'b1;
      rst_n <= meta;
    end
  end
endmodule
