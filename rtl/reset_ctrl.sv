// System reset generator.
//
// After the reset key is released (or at power-up, when the counter starts
// from zero) a counter in the board-clock domain runs for DELAY cycles.
// The board-clock reset (I2C configuration) is released half way, so the
// camera is set up before pixels are captured; the pixel, VGA and Ethernet
// resets are released at DELAY. Each of those is passed through a two-flop
// synchroniser in its own clock domain: assertion is asynchronous, release
// is synchronous to that clock.
//
// Interface: key_rst_n is the active-low push button; all outputs are
// active-low resets. Timing: rst_n_ref rises DELAY/2+1 cycles of clk_ref
// after key release, the others 2 cycles of their own clock after the
// counter reaches DELAY.
//
// The paper only says a reset module resets the whole system; the delay,
// its length and the staging are this design's choices.
module reset_ctrl #(
  parameter int unsigned DELAY = 1_000_000   // 20 ms at 50 MHz
) (
  input  logic clk_ref,
  input  logic key_rst_n,
  input  logic clk_pix,
  input  logic clk_vga,
  input  logic clk_eth,
  output logic rst_n_ref,
  output logic rst_n_pix,
  output logic rst_n_vga,
  output logic rst_n_eth
);
  localparam int CNT_W = $clog2(DELAY + 1);

  logic [CNT_W-1:0] cnt;
  logic             sys_go;

  always_ff @(posedge clk_ref or negedge key_rst_n) begin
    if (!key_rst_n) begin
      cnt       <= '0;
      rst_n_ref <= 1'b0;
      sys_go    <= 1'b0;
    end else begin
      if (cnt != CNT_W'(DELAY)) cnt <= cnt + 1'b1;
      if (cnt >= CNT_W'(DELAY / 2)) rst_n_ref <= 1'b1;
      if (cnt == CNT_W'(DELAY)) sys_go <= 1'b1;
    end
  end

  reset_sync u_sync_pix (.clk(clk_pix), .arst_n(sys_go), .rst_n(rst_n_pix));
  reset_sync u_sync_vga (.clk(clk_vga), .arst_n(sys_go), .rst_n(rst_n_vga));
  reset_sync u_sync_eth (.clk(clk_eth), .arst_n(sys_go), .rst_n(rst_n_eth));

endmodule
