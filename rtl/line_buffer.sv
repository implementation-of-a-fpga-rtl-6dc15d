// Multi-tap line buffer (the role of the vendor shift-register-with-taps
// macro the paper uses).
//
// A pixel shifted in appears on taps[0] after TAP_DIST further shifts and
// on taps[1] after 2*TAP_DIST, so with TAP_DIST equal to the row length the
// taps hold the same column of the previous two rows. Each stage is one
// circular RAM of TAP_DIST words addressed by a shared pointer: on a shift
// the word at the pointer is read into that stage's tap register and
// replaced by the stage's input (din for stage 0, the old word of the stage
// before for the others).
//
// Interface: shift_en advances the buffer by one pixel; taps change on the
// clock edge of a shift and hold otherwise. The RAM content is not reset,
// matching the vendor macro; the first 2*TAP_DIST outputs are stale.
// Two taps of 1280 12-bit pixels follow the paper.
module line_buffer #(
  parameter int WIDTH    = 12,
  parameter int TAP_DIST = 1280,
  parameter int TAPS     = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        shift_en,
  input  logic [WIDTH-1:0]            din,
  output logic [TAPS-1:0][WIDTH-1:0]  taps
);
  localparam int AW = $clog2(TAP_DIST);

  logic [WIDTH-1:0] mem [TAPS][TAP_DIST];
  logic [AW-1:0]    ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (shift_en) begin
      ptr <= (ptr == AW'(TAP_DIST - 1)) ? '0 : ptr + 1'b1;
    end
  end

  for (genvar t = 0; t < TAPS; t++) begin : g_stage
    logic [WIDTH-1:0] stage_in;
    if (t == 0) begin : g_first
      assign stage_in = din;
    end else begin : g_next
      assign stage_in = mem[t-1][ptr];
    end

    always_ff @(posedge clk) begin
      if (shift_en) begin
        taps[t]       <= mem[t][ptr];
        mem[t][ptr]   <= stage_in;
      end
    end
  end

endmodule
