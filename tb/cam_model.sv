// Behavioural model of the camera sensor for the system testbenches.
//
// Streams frames of RAW_W x RAW_H Bayer samples (R at even row / even
// column, B at odd / odd, G elsewhere) with FVAL/LVAL strobes, HBLANK idle
// clocks after each row and VBLANK idle clocks between frames. The scene
// is defined at half resolution: a dark background, a yellow plate in
// columns PL..PR and rows PT..PB of the half-resolution image whose rows
// CT..CB carry dark character strokes every 4th column, and a small yellow
// blob at columns 1..3 of rows 2..3 that is too short to be a plate line.
// Both greens of a 2x2 block are equal, so demosaicing returns the scene.
module cam_model #(
  parameter int RAW_W  = 64,
  parameter int RAW_H  = 48,
  parameter int HBLANK = 8,
  parameter int VBLANK = 40,
  parameter int PL = 8, PR = 23, PT = 8, PB = 15, CT = 11, CB = 12
) (
  input  logic        clk,
  input  logic        run,
  output logic [11:0] d,
  output logic        fval,
  output logic        lval,
  output int          frames_started
);
  typedef enum int {BG, YELLOW, INK} kind_e;

  function automatic kind_e kind(int ix, int iy);
    if (ix >= 1 && ix <= 3 && iy >= 2 && iy <= 3) return YELLOW;
    if (ix < PL || ix > PR || iy < PT || iy > PB) return BG;
    if (iy >= CT && iy <= CB && ((ix - PL) % 4 == 2)) return INK;
    return YELLOW;
  endfunction

  function automatic logic [11:0] sample(int x, int y);
    logic [11:0] r, g, b;
    unique case (kind(x / 2, y / 2))
      YELLOW:  begin r = 12'hF00; g = 12'hD00; b = 12'h100; end
      INK:     begin r = 12'h080; g = 12'h080; b = 12'h080; end
      default: begin r = 12'h500; g = 12'h480; b = 12'h400; end
    endcase
    if (y % 2 == 0) return (x % 2 == 0) ? r : g;
    return (x % 2 == 0) ? g : b;
  endfunction

  initial begin
    d = '0; fval = 0; lval = 0; frames_started = 0;
    forever begin
      @(posedge clk);
      if (run) begin
        fval <= 1;
        frames_started++;
        repeat (4) @(posedge clk);
        for (int y = 0; y < RAW_H; y++) begin
          for (int x = 0; x < RAW_W; x++) begin
            lval <= 1; d <= sample(x, y);
            @(posedge clk);
          end
          lval <= 0;
          repeat (HBLANK) @(posedge clk);
        end
        fval <= 0;
        repeat (VBLANK) @(posedge clk);
      end
    end
  end
endmodule
