// Dual-clock FIFO (one of the two packet queues).
//
// Classic gray-code design: each side keeps a binary pointer one bit wider
// than the address, publishes it in gray code, and reads the other side's
// gray pointer through a two-flop synchroniser. Full is judged on the write
// side, empty and the fill level on the read side; each is pessimistic by
// the synchroniser delay, never wrong. The writer also gets its own view of
// "empty", which the ping-pong controller uses to know that the reader has
// drained this queue.
//
// Interface: write side in wclk (wr_en ignored when full), read side in
// rclk. rd_data is registered: it holds the word read by rd_en from the
// next rclk edge on. rd_en when empty is ignored. DEPTH must be a power
// of two. Depth 1024 (one UDP payload) follows the packet layout; the
// dual-clock structure is this design's.
module async_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,
  output logic             wr_empty,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_empty,
  output logic [AW:0]      rd_count
);
  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen by the writer
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen by the reader
  logic [AW:0] rbin_w, wbin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ------------------------------------------------------------ write side
  assign rbin_w   = gray2bin(rgray_w2);
  assign wr_full  = (wbin - rbin_w) == (AW+1)'(DEPTH);
  assign wr_empty = (wbin == rbin_w);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !wr_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end

  // ------------------------------------------------------------- read side
  assign wbin_r   = gray2bin(wgray_r2);
  assign rd_count = wbin_r - rbin;
  assign rd_empty = (rd_count == '0);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  always_ff @(posedge rclk) begin
    if (rd_en && !rd_empty) rd_data <= mem[rbin[AW-1:0]];
  end

  // writes into a full queue and reads from an empty one are dropped by
  // design; the controllers above are expected never to try
  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) !(wr_en && wr_full));

endmodule
