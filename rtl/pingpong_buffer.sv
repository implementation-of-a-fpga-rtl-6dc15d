// Ping-pong pair of packet queues between the video and Ethernet clocks.
//
// Two dual-clock FIFOs, each exactly one UDP payload (PAYLOAD bytes) deep,
// take turns: while the writer fills one, the packet generator empties the
// other. The writer starts a payload only if the queue it is about to fill
// has been drained (as seen from the write side); otherwise it discards
// that whole payload's worth of bytes, counts a drop, and tries the same
// queue again with the next payload, so payloads stay whole and in order.
// While filling, the writer adds the bytes up as 16-bit big-endian words
// in ones-complement arithmetic; the sum of a full queue is stored next to
// it, so the UDP checksum can be sent ahead of the data. The reader sees
// ready when its current queue holds a whole payload and reads exactly
// PAYLOAD bytes before it turns to the other queue. The stored sum is not
// changed while the reader can use it: the writer only refills a queue
// (and its sum) after the reader has emptied it.
//
// Interface: write side in wclk (wr_en/wr_data, one byte per clock at
// most); read side in rclk: ready, data_sum (valid while ready), rd_en,
// rd_data one clock after rd_en. ev_drop pulses (write clock) for each
// dropped payload.
//
// Two queues used alternately for writing and reading follow the paper;
// the drop policy and the checksum accumulation are this design's.
module pingpong_buffer
  import tm_pkg::*;
#(
  parameter int PAYLOAD = PAYLOAD_DEF,
  localparam int AW     = $clog2(PAYLOAD)
) (
  input  logic        wclk,
  input  logic        wrst_n,
  input  logic        wr_en,
  input  logic [7:0]  wr_data,
  output logic        ev_drop,
  input  logic        rclk,
  input  logic        rrst_n,
  output logic        ready,
  output logic [15:0] data_sum,
  input  logic        rd_en,
  output logic [7:0]  rd_data
);
  logic [1:0]       q_wr_en, q_rd_en, q_wr_empty, q_wr_full, q_rd_empty;
  logic [1:0][7:0]  q_rd_data;
  logic [1:0][AW:0] q_rd_count;
  logic [15:0]      sum_q [2];

  for (genvar i = 0; i < 2; i++) begin : g_q
    async_fifo #(.WIDTH(8), .DEPTH(PAYLOAD)) u_fifo (
      .wclk(wclk), .wrst_n(wrst_n), .wr_en(q_wr_en[i]), .wr_data(wr_data),
      .wr_full(q_wr_full[i]), .wr_empty(q_wr_empty[i]),
      .rclk(rclk), .rrst_n(rrst_n), .rd_en(q_rd_en[i]), .rd_data(q_rd_data[i]),
      .rd_empty(q_rd_empty[i]), .rd_count(q_rd_count[i])
    );
  end

  // ------------------------------------------------------------ write side
  logic          wsel, dropping;
  logic [AW-1:0] wcnt;
  logic [15:0]   acc;
  logic [7:0]    hi_byte;
  logic          go;
  logic [15:0]   acc_next;

  always_comb begin
    go       = wr_en && ((wcnt == '0) ? q_wr_empty[wsel] : !dropping);
    q_wr_en  = '0;
    q_wr_en[wsel] = go;
    acc_next = wcnt[0] ? oc_add(acc, {hi_byte, wr_data}) : acc;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wsel <= 1'b0; dropping <= 1'b0; wcnt <= '0; acc <= '0; hi_byte <= '0;
      ev_drop <= 1'b0;
      sum_q[0] <= '0; sum_q[1] <= '0;
    end else begin
      ev_drop <= 1'b0;
      if (wr_en) begin
        if (wcnt == '0) begin
          dropping <= !q_wr_empty[wsel];
          ev_drop  <= !q_wr_empty[wsel];
        end
        if (!wcnt[0]) hi_byte <= wr_data;
        acc  <= acc_next;
        wcnt <= wcnt + 1'b1;                   // PAYLOAD is a power of two
        if (wcnt == AW'(PAYLOAD - 1)) begin
          acc <= '0;
          if (!dropping) begin
            sum_q[wsel] <= acc_next;
            wsel        <= !wsel;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- read side
  logic          rsel, rsel_q;
  logic [AW-1:0] rcnt;

  assign ready    = (q_rd_count[rsel] == (AW+1)'(PAYLOAD));
  assign data_sum = sum_q[rsel];
  assign rd_data  = q_rd_data[rsel_q];

  always_comb begin
    q_rd_en       = '0;
    q_rd_en[rsel] = rd_en;
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rsel <= 1'b0; rsel_q <= 1'b0; rcnt <= '0;
    end else if (rd_en) begin
      rsel_q <= rsel;
      rcnt   <= rcnt + 1'b1;
      if (rcnt == AW'(PAYLOAD - 1)) rsel <= !rsel;
    end
  end

  // the queue being filled never runs full: a payload fits exactly
  a_no_full: assert property (@(posedge wclk) disable iff (!wrst_n) go |-> !q_wr_full[wsel]);
  a_read_ok: assert property (@(posedge rclk) disable iff (!rrst_n) rd_en |-> !q_rd_empty[rsel]);

endmodule
