// Testbench for pingpong_buffer (payload 16 bytes). The writer sends a
// numbered byte stream; a reader takes whole payloads when ready. Each
// payload read must be 16 consecutive stream bytes starting at a payload
// boundary, its data_sum must equal the ones-complement sum of its 16-bit
// big-endian words, and both queues must be used. Then the reader stalls:
// the writer must drop whole payloads (ev_drop) and, once reading resumes,
// the stream must continue with whole payloads from a later boundary.
module tb_pingpong_buffer;
  localparam int P = 16;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, ev_drop, ready, rd_en = 0;
  logic [7:0] wr_data, rd_data;
  logic [15:0] data_sum;
  int wn, npay, ndrop, last_first;
  bit stall;

  pingpong_buffer #(.PAYLOAD(P)) dut (.*);
  always #5 wclk = ~wclk;
  always #4 rclk = ~rclk;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] stream(int n);
    return 8'(n * 7 + (n >> 8));
  endfunction

  // writer: one byte every clock in bursts
  always @(posedge wclk) if (wrst_n) begin
    if (ev_drop) ndrop++;
    if (wr_en) wn++;
    wr_en   <= ($urandom % 4 != 0);
    wr_data <= stream(wn);
  end

  // reader: payload at a time
  initial begin
    logic [7:0] buf_q [P];
    logic [15:0] s, exp_sum;
    repeat (3) @(posedge rclk);
    wrst_n <= 1; rrst_n <= 1;
    last_first = -P;
    forever begin
      @(posedge rclk);
      if (ready && !stall) begin
        exp_sum = data_sum;
        for (int i = 0; i <= P; i++) begin
          rd_en <= (i < P);
          @(posedge rclk);
          if (i > 0) buf_q[i-1] = rd_data;
        end
        rd_en <= 0;
        // locate the payload in the stream: its first byte's number
        begin
          int first;
          bit ok;
          first = -1;
          for (int k = last_first + P; k < last_first + 40 * P; k += P)
            if (stream(k) == buf_q[0] && stream(k + 1) == buf_q[1]) begin first = k; break; end
          ok = (first >= 0);
          for (int i = 0; i < P && ok; i++) ok = (buf_q[i] == stream(first + i));
          check(ok, $sformatf("payload %0d contents (first %0d)", npay, first));
          if (first >= 0) last_first = first;
        end
        s = 0;
        for (int i = 0; i < P; i += 2) begin
          logic [16:0] t;
          t = {1'b0, s} + {1'b0, buf_q[i], buf_q[i+1]};
          s = t[15:0] + 16'(t[16]);
        end
        check(s == exp_sum, $sformatf("payload %0d sum %h expected %h", npay, exp_sum, s));
        npay++;
      end
    end
  end

  initial begin
    wr_data = 0;
    repeat (3000) @(posedge wclk);
    check(npay > 20, $sformatf("payloads %0d", npay));
    check(ndrop == 0, "no drop while reader keeps up");
    stall = 1;
    repeat (400) @(posedge wclk);
    check(ndrop > 0, $sformatf("drops while stalled %0d", ndrop));
    stall = 0;
    begin
      int n0;
      n0 = npay;
      repeat (1000) @(posedge wclk);
      check(npay > n0 + 5, "resumes after stall");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
