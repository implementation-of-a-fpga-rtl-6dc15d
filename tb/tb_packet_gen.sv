// Testbench for packet_gen at its default sizes (1024-byte payload). A
// buffer model offers random payloads with their word sums; the byte
// stream of three frames is captured and checked: length 1078 with a gap
// of at least 12 idle clocks, every fixed byte of the frame table, the
// addresses, the IP identification counting up, the IP header checksum
// (header words must sum to 0xFFFF), the UDP checksum (pseudo-header,
// header and data must sum to 0xFFFF), the payload itself, and the FCS
// computed here bit by bit over bytes 8 to 1073.
module tb_packet_gen;
  localparam int P = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ready = 0, rd_en, tx_en, ev_frame;
  logic [15:0] data_sum;
  logic [7:0]  rd_data, tx_data;
  logic [7:0]  payload [P];
  logic [7:0]  frame [$];
  int rd_i, nframes, idle, last_len;

  packet_gen dut (.*);
  always #4 clk = ~clk;

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] oc(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] t;
    t = {1'b0, a} + {1'b0, b};
    return t[15:0] + 16'(t[16]);
  endfunction

  function automatic logic [31:0] crc_bits(input logic [7:0] q [$], int from, int to);
    logic [31:0] c;
    c = '1;
    for (int i = from; i <= to; i++)
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ q[i][k];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    return ~c;
  endfunction

  task automatic new_payload();
    logic [15:0] s;
    s = 0;
    foreach (payload[i]) payload[i] = 8'($urandom);
    for (int i = 0; i < P; i += 2) s = oc(s, {payload[i], payload[i+1]});
    data_sum = s;
    rd_i = 0;
  endtask

  // buffer model: data one clock after rd_en
  always @(posedge clk) if (rd_en) begin rd_data <= payload[rd_i]; rd_i++; end

  task automatic check_frame(int n);
    logic [7:0] f [$];
    logic [15:0] s;
    logic [31:0] fcs;
    byte unsigned fixed [int];
    f = frame;
    check(f.size() == 1078, $sformatf("frame %0d length %0d", n, f.size()));
    if (f.size() != 1078) return;
    for (int i = 0; i < 7; i++) fixed[i] = 8'h55;
    fixed[7] = 8'hD5; fixed[20] = 8'h08; fixed[21] = 8'h88; fixed[22] = 8'h45; fixed[23] = 8'h00;
    fixed[24] = 8'h04; fixed[25] = 8'h1C; fixed[28] = 0; fixed[29] = 0; fixed[30] = 8'h80; fixed[31] = 8'h11;
    fixed[46] = 8'h04; fixed[47] = 8'h08;
    for (int i = 8; i < 14; i++) fixed[i] = 8'hFF;                         // destination MAC
    fixed[14] = 8'h00; fixed[15] = 8'h0A; fixed[16] = 8'h35; fixed[17] = 8'h01; fixed[18] = 8'h02; fixed[19] = 8'h03;
    fixed[34] = 192; fixed[35] = 168; fixed[36] = 1; fixed[37] = 2;
    fixed[38] = 192; fixed[39] = 168; fixed[40] = 1; fixed[41] = 10;
    fixed[42] = 8'h04; fixed[43] = 8'hD2; fixed[44] = 8'h04; fixed[45] = 8'hD2;  // port 1234
    foreach (fixed[i]) check(f[i] == fixed[i], $sformatf("frame %0d byte %0d = %h, expected %h", n, i, f[i], fixed[i]));
    check({f[26], f[27]} == 16'(n), $sformatf("IP identification %0d", {f[26], f[27]}));
    s = 0;
    for (int i = 22; i < 42; i += 2) s = oc(s, {f[i], f[i+1]});
    check(s == 16'hFFFF, $sformatf("IP header checksum (sum %h)", s));
    s = oc(oc(oc({f[34], f[35]}, {f[36], f[37]}), oc({f[38], f[39]}, {f[40], f[41]})), oc(16'h0011, {f[46], f[47]}));
    for (int i = 42; i < 1074; i += 2) s = oc(s, {f[i], f[i+1]});
    check(s == 16'hFFFF, $sformatf("UDP checksum (sum %h)", s));
    for (int i = 0; i < P; i++) if (f[50 + i] != payload[i]) begin check(0, $sformatf("payload byte %0d", i)); break; end
    checks++;
    fcs = crc_bits(f, 8, 1073);
    if ({f[1077], f[1076], f[1075], f[1074]} != fcs) begin failures++; $display("FCS %h%h%h%h expected %h", f[1077], f[1076], f[1075], f[1074], fcs); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3; n++) begin
      new_payload();
      frame = {};
      ready <= 1;
      @(posedge clk);
      ready <= 0;      // the buffer drops ready once reading starts
      while (!tx_en) @(posedge clk);
      while (tx_en) begin frame.push_back(tx_data); @(posedge clk); end
      idle = 0;
      while (idle < 11) begin @(posedge clk); idle++; check(!tx_en, "gap"); end
      check_frame(n);
      repeat (3) @(posedge clk);
    end
    // back-to-back frames: a ready buffer waiting must still leave >= 12 idle clocks
    new_payload();
    ready <= 1;
    while (!tx_en) @(posedge clk);
    while (tx_en) @(posedge clk);
    new_payload();
    idle = 0;
    while (!tx_en) begin @(posedge clk); idle++; end
    ready <= 0;
    check(idle >= 12, $sformatf("inter-frame gap %0d", idle));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
