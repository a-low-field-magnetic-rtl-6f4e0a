// tb_eth_tx: self-checking test of the Ethernet frame sender.
// FRAME_WORDS is reduced to 16. Frames of 16 (full), 3 (short, padded),
// 11 (exactly the 60-byte minimum) and random lengths are offered with random
// gaps on the input. A monitor captures every GMII frame and checks the
// preamble and start delimiter, MAC addresses, EtherType, the incrementing
// sequence number, the payload words in big-endian order, zero padding,
// total length, the CRC-32 (recomputed here bit by bit) and an inter-frame
// gap of at least 12 idle cycles.
`timescale 1ns/1ps
module tb_eth_tx;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int FW = 16;
  logic in_valid = 0, in_ready, in_last = 0, tx_en;
  logic [31:0] in_data = 0;
  logic [7:0] txd;
  logic [15:0] frames_sent;

  eth_tx #(.FRAME_WORDS(FW)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [31:0] crc_bits(byte unsigned b [$], int from, int to);
    logic [31:0] c = '1;
    for (int k = from; k < to; k++) begin
      c ^= 32'(b[k]);
      for (int j = 0; j < 8; j++) c = c[0] ? (c >> 1) ^ 32'hEDB88320 : c >> 1;
    end
    return ~c;
  endfunction

  int exp_len [$];
  logic [31:0] exp_words [$];
  int frames_seen = 0;
  byte unsigned cur [$];
  int idle = 100;
  always @(posedge clk) if (rst_n) begin
    if (tx_en) begin
      if (cur.size() == 0) chk(idle >= 12, $sformatf("gap %0d", idle));
      cur.push_back(txd);
      idle = 0;
    end else begin
      idle++;
      if (cur.size() > 0) begin
        automatic int n = exp_len.pop_front();
        automatic int plen = 16 + 4 * n;
        automatic int flen = 8 + (plen < 60 ? 60 : plen) + 4;
        automatic logic [31:0] fcs;
        chk(cur.size() == flen, $sformatf("frame length %0d vs %0d", cur.size(), flen));
        if (cur.size() == flen) begin
          for (int k = 0; k < 7; k++) chk(cur[k] == 8'h55, "preamble");
          chk(cur[7] == 8'hD5, "sfd");
          for (int k = 0; k < 6; k++) chk(cur[8+k] == 8'hFF, "dst");
          chk({cur[14], cur[15], cur[16], cur[17], cur[18], cur[19]} == 48'h02_00_00_00_4D_52, "src");
          chk({cur[20], cur[21]} == 16'h88B5, "ethertype");
          chk({cur[22], cur[23]} == 16'(frames_seen), "sequence");
          for (int w = 0; w < n; w++)
            chk({cur[24+4*w], cur[25+4*w], cur[26+4*w], cur[27+4*w]} == exp_words.pop_front(), "payload");
          for (int k = 24 + 4 * n; k < flen - 4; k++) chk(cur[k] == 0, "padding");
          fcs = crc_bits(cur, 8, flen - 4);
          chk({cur[flen-1], cur[flen-2], cur[flen-3], cur[flen-4]} == fcs, "fcs");
        end
        frames_seen++;
        cur.delete();
      end
    end
  end

  task automatic send_frame(int n, bit mark_last);
    exp_len.push_back(n);
    for (int w = 0; w < n; w++) begin
      automatic logic [31:0] d = $urandom;
      while ($urandom_range(0, 3) == 0) @(posedge clk);
      #1 in_valid = 1; in_data = d; in_last = mark_last && (w == n - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      exp_words.push_back(d);
      #1 in_valid = 0; in_last = 0;
    end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lens [$] = '{16, 3, 11, 16, 1};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 25; k++) lens.push_back($urandom_range(1, FW));
    foreach (lens[k]) send_frame(lens[k], lens[k] != FW || k == 3);
    repeat (400) @(posedge clk);
    chk(frames_seen == lens.size(), $sformatf("%0d frames seen", frames_seen));
    chk(frames_sent == 16'(lens.size()), "frames_sent count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
