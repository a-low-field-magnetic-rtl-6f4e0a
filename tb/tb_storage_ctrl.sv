// tb_storage_ctrl: self-checking test of the capture buffer.
// Reduced sizes: a 256-word ring (MEM_AW = 8), 16-entry FIFOs, 16-word
// frames, against a memory model with random stalls and 6-cycle read latency.
// Every word is tagged {set number, channel}.
//   1. Lossless run: 40 sets (320 words, more than the ring holds) with the
//      reader stalling at random. All words must come out once, in order,
//      'out_last' must mark every 16th word and the final word, and no set
//      may be lost. The ring must wrap.
//   2. Overflow run: the reader stops, sets arrive until the ring and FIFOs
//      are full, further sets are dropped and counted; after the reader
//      resumes, the sets that come out plus the dropped ones must equal the
//      sets sent, each complete and in order.
`timescale 1ns/1ps
module tb_storage_ctrl;
  import mri_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int AW = 8, FW = 16;
  logic acq_start = 0, acq_busy, in_valid = 0, out_valid, out_ready = 0, out_last;
  logic [31:0] acq_len = 0, ovf, out_data;
  iq_t [NCH-1:0] in_iq = '0;
  logic mreq_v, mreq_r, mreq_we, mrsp_v;
  logic [AW-1:0] maddr;
  logic [31:0] mwdata, mrdata;

  storage_ctrl #(.MEM_AW(AW), .FIFO_DEPTH(16), .FRAME_WORDS(FW)) dut (
    .clk, .rst_n, .acq_start, .acq_len, .acq_busy, .ovf_count(ovf), .in_valid, .in_iq,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_we(mreq_we), .mem_req_addr(maddr),
    .mem_req_wdata(mwdata), .mem_rsp_valid(mrsp_v), .mem_rsp_rdata(mrdata),
    .out_valid, .out_ready, .out_data, .out_last);
  mem_model #(.AW(AW), .LAT(6), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(mreq_v), .req_ready(mreq_r), .req_we(mreq_we), .req_addr(maddr),
    .req_wdata(mwdata), .rsp_valid(mrsp_v), .rsp_rdata(mrdata));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  int got_set [$], got_ch [$], got_last [$];
  int rd_pct = 50;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      got_set.push_back(int'(out_data[31:16]));
      got_ch.push_back(int'(out_data[15:0]));
      got_last.push_back(int'(out_last));
    end
  end
  always @(negedge clk) out_ready <= $urandom_range(0, 99) < rd_pct;

  logic wrapped = 0;
  always @(posedge clk) if (mreq_v && mreq_r && mreq_we && maddr == '1) wrapped <= 1;

  task automatic send_set(int s);
    for (int c = 0; c < NCH; c++) begin in_iq[c].i = 16'(s); in_iq[c].q = 16'(c); end
    in_valid = 1; @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // ---- 1: lossless ----
    acq_len = 40; acq_start = 1; @(posedge clk); #1 acq_start = 0;
    chk(acq_busy, "busy");
    for (int s = 0; s < 45; s++) begin           // 5 extra sets outside the window
      send_set(s);
      repeat (20) @(posedge clk);
      #1;
    end
    rd_pct = 60;
    repeat (3000) @(posedge clk);
    chk(got_set.size() == 320, $sformatf("%0d words", got_set.size()));
    for (int k = 0; k < got_set.size(); k++) begin
      chk(got_set[k] == k / 8 && got_ch[k] == k % 8, $sformatf("word %0d = set %0d ch %0d", k, got_set[k], got_ch[k]));
      chk(got_last[k] == ((k % FW == FW - 1) || k == 319), $sformatf("last at %0d", k));
    end
    chk(ovf == 0, "no loss");
    chk(wrapped, "ring wrapped");
    chk(!acq_busy, "idle");
    // ---- 2: overflow ----
    got_set.delete(); got_ch.delete(); got_last.delete();
    rd_pct = 0;
    acq_len = 60; acq_start = 1; @(posedge clk); #1 acq_start = 0;
    for (int s = 0; s < 60; s++) begin
      send_set(s);
      repeat (12) @(posedge clk);
      #1;
    end
    chk(ovf > 0, $sformatf("overflow counted (%0d)", ovf));
    rd_pct = 100;
    repeat (3000) @(posedge clk);
    chk(got_set.size() % 8 == 0, "whole sets");
    chk(got_set.size() / 8 + int'(ovf) == 60, $sformatf("%0d sets out + %0d dropped", got_set.size() / 8, ovf));
    for (int k = 1; k < got_set.size(); k++) begin
      if (k % 8 != 0) chk(got_set[k] == got_set[k-1] && got_ch[k] == got_ch[k-1] + 1, "set complete");
      else chk(got_set[k] > got_set[k-1], "sets in order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
