// tb_mri_full: end-to-end test of the whole spectrometer (mri_top).
// Full size: mri_top with its default parameters (256-word frames,
// 2^26-word ring) and default registers (2.58 ms pulse, 256 output samples).
// The testbench acts as host (register bus), ADC (eight serial lanes from
// the behavioural adc_model), external memory (behavioural mem_model with
// random stalls) and Ethernet receiver (parses every GMII frame).
// Sequence: write one ADC register over SPI; pulse 'sync' (clears the
// carrier and receive-LO DDS together); start the ADC, whose channel c
// carries A_c cos(n K + phi_c) at the 13.88 MHz Larmor frequency with
// sample index n counted from the sync (A_c = 1000 + 400c, phi_c = c pi/4);
// after the filters have settled, start an RF pulse with auto-acquire set.
// Mechanisms counted (each must occur at least once, otherwise a failure is
// counted): SPI write decoded, RF pulse of the programmed length at the
// carrier frequency, acquisition started by the end of the pulse, coherent
// demodulation (every channel's I/Q equals A_c e^{j phi_c} within 2 %),
// memory back-pressure, the ring address counting up, full Ethernet frames with valid CRC and
// sequence numbers, and eight full frames. The word stream must hold exactly
// acq_len sets of eight channels, in order, with no overflow.
`timescale 1ns/1ps
module tb_mri_full;
  import mri_pkg::*;
  localparam bit FULL = 1;
  localparam int FW = 256, AW = 26;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic        host_wr_en = 0;
  logic [7:0]  host_addr = REG_STATUS;
  logic [31:0] host_wdata = 0, host_rdata;
  logic [13:0] dac_data;
  logic        adc_bit_clk, adc_frame, adc_sclk, adc_csb, adc_sdio;
  logic [7:0]  adc_din;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [31:0] mem_req_wdata, mem_rsp_rdata;
  logic [7:0]  gmii_txd;
  logic        gmii_tx_en;

  mri_top dut (.*);

  logic adc_run = 0, adc_taken;
  logic signed [7:0][13:0] adc_next = '0;
  adc_model #(.BIT_PS(1099)) u_adc (.run(adc_run), .next_sample(adc_next), .bit_clk(adc_bit_clk),
                                    .frame(adc_frame), .din(adc_din), .taken(adc_taken));
  mem_model #(.AW(AW), .LAT(8), .STALL_PCT(30)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask
  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk) begin host_addr = a; host_wdata = d; host_wr_en = 1; end
    @(negedge clk) begin host_wr_en = 0; host_addr = REG_STATUS; end
  endtask

  // ---------------- ADC stimulus ----------------
  longint n_adc = 0;
  localparam longint LO_K = 64'd917140708;
  function automatic logic signed [7:0][13:0] adc_value(longint n);
    logic signed [7:0][13:0] v;
    real p0 = 2.0 * PI * real'(((n + 1) * LO_K) % (64'd1 << 32)) / 4294967296.0;
    for (int c = 0; c < 8; c++) v[c] = 14'($rtoi($floor((1000.0 + 400.0 * c) * $cos(p0 + c * PI / 4.0) + 0.5)));
    return v;
  endfunction
  initial adc_next = adc_value(0);
  always @(posedge adc_taken) begin
    n_adc++;
    adc_next = adc_value(n_adc);
  end

  // ---------------- mechanism counters ----------------
  int m_spi = 0, m_pulse = 0, m_auto = 0, m_coherent = 0, m_backpressure = 0, m_wrap = 0;
  int m_full_frame = 0, m_short_frame = 0;

  // SPI monitor
  logic [23:0] spi_sh = 0;
  int spi_bits = 0;
  logic [23:0] spi_expect = {1'b0, 2'b00, 13'h0014, 8'h09};
  always @(posedge adc_sclk) if (!adc_csb) begin spi_sh = {spi_sh[22:0], adc_sdio}; spi_bits++; end
  always @(posedge adc_csb) if (rst_n) begin
    chk(spi_bits == 24 && spi_sh == spi_expect, $sformatf("spi frame %h (%0d bits)", spi_sh, spi_bits));
    if (spi_bits == 24 && spi_sh == spi_expect) m_spi++;
    spi_bits = 0;
  end

  // DAC monitor: pulse span, peak and carrier zero crossings
  longint cyc = 0, first_nz = -1, last_nz = -1;
  int peak = 0, rises = 0, last_sign = 0;
  always @(posedge clk) begin
    automatic int rf = int'($signed(dac_data ^ 14'h2000));
    cyc++;
    if (rst_n && rf != 0) begin
      if (first_nz < 0) first_nz = cyc;
      last_nz = cyc;
      if ((rf < 0 ? -rf : rf) > peak) peak = rf < 0 ? -rf : rf;
      if (rf > 0 && last_sign < 0) rises++;
      last_sign = rf > 0 ? 1 : -1;
    end
  end

  // status monitor (the host address rests on the status register)
  logic tx_busy_q = 0, acq_busy_q = 0, acq_seen = 0;
  longint tx_end_cyc = -1;
  always @(posedge clk) if (rst_n && !host_wr_en && host_addr == REG_STATUS) begin
    if (tx_busy_q && !host_rdata[0]) tx_end_cyc = cyc;
    if (!acq_busy_q && host_rdata[1]) begin
      acq_seen = 1;
      if (tx_end_cyc >= 0 && cyc - tx_end_cyc <= 4) m_auto++;
    end
    tx_busy_q = host_rdata[0];
    acq_busy_q = host_rdata[1];
  end

  // memory monitor
  logic wrote_top = 0;
  always @(posedge clk) if (rst_n && mem_req_valid) begin
    if (!mem_req_ready) m_backpressure++;
    else if (mem_req_we) begin
      if (mem_req_addr == '1) wrote_top = 1;
      if (mem_req_addr == '0 && wrote_top) m_wrap++;
    end
  end

  // Ethernet receiver
  function automatic logic [31:0] crc_bits(byte unsigned b [$], int from, int to);
    logic [31:0] c = '1;
    for (int k = from; k < to; k++) begin
      c ^= 32'(b[k]);
      for (int j = 0; j < 8; j++) c = c[0] ? (c >> 1) ^ 32'hEDB88320 : c >> 1;
    end
    return ~c;
  endfunction
  byte unsigned fr [$];
  logic [31:0] words [$];
  int frames = 0, last_frame_words = 0;
  always @(posedge clk) if (rst_n) begin
    if (gmii_tx_en) fr.push_back(gmii_txd);
    else if (fr.size() > 0) begin
      automatic int len = fr.size();
      automatic int nw = 0;
      automatic bit ok = len >= 72 && fr[7] == 8'hD5 && {fr[20], fr[21]} == 16'h88B5 &&
                         {fr[22], fr[23]} == 16'(frames) &&
                         {fr[len-1], fr[len-2], fr[len-3], fr[len-4]} == crc_bits(fr, 8, len - 4);
      chk(ok, $sformatf("ethernet frame %0d header/crc", frames));
      // payload length: the frame holds FW words unless it is the last one
      nw = (len - 28) / 4;
      if (words.size() + nw > expected_words) nw = expected_words - words.size();
      if (nw < 0) nw = 0;
      for (int w = 0; w < nw; w++) words.push_back({fr[24+4*w], fr[25+4*w], fr[26+4*w], fr[27+4*w]});
      if (ok && nw == FW) m_full_frame++;
      if (ok && nw < FW && nw > 0) m_short_frame++;
      last_frame_words = nw;
      frames++;
      fr.delete();
    end
  end

  int acq_len_sets = FULL ? 256 : 41;
  int expected_words;
  initial expected_words = 8 * acq_len_sets;

  initial begin
    #(FULL ? 64'd40000000000 : 64'd4000000000); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint period;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    repeat (4) @(posedge clk);
    wr(REG_ADC_SPI, {11'd0, 13'h0014, 8'h09});
    if (!FULL) begin
      wr(REG_ENV_FTW, 32'd1073742);          // about 4000-cycle pulse
      wr(REG_ACQ_LEN, 32'(acq_len_sets));
    end
    period = (64'd1 << 32) / (FULL ? 64'd13318 : 64'd1073742);
    wr(REG_CTRL, 32'h4);                     // sync
    @(negedge clk) adc_run = 1;
    repeat (60000) @(posedge clk);
    wr(REG_CTRL, 32'h9);                     // RF pulse, auto-acquire
    for (int k = 0; k < (FULL ? 3000000 : 400000) && !(acq_seen && words.size() >= expected_words); k++)
      @(posedge clk);
    chk(acq_seen, "acquisition seen");
    repeat (2000) @(posedge clk);
    // RF pulse
    chk(last_nz - first_nz + 1 > period * 9 / 10 && last_nz - first_nz + 1 <= period + 8,
        $sformatf("pulse span %0d for period %0d", last_nz - first_nz + 1, period));
    chk(peak > 7800 && peak <= 8191, $sformatf("pulse peak %0d", peak));
    chk(fabs(real'(rises) - 13.88 / 125.0 * real'(last_nz - first_nz)) < 0.05 * 13.88 / 125.0 * real'(last_nz - first_nz),
        $sformatf("carrier cycles %0d", rises));
    if (peak > 7800 && rises > 0) m_pulse++;
    // data
    chk(words.size() == expected_words, $sformatf("%0d words received", words.size()));
    for (int s = 0; s < words.size() / 8; s++) begin
      automatic bit all_ok = 1;
      for (int c = 0; c < 8; c++) begin
        automatic real a = 1000.0 + 400.0 * c, ph = c * PI / 4.0;
        automatic real vi = real'($signed(words[8*s+c][31:16])), vq = real'($signed(words[8*s+c][15:0]));
        automatic bit ok = fabs(vi - a * $cos(ph)) < 0.02 * a && fabs(vq - a * $sin(ph)) < 0.02 * a;
        chk(ok, $sformatf("set %0d ch %0d I %0d Q %0d", s, c, $signed(words[8*s+c][31:16]), $signed(words[8*s+c][15:0])));
        all_ok &= ok;
      end
      if (all_ok) m_coherent++;
    end
    chk(frames == (expected_words + FW - 1) / FW, $sformatf("%0d frames", frames));
    @(negedge clk) host_addr = REG_OVF;
    #1 chk(host_rdata == 0, "no overflow");
    host_addr = REG_STATUS;
    // every mechanism must have happened
    chk(m_spi > 0, "mechanism: SPI write");
    chk(m_pulse > 0, "mechanism: RF pulse");
    chk(m_auto > 0, "mechanism: acquisition started by pulse end");
    chk(m_coherent > 0, "mechanism: coherent demodulation");
    chk(m_backpressure > 0, "mechanism: memory back-pressure");
    chk(m_full_frame > 0, "mechanism: full Ethernet frame");
    chk(m_full_frame == 8, "eight full frames");
    $display("mechanisms: spi=%0d pulse=%0d auto_acq=%0d coherent_sets=%0d backpressure=%0d wrap=%0d full_frames=%0d short_frames=%0d",
             m_spi, m_pulse, m_auto, m_coherent, m_backpressure, m_wrap, m_full_frame, m_short_frame);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
