// tb_reg_config: self-checking test of the host register file.
// Checks the reset values (13.88 MHz carrier and receive LO, 2.58 ms
// envelope period, full amplitudes, 256 samples), write/read-back of every
// configuration register with random data and field widths, the one-cycle
// command pulses from the control register, the SPI command fields and
// pulse, the status and overflow read paths, and that unmapped addresses
// read as zero and change nothing.
`timescale 1ns/1ps
module tb_reg_config;
  import mri_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata, ovf_count = 0, acq_len;
  logic tx_busy = 0, acq_busy = 0, spi_busy = 0;
  tx_cfg_t tx_cfg;
  logic [ACC_W-1:0] lo_ftw;
  logic [PHASE_W-1:0] lo_phase;
  logic auto_acq, tx_start, acq_start, sync, spi_start;
  logic [12:0] spi_addr;
  logic [7:0] spi_data;

  reg_config dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  task automatic wr(logic [7:0] a, logic [31:0] d);
    addr = a; wdata = d; wr_en = 1; @(posedge clk); #1 wr_en = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] r);
    addr = a; #1 r = rdata;
  endtask
  task automatic chk_rd(logic [7:0] a, logic [31:0] exp, string what);
    logic [31:0] r;
    rd(a, r);
    chk(r == exp, $sformatf("%s: read %h expected %h", what, r, exp));
  endtask

  int pulses [4] = '{0, 0, 0, 0};
  always @(posedge clk) begin
    if (tx_start) pulses[0]++;
    if (acq_start) pulses[1]++;
    if (sync) pulses[2]++;
    if (spi_start) pulses[3]++;
  end

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r, mask;
    static logic [7:0] cfg_regs [9] = '{REG_CAR_FTW, REG_CAR_PHASE, REG_CAR_AMP, REG_ENV_FTW, REG_ENV_PHASE,
                                 REG_ENV_AMP, REG_LO_FTW, REG_LO_PHASE, REG_ACQ_LEN};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk_rd(REG_CAR_FTW, 32'd476913168, "reset car ftw");
    chk_rd(REG_ENV_FTW, 32'd13318, "reset env ftw");
    chk_rd(REG_LO_FTW, 32'd917140708, "reset lo ftw");
    chk_rd(REG_CAR_AMP, 32'h3FFF, "reset car amp");
    chk_rd(REG_ENV_AMP, 32'h3FFF, "reset env amp");
    chk_rd(REG_ACQ_LEN, 256, "reset acq len");
    chk_rd(REG_CTRL, 0, "reset ctrl");
    chk(!auto_acq, "reset auto_acq");
    for (int it = 0; it < 200; it++) begin
      automatic int k = $urandom_range(0, 8);
      automatic logic [31:0] d = $urandom;
      wr(cfg_regs[k], d);
      mask = (cfg_regs[k] == REG_CAR_FTW || cfg_regs[k] == REG_ENV_FTW || cfg_regs[k] == REG_LO_FTW ||
              cfg_regs[k] == REG_ACQ_LEN) ? 32'hFFFF_FFFF : 32'h3FFF;
      rd(cfg_regs[k], r);
      chk(r == (d & mask), $sformatf("readback reg %0h: %h vs %h", cfg_regs[k], r, d & mask));
      case (cfg_regs[k])
        REG_CAR_FTW:   chk(tx_cfg.car_ftw == d, "car ftw out");
        REG_CAR_PHASE: chk(tx_cfg.car_phase == d[13:0], "car phase out");
        REG_CAR_AMP:   chk(tx_cfg.car_amp == d[13:0], "car amp out");
        REG_ENV_FTW:   chk(tx_cfg.env_ftw == d, "env ftw out");
        REG_ENV_PHASE: chk(tx_cfg.env_phase == d[13:0], "env phase out");
        REG_ENV_AMP:   chk(tx_cfg.env_amp == d[13:0], "env amp out");
        REG_LO_FTW:    chk(lo_ftw == d, "lo ftw out");
        REG_LO_PHASE:  chk(lo_phase == d[13:0], "lo phase out");
        default:       chk(acq_len == d, "acq len out");
      endcase
    end
    // command pulses: each set bit gives exactly one cycle
    for (int b = 0; b < 3; b++) begin
      pulses = '{0, 0, 0, 0};
      wr(REG_CTRL, 32'(1 << b));
      repeat (4) @(posedge clk);
      #1 chk(pulses[b] == 1 && pulses.sum() == 1, $sformatf("pulse bit %0d", b));
    end
    wr(REG_CTRL, 32'h8);
    chk(auto_acq, "auto_acq sticky");
    chk_rd(REG_CTRL, 32'h8, "ctrl readback");
    wr(REG_CTRL, 32'h0);
    chk(!auto_acq, "auto_acq cleared");
    // SPI command
    pulses = '{0, 0, 0, 0};
    wr(REG_ADC_SPI, {11'd0, 13'h0014, 8'h09});
    repeat (3) @(posedge clk);
    #1 chk(pulses[3] == 1 && spi_addr == 13'h14 && spi_data == 8'h09, "spi command");
    chk_rd(REG_ADC_SPI, {11'd0, 13'h0014, 8'h09}, "spi readback");
    // status
    for (int s = 0; s < 8; s++) begin
      {spi_busy, acq_busy, tx_busy} = 3'(s);
      chk_rd(REG_STATUS, 32'(s), "status");
    end
    ovf_count = 32'd12345;
    chk_rd(REG_OVF, 32'd12345, "ovf");
    // unmapped address
    r = tx_cfg.car_ftw;
    wr(8'h40, 32'hDEAD_BEEF);
    chk(tx_cfg.car_ftw == r, "unmapped write ignored");
    chk_rd(8'h40, 0, "unmapped read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
