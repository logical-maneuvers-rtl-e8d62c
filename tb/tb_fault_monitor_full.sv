`timescale 1ns / 1ps
// tb_fault_monitor_full -- one complete detect-and-respond operation with every
// parameter of fault_monitor_top at its default (two 128-tap sensors, 32
// calibration stages, 256-sample calibration windows, UART at 3472 sample
// clocks per bit, i.e. 115200 baud from 400 MHz).
// Steps: calibrate under +-10 ps supply noise, stay quiet, apply a laser-like
// dip at sensor 0, take the NMI in a behavioural core, check mnepc/mncause,
// return with mnret, and decode the first readback byte (frame start 0xA5).
module tb_fault_monitor_full;
  import tdc_pkg::*;
  localparam int NUM = 2, HW_W = 8, CAL_W = 6, CPB = 3472;

  logic tdc_clk, tdc_rst_n, core_clk, core_rst_n;
  logic [NUM-1:0][15:0] skew_ps;
  logic cal_start, tag_clear, cal_busy, cal_done, uart_txd, frame_sent;
  logic [NUM-1:0] fault_tags, violation;
  logic [NUM-1:0][HW_W-1:0] sensor_hw;
  logic [NUM-1:0][CAL_W-1:0] sensor_calib;
  logic can_take, mnret, csr_we, csr_hit, redirect, nmi_taken, nmie;
  logic [31:0] pc, csr_wdata, csr_rdata, redirect_pc;
  logic [11:0] csr_addr;
  int checks = 0, failures = 0, n_nmi = 0;
  int laser_ps = 0;
  logic [31:0] interrupted_pc;

  fault_monitor_top dut (.*);

  initial tdc_clk = 0;
  always #1.25 tdc_clk = ~tdc_clk;
  initial core_clk = 0;
  always #2.5 core_clk = ~core_clk;

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(negedge tdc_clk) begin
    for (int s = 0; s < NUM; s++) begin
      automatic int n;
      n = (int'($urandom_range(0, 2)) - 1) * 10;
      if (s == 0) n += laser_ps;
      skew_ps[s] = 16'(n);
    end
  end

  always @(posedge core_clk) begin
    if (!core_rst_n) pc <= 32'h8000_0000;
    else if (redirect) pc <= redirect_pc;
    else pc <= pc + 4;
    if (core_rst_n && redirect && !mnret) begin
      n_nmi++;
      interrupted_pc = pc;
      chk("vector", redirect_pc == 32'h0000_0100);
    end
  end
  assign can_take = 1'b1;

  // First readback byte.
  logic [7:0] first_byte;
  bit got_byte = 0;
  initial begin
    @(posedge tdc_rst_n);
    @(negedge uart_txd);
    #(CPB * 2.5 / 2);
    for (int i = 0; i < 8; i++) begin #(CPB * 2.5); first_byte[i] = uart_txd; end
    got_byte = 1;
  end

  initial begin
    tdc_rst_n = 0; core_rst_n = 0; cal_start = 0; tag_clear = 0; mnret = 0;
    csr_addr = '0; csr_we = 0; csr_wdata = '0;
    repeat (4) @(posedge core_clk);
    #0.3 tdc_rst_n = 1; core_rst_n = 1;
    @(negedge tdc_clk); cal_start = 1; @(negedge tdc_clk); cal_start = 0;
    wait (cal_done);
    for (int s = 0; s < NUM; s++)
      chk("calibrated near 64", sensor_hw[s] >= 60 && sensor_hw[s] <= 68);
    repeat (1000) @(negedge tdc_clk);
    chk("quiet", fault_tags == '0 && n_nmi == 0);
    laser_ps = -200; repeat (3) @(negedge tdc_clk); laser_ps = 0;
    repeat (20) @(negedge core_clk);
    chk("tag 0 only", fault_tags == 2'b01);
    chk("one NMI", n_nmi == 1);
    @(negedge core_clk); csr_addr = CSR_MNEPC; #0.1 chk("mnepc", csr_rdata == interrupted_pc);
    @(negedge core_clk); csr_addr = CSR_MNCAUSE; #0.1 chk("mncause", csr_rdata == 32'h8000_0000);
    @(negedge core_clk); mnret = 1; #0.1 chk("return", redirect && redirect_pc == interrupted_pc);
    @(negedge core_clk); mnret = 0;
    chk("NMIE back", nmie);
    wait (got_byte);
    chk("readback frame start", first_byte == FRAME_SYNC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
