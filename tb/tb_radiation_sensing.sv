`timescale 1ns / 1ps
// tb_radiation_sensing -- the two sensing experiments: a normal-operation trace
// (450 samples, both sensors under +-10 ps supply noise) followed by a
// laser-exposure trace (1500 samples) in which sensor 0, the one beside the
// ALU, sees 30 short dips of random depth while sensor 1 sees only noise.
// Checks: no alarm in the normal trace; every dip of 100 ps or more (about ten
// taps, beyond noise plus margin) raises a violation on sensor 0; no dip of
// 20 ps or less does; sensor 1 never alarms; the NMI request follows.
// The 10 ps/tap sensor model and the dip depths are this design's
// assumptions. Reduced calibration window (64 samples) and UART speed.
module tb_radiation_sensing;
  localparam int NUM = 2, HW_W = 8, CAL_W = 6;

  logic tdc_clk, tdc_rst_n, core_clk, core_rst_n;
  logic [NUM-1:0][15:0] skew_ps;
  logic cal_start, tag_clear, cal_busy, cal_done, uart_txd, frame_sent;
  logic [NUM-1:0] fault_tags, violation;
  logic [NUM-1:0][HW_W-1:0] sensor_hw;
  logic [NUM-1:0][CAL_W-1:0] sensor_calib;
  logic can_take, mnret, csr_we, csr_hit, redirect, nmi_taken, nmie;
  logic [31:0] pc, csr_wdata, csr_rdata, redirect_pc;
  logic [11:0] csr_addr;
  int checks = 0, failures = 0;
  int dip_ps = 0;
  int viol0 = 0, viol1 = 0, nmis = 0;

  fault_monitor_top #(.AVG_LOG(6), .CLKS_PER_BIT(16)) dut (.*);

  initial tdc_clk = 0;
  always #1.25 tdc_clk = ~tdc_clk;
  initial core_clk = 0;
  always #2.5 core_clk = ~core_clk;

  always @(negedge tdc_clk) begin
    for (int s = 0; s < NUM; s++) begin
      automatic int n;
      n = (int'($urandom_range(0, 2)) - 1) * 10;
      if (s == 0) n += dip_ps;
      skew_ps[s] = 16'(n);
    end
  end

  always @(posedge tdc_clk) begin
    if (violation[0]) viol0++;
    if (violation[1]) viol1++;
  end

  // Core: always interruptible; the handler returns right away.
  assign can_take = 1'b1;
  assign pc = 32'h8000_0000;
  always @(posedge core_clk) if (nmi_taken) nmis++;
  always @(negedge core_clk) mnret = !nmie && !redirect;

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int prev_v, hit_deep = 0, deep = 0, hit_small = 0, shallow = 0;
    tdc_rst_n = 0; core_rst_n = 0; cal_start = 0; tag_clear = 0;
    csr_addr = '0; csr_we = 0; csr_wdata = '0;
    repeat (4) @(posedge core_clk);
    #0.3 tdc_rst_n = 1; core_rst_n = 1;
    @(negedge tdc_clk); cal_start = 1; @(negedge tdc_clk); cal_start = 0;
    wait (cal_done);
    repeat (10) @(negedge tdc_clk);

    // Normal operation: 450 samples.
    repeat (450) @(negedge tdc_clk);
    chk("normal trace: no violation", viol0 == 0 && viol1 == 0);
    chk("normal trace: no NMI", nmis == 0);

    // Laser exposure: 1500 samples with 30 dips on sensor 0.
    for (int d = 0; d < 30; d++) begin
      automatic int depth;
      depth = (d % 3 == 0) ? 10 * $urandom_range(0, 2) : 10 * $urandom_range(10, 30);
      prev_v = viol0;
      dip_ps = -depth;
      repeat (2) @(negedge tdc_clk);
      dip_ps = 0;
      repeat (48) @(negedge tdc_clk);
      if (depth >= 100) begin deep++;   if (viol0 > prev_v) hit_deep++;   end
      if (depth <= 20)  begin shallow++; if (viol0 > prev_v) hit_small++; end
    end
    $display("laser trace: %0d of %0d deep dips detected, %0d of %0d shallow dips flagged, %0d NMIs",
             hit_deep, deep, hit_small, shallow, nmis);
    chk("every deep dip detected", hit_deep == deep && deep > 0);
    chk("no shallow dip flagged", hit_small == 0 && shallow > 0);
    chk("sensor 1 never alarms", viol1 == 0 && fault_tags[1] == 1'b0);
    chk("tag 0 set", fault_tags[0] == 1'b1);
    chk("NMIs raised", nmis > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
