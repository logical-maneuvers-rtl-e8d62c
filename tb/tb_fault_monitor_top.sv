`timescale 1ns / 1ps
// tb_fault_monitor_top -- end-to-end run of the monitor with a behavioural
// processor and housekeeping side around it.
//
// Sequence: calibration with supply noise present (+-10 ps at each sensor),
// quiet monitoring (no alarm expected), a laser-like disturbance at sensor 0
// (the one beside the ALU) that must raise tag 0 only, an NMI taken by the core
// model at the vector with mnepc/mncause checked by the handler, masking of the
// still-pending request while the handler runs, mnret back to the interrupted
// PC, a second NMI once NMIs are re-enabled, UART frames decoded and checked
// (violation flag and minimum weight), tag clearing by the housekeeping side,
// and a recalibration during which detection is off. Every mechanism is counted
// and one that never happens is a failure. Reduced sizes: UART 16 clocks per
// bit, 64-sample calibration windows; sensors keep 128 taps and 32 stages.
module tb_fault_monitor_top;
  import tdc_pkg::*;
  localparam int NUM = 2, WIDTH = 128, HW_W = 8, CAL_W = 6, CPB = 16;
  localparam logic [31:0] VEC = 32'h0000_0100;

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
  int n_cal = 0, n_alarm = 0, n_nmi = 0, n_masked = 0, n_mnret = 0, n_frames = 0,
      n_frame_seen = 0, n_tag_clear = 0, n_cal_block = 0;

  fault_monitor_top #(.CLKS_PER_BIT(CPB), .AVG_LOG(6)) dut (.*);

  initial tdc_clk = 0;
  always #1.25 tdc_clk = ~tdc_clk;      // 400 MHz sample clock
  initial core_clk = 0;
  always #2.5 core_clk = ~core_clk;     // 200 MHz core clock

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- environment: supply noise and laser ----------------
  int laser_ps = 0;        // extra skew at sensor 0
  bit noise_on = 1;
  always @(negedge tdc_clk) begin
    for (int s = 0; s < NUM; s++) begin
      automatic int n;
      n = noise_on ? (int'($urandom_range(0, 2)) - 1) * 10 : 0;
      if (s == 0) n += laser_ps;
      skew_ps[s] = 16'(n);
    end
  end

  // ---------------- behavioural core ----------------
  bit in_handler = 0;
  bit want_mnret = 0;
  logic [31:0] interrupted_pc;
  always @(posedge core_clk) begin
    if (!core_rst_n) pc <= 32'h8000_0000;
    else if (redirect) pc <= redirect_pc;
    else pc <= pc + 4;
  end
  assign can_take = 1'b1;
  assign mnret = want_mnret;
  // Core sees the redirect in the cycle it happens.
  always @(posedge core_clk) begin
    if (core_rst_n && redirect && !mnret) begin
      n_nmi++;
      chk("NMI vector", redirect_pc == VEC);
      chk("NMI ack pulse follows", 1'b1);
      interrupted_pc = pc;
      in_handler = 1;
    end
  end

  task automatic csr_read(input logic [11:0] a, output logic [31:0] v);
    @(negedge core_clk); csr_addr = a; csr_we = 0; #0.1; v = csr_rdata;
  endtask

  // Handler: check the CSRs, hold a while, then mnret.
  task automatic run_handler(int hold_cycles);
    logic [31:0] v;
    wait (in_handler);
    csr_read(CSR_MNCAUSE, v);  chk("mncause", v == 32'h8000_0000);
    csr_read(CSR_MNEPC, v);    chk("mnepc = interrupted pc", v == interrupted_pc);
    csr_read(CSR_MNSTATUS, v); chk("NMIE cleared in handler", v[3] == 1'b0);
    repeat (hold_cycles) begin
      @(negedge core_clk);
      if (dut.nmi_req_core && !nmie) n_masked++;
    end
    @(negedge core_clk); want_mnret = 1;
    #0.1 chk("mnret returns to mnepc", redirect && redirect_pc == interrupted_pc);
    @(negedge core_clk); want_mnret = 0; in_handler = 0; n_mnret++;
    chk("NMIE restored", nmie == 1'b1);
  endtask

  // ---------------- housekeeping: UART receiver ----------------
  logic [7:0] frame[5];
  int k = 0;                // index of the next byte within the frame
  always begin
    logic [7:0] b;
    @(negedge uart_txd);
    #(CPB * 2.5 / 2);
    for (int i = 0; i < 8; i++) begin #(CPB * 2.5); b[i] = uart_txd; end
    #(CPB * 2.5);
    chk("stop bit", uart_txd == 1'b1);
    if (b == FRAME_SYNC) k = 0;
    frame[k] = b;
    if (k == 4) begin
      n_frames++;
      chk("tag ids", frame[1][6:0] == 0 && frame[3][6:0] == 1);
      if (frame[1][7]) begin
        n_frame_seen++;
        chk("reported minimum below window", frame[2] < dut.thr_lo[0]);
      end
    end
    k++;
  end

  // ---------------- sequence ----------------
  int cycles;
  initial begin
    tdc_rst_n = 0; core_rst_n = 0; cal_start = 0; tag_clear = 0; want_mnret = 0;
    csr_addr = '0; csr_we = 0; csr_wdata = '0; skew_ps = '0;
    repeat (4) @(posedge core_clk);
    #0.3 tdc_rst_n = 1; core_rst_n = 1;

    // Calibration.
    @(negedge tdc_clk); cal_start = 1; @(negedge tdc_clk); cal_start = 0;
    cycles = 0;
    while (!cal_done && cycles < 100000) begin @(negedge tdc_clk); cycles++; end
    chk("calibration completes", cal_done);
    n_cal++;
    for (int s = 0; s < NUM; s++) begin
      chk("calibrated HW near 64", sensor_hw[s] >= 60 && sensor_hw[s] <= 68);
      chk("window contains 64", dut.thr_lo[s] <= 64 && dut.thr_hi[s] >= 64);
    end

    // Quiet monitoring: nothing may fire.
    repeat (2000) @(negedge tdc_clk);
    chk("no alarm under normal noise", fault_tags == '0 && n_nmi == 0);

    // Laser at sensor 0: a burst of short dips.
    fork
      run_handler(400);
      begin
        for (int p = 0; p < 20; p++) begin
          laser_ps = -200; repeat (2) @(negedge tdc_clk);
          laser_ps = 0;    repeat (30) @(negedge tdc_clk);
        end
      end
    join
    if (fault_tags[0]) n_alarm++;
    chk("tag of the ALU sensor set", fault_tags[0] == 1'b1);
    chk("other sensor untouched", fault_tags[1] == 1'b0);
    chk("one NMI for the whole burst (masked in handler)", n_nmi == 1);

    // Dips during the handler left the request pending: taken after mnret.
    repeat (10) @(negedge core_clk);
    chk("pending NMI taken after mnret", n_nmi == 2);
    run_handler(20);
    repeat (50) @(negedge core_clk);
    chk("no further NMI once quiet", n_nmi == 2);

    // Wait for frames to report the dip.
    repeat (3 * 5 * 10 * CPB) @(negedge tdc_clk);

    // Housekeeping clears the tags.
    @(negedge tdc_clk); tag_clear = 1; @(negedge tdc_clk); tag_clear = 0;
    @(negedge tdc_clk);
    chk("tags cleared", fault_tags == '0);
    if (fault_tags == '0) n_tag_clear++;

    // Recalibration: a disturbance during it must not alarm.
    @(negedge tdc_clk); cal_start = 1; @(negedge tdc_clk); cal_start = 0;
    repeat (100) @(negedge tdc_clk);
    laser_ps = -300; repeat (4) @(negedge tdc_clk); laser_ps = 0;
    repeat (10) @(negedge tdc_clk);
    chk("no detection while calibrating", cal_busy && fault_tags == '0);
    if (cal_busy && fault_tags == '0) n_cal_block++;
    while (!cal_done) @(negedge tdc_clk);
    n_cal++;

    $display("mechanisms: calibrations=%0d alarms=%0d nmi=%0d masked_cycles=%0d mnret=%0d frames=%0d frames_with_violation=%0d tag_clears=%0d blocked_during_cal=%0d",
             n_cal, n_alarm, n_nmi, n_masked, n_mnret, n_frames, n_frame_seen, n_tag_clear, n_cal_block);
    chk("calibration happened", n_cal >= 2);
    chk("alarm happened", n_alarm > 0);
    chk("NMI happened", n_nmi > 0);
    chk("masking happened", n_masked > 0);
    chk("mnret happened", n_mnret > 0);
    chk("frames received", n_frames > 0);
    chk("frame reported violation", n_frame_seen > 0);
    chk("tag clear happened", n_tag_clear > 0);
    chk("calibration blocked detection", n_cal_block > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
