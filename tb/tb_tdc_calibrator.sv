`timescale 1ns / 1ps
// tb_tdc_calibrator -- drives the calibrator with synthetic sensors whose
// Hamming weight is a known function of the calibration setting (with a 3-cycle
// pipeline lag) plus a period-4 ripple {-2,+2,-1,+1} that averages to zero over
// any window of 256 samples. It checks the reset outputs, the chosen settings
// (closest mean to 64, first on a tie), the thresholds (min - 4 and max + 4,
// saturating at 0 and 128), the busy/done handshake and the duration.
module tb_tdc_calibrator;
  localparam int NUM = 2, WIDTH = 128, HW_W = 8, CAL_W = 6;

  logic clk, rst_n, start, busy, done;
  logic [NUM-1:0][HW_W-1:0]  hw, thr_lo, thr_hi;
  logic [NUM-1:0][CAL_W-1:0] calib;
  int checks = 0, failures = 0;
  int mode = 0;
  int phase = 0;

  tdc_calibrator #(.NUM(NUM), .WIDTH(WIDTH), .CAL_STAGES(32)) dut (.*);

  initial clk = 0;
  always #1.25 clk = ~clk;

  function automatic int h_of(int s, int c);
    if (mode == 0) return (s == 0) ? 100 - 2 * c : 30 + 3 * c;
    return (s == 0) ? 2 : 127;
  endfunction

  // Synthetic sensors with a 3-cycle lag.
  logic [NUM-1:0][CAL_W-1:0] c_d1, c_d2, c_d3;
  always_ff @(posedge clk) begin
    int r;
    c_d1 <= calib; c_d2 <= c_d1; c_d3 <= c_d2;
    phase <= (phase + 1) % 4;
    r = (phase == 0) ? -2 : (phase == 1) ? 2 : (phase == 2) ? -1 : 1;
    for (int s = 0; s < NUM; s++) hw[s] <= HW_W'(h_of(s, int'(c_d3[s])) + r);
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic run_cal(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
      if (cycles > 20000) break;
    end
  endtask

  initial begin
    int cyc;
    rst_n = 0; start = 0; hw = '0; c_d1 = '0; c_d2 = '0; c_d3 = '0;
    repeat (3) @(posedge clk);
    #0.3 rst_n = 1;
    @(negedge clk);
    expect_eq("reset calib0", calib[0], 16);
    expect_eq("reset thr_lo", thr_lo[0], 0);
    expect_eq("reset thr_hi", thr_hi[1], 128);
    expect_eq("reset done", done, 0);

    mode = 0;
    run_cal(cyc);
    expect_eq("busy after done", busy, 0);
    expect_eq("calib sensor0", calib[0], 18);
    expect_eq("calib sensor1", calib[1], 11);
    expect_eq("thr_lo sensor0", thr_lo[0], 58);
    expect_eq("thr_hi sensor0", thr_hi[0], 70);
    expect_eq("thr_lo sensor1", thr_lo[1], 57);
    expect_eq("thr_hi sensor1", thr_hi[1], 69);
    // (CAL_STAGES+1) sweep steps + 1 window step, each SETTLE + 256 cycles.
    checks++;
    if (cyc < 34 * 264 || cyc > 34 * 264 + 4) begin
      failures++; $display("FAIL duration %0d cycles", cyc);
    end

    mode = 1;
    run_cal(cyc);
    expect_eq("tie -> first setting", calib[0], 0);
    expect_eq("saturate lo", thr_lo[0], 0);
    expect_eq("sat case hi0", thr_hi[0], 8);
    expect_eq("saturate hi", thr_hi[1], 128);
    expect_eq("sat case lo1", thr_lo[1], 121);
    expect_eq("done stays", done, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
