`timescale 1ps / 1ps
// tb_tdc_sensor -- checks the delay-line sensor model against a closed-form
// expectation. With a reference period P, tap i (0-based) has total delay
// d_i = BASE + skew + calib*CAL + (i+1)*TAP and reads 1 exactly when
// P/2 < d_i < P. The test sweeps calibration settings and disturbance values
// and compares the captured word bit by bit, and its Hamming weight, with that
// formula (disturbances are whole multiples of 10 ps so that no tap delay
// lands exactly on the sampling edge). Parameters are the model's defaults (128 taps, 32 stages).
module tb_tdc_sensor;
  localparam int unsigned WIDTH = 128;
  localparam int unsigned CAL_STAGES = 32;
  localparam int PERIOD_PS = 2500;

  logic ref_clk;
  logic [5:0] calib;
  int skew_ps;
  logic [WIDTH-1:0] sens_out;
  int checks = 0, failures = 0;

  tdc_sensor #(.WIDTH(WIDTH), .CAL_STAGES(CAL_STAGES)) dut (
    .ref_clk(ref_clk), .calib(calib), .skew_ps(skew_ps), .sens_out(sens_out));

  initial ref_clk = 1'b0;
  always #(PERIOD_PS/2) ref_clk = ~ref_clk;

  function automatic logic [WIDTH-1:0] expect_word(int cal, int skew);
    logic [WIDTH-1:0] w;
    int base;
    base = 455 + skew;
    if (base < 0) base = 0;
    if (cal > int'(CAL_STAGES)) cal = CAL_STAGES;
    for (int i = 0; i < WIDTH; i++) begin
      int d;
      d = base + cal * 10 + (i + 1) * 10;
      w[i] = (d > PERIOD_PS / 2) && (d < PERIOD_PS);
    end
    return w;
  endfunction

  task automatic check_setting(int cal, int skew);
    logic [WIDTH-1:0] e;
    calib = 6'(cal);
    skew_ps = skew;
    repeat (4) @(posedge ref_clk);
    #1;
    e = expect_word(cal, skew);
    checks++;
    if (sens_out !== e) begin
      failures++;
      $display("FAIL calib=%0d skew=%0d got HW=%0d exp HW=%0d", cal, skew,
               $countones(sens_out), $countones(e));
    end
  endtask

  initial begin
    calib = 0; skew_ps = 0;
    // Calibration sweep without disturbance.
    for (int c = 0; c <= 33; c++) check_setting(c, 0);
    // Setting 16 gives HW close to WIDTH/2.
    check_setting(16, 0);
    checks++;
    if ($countones(sens_out) < 60 || $countones(sens_out) > 68) begin
      failures++; $display("FAIL calibrated HW %0d not near 64", $countones(sens_out));
    end
    // Disturbances in both directions.
    for (int k = -8; k <= 8; k++) check_setting(16, k * 30);
    // Random points.
    for (int k = 0; k < 40; k++) check_setting($urandom_range(0, 32), (int'($urandom_range(0, 60)) - 30) * 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(PERIOD_PS * 2000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
