`timescale 1ps / 1ps
// tdc_sensor -- BEHAVIOURAL MODEL of a delay-line time-to-digital converter.
// It is not synthesizable logic: on the FPGA the sensor is a placed carry chain
// whose behaviour comes from physical propagation delay, which this model
// reproduces with simulation delays (in picoseconds).
//
// Structure (as drawn for the sensor): the reference clock ref_clk first passes
// an initial calibrated delay, then a tapped delay line of WIDTH carry
// elements. The output of every element feeds a flip-flop clocked by ref_clk
// itself, so on each rising edge the register captures where the previous
// falling edge of ref_clk has got to in the chain. Taps the falling edge has
// already passed read 0, the others read 1; the Hamming weight (HW) of
// sens_out is therefore the number of taps whose total delay exceeds half a
// clock period. Calibration adjusts the initial delay until HW ~= WIDTH/2.
//
// The initial delay is a fixed base (an IDELAY-like element) followed by a
// chain of CAL_STAGES look-up-table delays; the calibration setting `calib`
// selects how many of them are included. The sensor width (128) and the 32
// calibration stages follow the implementation described for the design; all
// picosecond values are this model's own assumptions for a 28 nm FPGA.
//
// The input skew_ps stands for the physical disturbance (supply droop from a
// glitch or radiation) and is added to the initial delay; it is a modelling
// input, not a port of the real sensor. The fixed stages are delayed
// continuous assignments; the base stage, whose delay varies with skew_ps, is
// a process that waits for its delay, so base delay plus skew must stay below
// half a reference period. Timing: sens_out changes one ref_clk edge after the
// sampled instant.
module tdc_sensor #(
  parameter int unsigned WIDTH      = 128,
  parameter int unsigned CAL_STAGES = 32,
  parameter int unsigned BASE_PS    = 455,  // fixed initial delay
  parameter int unsigned CAL_PS     = 10,   // delay of one calibration stage
  parameter int unsigned TAP_PS     = 10    // delay of one carry element
) (
  input  logic                            ref_clk,
  input  logic [$clog2(CAL_STAGES+1)-1:0] calib,    // calibration stages included
  input  int                              skew_ps,  // modelled disturbance, ps
  output logic [WIDTH-1:0]                sens_out
);

  localparam int unsigned CAL_W = $clog2(CAL_STAGES+1);

  // Initial calibrated delay: base stage, then the calibration chain.
  logic                  base_out;
  logic [CAL_STAGES:0]   cal_chain;
  logic [WIDTH:0]        tap;
  int                    base_delay;
  logic [$clog2(CAL_STAGES+1)-1:0] cal_sel;

  // Settings beyond the chain length saturate at the full chain.
  assign cal_sel = (int'(calib) > int'(CAL_STAGES)) ? CAL_W'(CAL_STAGES) : calib;

  always_comb begin
    base_delay = int'(BASE_PS) + skew_ps;
    if (base_delay < 0) base_delay = 0;
  end

  always @(ref_clk) base_out <= #(base_delay) ref_clk;

  assign cal_chain[0] = base_out;
  for (genvar c = 0; c < CAL_STAGES; c++) begin : g_cal
    assign #(CAL_PS) cal_chain[c+1] = cal_chain[c];
  end

  // Selecting the calibration tap includes/excludes stages from the path.
  assign tap[0] = cal_chain[cal_sel];

  // Tapped delay line (carry elements).
  for (genvar i = 0; i < WIDTH; i++) begin : g_tap
    assign #(TAP_PS) tap[i+1] = tap[i];
  end

  // Output registers, clocked by the reference clock.
  always_ff @(posedge ref_clk) sens_out <= tap[WIDTH:1];

endmodule
