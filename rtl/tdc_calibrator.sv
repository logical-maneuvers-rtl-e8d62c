`timescale 1ns / 1ps
// tdc_calibrator -- on-chip calibration of the delay sensors.
//
// A sensor is calibrated when the Hamming weight (HW) of its output averages
// WIDTH/2 over a long enough window; the alarm thresholds are derived during
// that calibration. This block automates both steps for NUM sensors at once:
//   1. SWEEP: for every setting c = 0..CAL_STAGES (number of calibration delay
//      stages included in the sensor's initial delay) it waits SETTLE cycles
//      for the sensor and the HW pipeline to follow, then sums 2**AVG_LOG
//      weights. The setting whose sum is closest to (WIDTH/2) * 2**AVG_LOG is
//      kept per sensor (the first one wins a tie).
//   2. WINDOW: with the chosen settings applied it waits SETTLE cycles, records
//      the smallest and largest HW over 2**AVG_LOG samples, and sets
//      thr_lo = min - MARGIN and thr_hi = max + MARGIN (saturating at 0 and
//      WIDTH).
// `done` then rises and stays high until the next `start`; while busy the
// controller's detection is meant to be disabled. Calibration to HW = WIDTH/2
// and the threshold follow the design description, which performs these steps
// offline; doing them in hardware, the sweep order, the averaging length and
// the margin rule are this design's own choices.
//
// Before the first calibration the outputs are calib = CAL_RESET and a window
// [0, WIDTH] that never alarms. Duration of a calibration:
// (CAL_STAGES + 2) * (SETTLE + 2**AVG_LOG) cycles, approximately.
module tdc_calibrator #(
  parameter int unsigned NUM        = 2,
  parameter int unsigned WIDTH      = 128,
  parameter int unsigned CAL_STAGES = 32,
  parameter int unsigned AVG_LOG    = 8,
  parameter int unsigned SETTLE     = 8,
  parameter int unsigned MARGIN     = 4,
  parameter int unsigned CAL_RESET  = 16,
  localparam int unsigned HW_W  = $clog2(WIDTH + 1),
  localparam int unsigned CAL_W = $clog2(CAL_STAGES + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,   // pulse: begin a calibration
  input  logic [NUM-1:0][HW_W-1:0]  hw,      // weights from the controller
  output logic [NUM-1:0][CAL_W-1:0] calib,   // settings driven to the sensors
  output logic [NUM-1:0][HW_W-1:0]  thr_lo,
  output logic [NUM-1:0][HW_W-1:0]  thr_hi,
  output logic                      busy,
  output logic                      done
);

  localparam int unsigned SUM_W = HW_W + AVG_LOG + 1;
  localparam int unsigned CNT_W = $clog2(SETTLE + (1 << AVG_LOG) + 1);
  localparam logic [SUM_W-1:0] TARGET = SUM_W'((WIDTH / 2) << AVG_LOG);

  typedef enum logic [1:0] {IDLE, SWEEP, WINDOW} state_e;
  state_e state;

  logic [CNT_W-1:0]              cnt;
  logic [CAL_W-1:0]              setting;
  logic [NUM-1:0][SUM_W-1:0]     sum;
  logic [NUM-1:0][SUM_W-1:0]     best_err;
  logic [NUM-1:0][CAL_W-1:0]     best_cal;
  logic [NUM-1:0][HW_W-1:0]      wmin, wmax;
  logic [NUM-1:0][SUM_W-1:0]     err;
  logic [NUM-1:0][HW_W-1:0]      fin_lo, fin_hi;   // window incl. this sample

  wire settling  = cnt < CNT_W'(SETTLE);
  wire last_smpl = cnt == CNT_W'(SETTLE + (1 << AVG_LOG) - 1);

  // Distance of the completed sum (including this cycle's sample) to target.
  always_comb begin
    for (int s = 0; s < NUM; s++) begin
      logic [SUM_W-1:0] total;
      total  = sum[s] + SUM_W'(hw[s]);
      err[s] = (total > TARGET) ? total - TARGET : TARGET - total;
      fin_lo[s] = (hw[s] < wmin[s]) ? hw[s] : wmin[s];
      fin_hi[s] = (hw[s] > wmax[s]) ? hw[s] : wmax[s];
    end
  end

  assign busy = state != IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      cnt      <= '0;
      setting  <= '0;
      sum      <= '0;
      best_err <= '1;
      best_cal <= '0;
      wmin     <= '1;
      wmax     <= '0;
      calib    <= {NUM{CAL_W'(CAL_RESET)}};
      thr_lo   <= '0;
      thr_hi   <= {NUM{HW_W'(WIDTH)}};
      done     <= 1'b0;
    end else begin
      unique case (state)
        IDLE: begin
          if (start) begin
            state    <= SWEEP;
            done     <= 1'b0;
            cnt      <= '0;
            setting  <= '0;
            sum      <= '0;
            best_err <= '1;
            calib    <= '0;
          end
        end

        SWEEP: begin
          cnt <= cnt + 1'b1;
          if (!settling) begin
            for (int s = 0; s < NUM; s++) sum[s] <= sum[s] + SUM_W'(hw[s]);
          end
          if (last_smpl) begin
            for (int s = 0; s < NUM; s++) begin
              if (err[s] < best_err[s]) begin
                best_err[s] <= err[s];
                best_cal[s] <= setting;
              end
            end
            cnt <= '0;
            sum <= '0;
            if (setting == CAL_W'(CAL_STAGES)) begin
              state <= WINDOW;
              // Apply the winners (including a winner found on this step).
              for (int s = 0; s < NUM; s++)
                calib[s] <= (err[s] < best_err[s]) ? setting : best_cal[s];
              wmin <= '1;
              wmax <= '0;
            end else begin
              setting <= setting + 1'b1;
              calib   <= {NUM{setting + 1'b1}};
            end
          end
        end

        WINDOW: begin
          cnt <= cnt + 1'b1;
          if (!settling) begin
            for (int s = 0; s < NUM; s++) begin
              if (hw[s] < wmin[s]) wmin[s] <= hw[s];
              if (hw[s] > wmax[s]) wmax[s] <= hw[s];
            end
          end
          if (last_smpl) begin
            for (int s = 0; s < NUM; s++) begin
              thr_lo[s] <= (fin_lo[s] > HW_W'(MARGIN)) ? fin_lo[s] - HW_W'(MARGIN) : '0;
              thr_hi[s] <= (int'(fin_hi[s]) + int'(MARGIN) < int'(WIDTH))
                           ? fin_hi[s] + HW_W'(MARGIN) : HW_W'(WIDTH);
            end
            state <= IDLE;
            done  <= 1'b1;
            cnt   <= '0;
          end
        end

        default: state <= IDLE;
      endcase
    end
  end

endmodule
