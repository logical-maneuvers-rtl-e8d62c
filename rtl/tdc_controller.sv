`timescale 1ns / 1ps
// tdc_controller -- the TDC sensory controller.
//
// Every sample clock it takes one word from each of NUM sensors, reduces it to
// a Hamming weight (HW) and compares that weight with the sensor's alarm
// window [thr_lo, thr_hi], which is derived during calibration. A weight
// outside the window is a violation. Violations do three things:
//   * set the sensor's fault tag (sticky until the housekeeping controller
//     pulses tag_clear), which names the block the sensor sits next to;
//   * raise nmi_req, a level held until the processor acknowledges the
//     interrupt with nmi_clear (a new violation in the same cycle wins);
//   * mark the sensor's readback report (rep_seen) until report_take.
// For readback the controller also keeps the minimum HW of each sensor since
// the last report_take, so short dips are not lost between UART frames.
//
// Sampling, tagging, comparison against a calibrated threshold and raising a
// non-maskable interrupt follow the design description. The two-sided window,
// the extra capture register rank (the sensor outputs are deliberately
// metastable), the sticky flags and the minimum tracking are this design's own
// choices. Detection only happens while `enable` is high (it is low during
// calibration); HW and minimum tracking run always.
//
// Timing: sensor word captured at edge k, HW valid after edge k+1, violation /
// tags / nmi_req after edge k+2 (two cycles from capture to interrupt request).
module tdc_controller #(
  parameter int unsigned NUM   = 2,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned HW_W = $clog2(WIDTH + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NUM-1:0][WIDTH-1:0] sens,        // raw sensor words
  input  logic                      enable,      // detection on
  input  logic [NUM-1:0][HW_W-1:0]  thr_lo,
  input  logic [NUM-1:0][HW_W-1:0]  thr_hi,
  input  logic                      tag_clear,   // housekeeping: clear tags
  input  logic                      nmi_clear,   // core: NMI taken
  input  logic                      report_take, // readback latched a report
  output logic [NUM-1:0][HW_W-1:0]  hw,          // current Hamming weights
  output logic [NUM-1:0]            violation,   // this sample out of window
  output logic [NUM-1:0]            fault_tags,  // sticky per-sensor tags
  output logic                      nmi_req,     // interrupt request (level)
  output logic [NUM-1:0][HW_W-1:0]  rep_min,     // min HW since last take
  output logic [NUM-1:0]            rep_seen     // violation since last take
);

  logic [NUM-1:0][WIDTH-1:0] sens_q;
  logic [NUM-1:0][HW_W-1:0]  hw_next;
  logic [NUM-1:0]            viol_next;

  // Hamming weight of each captured word.
  always_comb begin
    for (int s = 0; s < NUM; s++) begin
      hw_next[s] = '0;
      for (int b = 0; b < WIDTH; b++) hw_next[s] = hw_next[s] + HW_W'(sens_q[s][b]);
    end
  end

  // Window comparison on the registered weight.
  always_comb begin
    for (int s = 0; s < NUM; s++)
      viol_next[s] = enable && ((hw[s] < thr_lo[s]) || (hw[s] > thr_hi[s]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sens_q     <= '0;
      hw         <= '0;
      violation  <= '0;
      fault_tags <= '0;
      nmi_req    <= 1'b0;
      rep_min    <= '1;
      rep_seen   <= '0;
    end else begin
      sens_q     <= sens;
      hw         <= hw_next;
      violation  <= viol_next;
      fault_tags <= (tag_clear ? '0 : fault_tags) | viol_next;
      nmi_req    <= (nmi_req && !nmi_clear) || (|viol_next);
      for (int s = 0; s < NUM; s++) begin
        if (report_take) begin
          rep_min[s]  <= hw[s];
          rep_seen[s] <= viol_next[s];
        end else begin
          if (hw[s] < rep_min[s]) rep_min[s] <= hw[s];
          rep_seen[s] <= rep_seen[s] | viol_next[s];
        end
      end
    end
  end

  // A violation always leaves its tag and the interrupt request set.
  a_tag_follows: assert property (@(posedge clk) disable iff (!rst_n)
                                  (|violation) |-> (nmi_req && ((fault_tags & violation) == violation)));

endmodule
