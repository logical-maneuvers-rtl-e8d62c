`timescale 1ns / 1ps
// tdc_pkg -- constants and types shared by the delay-sensor fault monitor.
//
// The monitor watches the power-delivery network of a soft processor with
// time-to-digital converter (TDC) sensors. Each sensor produces a TDC_WIDTH-bit
// word per sample clock; its Hamming weight (HW) sits near TDC_WIDTH/2 when the
// sensor is calibrated and moves away from it when a glitch or radiation
// changes the local gate delay. Two sensors of 128 bits and a calibration chain
// of 32 stages follow the implementation described for the design; every other
// number here (readback framing byte, NMI CSR numbers) is this design's own
// choice. The top level takes its default sizes from here.
package tdc_pkg;

  // Sensor geometry (two sensors of 128 taps, 32 calibration stages each).
  localparam int unsigned TDC_WIDTH   = 128;
  localparam int unsigned NUM_SENSORS = 2;
  localparam int unsigned CAL_STAGES  = 32;

  // Sensor readback frame: SYNC byte, then per sensor a tag byte
  // {violation-seen, sensor id[6:0]} and the minimum HW since the last frame.
  // HW never exceeds 128 (0x80) and a tag never exceeds 0x80 | 0x7F with
  // fewer than 0x25 sensors, so SYNC = 0xA5 cannot occur inside a frame.
  localparam logic [7:0] FRAME_SYNC = 8'hA5;

  // Smrnmi-style CSR addresses used by the NMI unit.
  localparam logic [11:0] CSR_MNSCRATCH = 12'h740;
  localparam logic [11:0] CSR_MNEPC     = 12'h741;
  localparam logic [11:0] CSR_MNCAUSE   = 12'h742;
  localparam logic [11:0] CSR_MNSTATUS  = 12'h744;
  localparam int unsigned MNSTATUS_NMIE = 3;

endpackage
