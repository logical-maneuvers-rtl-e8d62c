`timescale 1ns / 1ps
// tdc_readback -- sensor readback channel to the housekeeping controller.
//
// Frames are sent back to back over a UART. At the start of a frame the block
// pulses report_take, latching from the sensor controller each sensor's
// minimum Hamming weight and violation flag since the previous frame (the
// controller restarts its tracking in the same cycle). The frame is
//   0xA5, then for sensor s = 0..NUM-1: {seen[s], s[6:0]}, min_hw[s]
// i.e. 1 + 2*NUM bytes, each 10 bit times long (8N1). Sending the minimum, not
// one sample, keeps the frame rate low without losing short dips. A UART
// dedicated to reading back the sensor values follows the design description;
// the frame layout is this design's own. NUM must be below 0x25 and the sensor
// width at most 128 so that 0xA5 occurs only as the frame start.
module tdc_readback #(
  parameter int unsigned NUM          = 2,
  parameter int unsigned HW_W         = 8,
  parameter int unsigned CLKS_PER_BIT = 3472
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     run,          // stream frames while high
  input  logic [NUM-1:0][HW_W-1:0] rep_min,
  input  logic [NUM-1:0]           rep_seen,
  output logic                     report_take,  // latch pulse to controller
  output logic                     txd,
  output logic                     frame_sent    // pulse after each frame
);
  localparam int unsigned NBYTES = 1 + 2 * NUM;
  localparam int unsigned IDX_W  = $clog2(NBYTES + 1);

  logic [NUM-1:0][HW_W-1:0] lat_min;
  logic [NUM-1:0]           lat_seen;
  logic [IDX_W-1:0]         idx;       // next byte of the frame; 0 = idle
  logic [7:0]               byte_q;
  logic                     tx_ready, tx_valid, active;

  // Byte idx of the latched frame.
  always_comb begin
    byte_q = 8'(tdc_pkg::FRAME_SYNC);
    for (int s = 0; s < NUM; s++) begin
      if (int'(idx) == 1 + 2 * s) byte_q = {lat_seen[s], 7'(s)};
      if (int'(idx) == 2 + 2 * s) byte_q = 8'(lat_min[s]);
    end
  end

  assign tx_valid    = active;
  assign report_take = run && !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      idx        <= '0;
      lat_min    <= '0;
      lat_seen   <= '0;
      frame_sent <= 1'b0;
    end else begin
      frame_sent <= 1'b0;
      if (!active) begin
        if (run) begin
          lat_min  <= rep_min;
          lat_seen <= rep_seen;
          idx      <= '0;
          active   <= 1'b1;
        end
      end else if (tx_ready) begin
        if (int'(idx) == NBYTES - 1) begin
          active     <= 1'b0;
          frame_sent <= 1'b1;
        end
        idx <= idx + 1'b1;
      end
    end
  end

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk(clk), .rst_n(rst_n), .data(byte_q), .valid(tx_valid),
    .ready(tx_ready), .txd(txd));

  // A report is latched only between frames, and a frame never starts while
  // the transmitter is still busy with the previous one.
  a_take_between_frames: assert property (@(posedge clk) disable iff (!rst_n)
                                          report_take |-> !active);

endmodule
