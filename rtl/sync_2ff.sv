`timescale 1ns / 1ps
// sync_2ff -- two-flip-flop synchronizer for level signals that cross between
// the sensor sample clock and the processor clock. Each bit is synchronized on
// its own, so it must only carry levels (or pulses at least one destination
// period plus setup long); multi-bit values that must stay coherent are not
// passed through it. Latency: two destination clock edges. Reset clears both
// stages to RESET_VAL.
module sync_2ff #(
  parameter int unsigned W         = 1,
  parameter logic [W-1:0] RESET_VAL = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= RESET_VAL;
      q    <= RESET_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
