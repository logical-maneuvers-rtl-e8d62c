`timescale 1ns / 1ps
// uart_tx -- 8N1 UART transmitter used by the sensor readback channel.
// A byte is accepted when valid && ready; the line then carries one start bit
// (0), eight data bits LSB first and one stop bit (1), each CLKS_PER_BIT clock
// cycles long, and ready rises again after the stop bit. The line idles high.
// Frame format and handshake are this design's own choice; the design only
// calls for a UART that reads the sensor values back.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 3472
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);
  localparam int unsigned DIV_W = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]       shreg;   // {stop, data[7:0], start}
  logic [3:0]       bits_left;
  logic [DIV_W-1:0] div;

  assign ready = (bits_left == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      div       <= '0;
      txd       <= 1'b1;
    end else if (ready) begin
      txd <= 1'b1;
      if (valid) begin
        shreg     <= {1'b1, data, 1'b0};
        bits_left <= 4'd10;
        div       <= '0;
        txd       <= 1'b0;
      end
    end else begin
      if (div == DIV_W'(CLKS_PER_BIT - 1)) begin
        div       <= '0;
        bits_left <= bits_left - 1'b1;
        shreg     <= {1'b1, shreg[9:1]};
        txd       <= (bits_left == 4'd1) ? 1'b1 : shreg[1];
      end else begin
        div <= div + 1'b1;
      end
    end
  end
  // The line is high whenever no byte is in flight.
  a_idle_high: assert property (@(posedge clk) disable iff (!rst_n)
                                (ready && $past(ready)) |-> txd);

endmodule
