`timescale 1ns / 1ps
// tb_tdc_readback -- decodes the serial line with an independent UART receiver
// (mid-bit sampling, start/stop checks) and compares every received frame with
// the minimum weights and violation flags presented at the report_take pulse
// that opened it. Also checks the bit period and the frame length. Uses
// CLKS_PER_BIT = 16 to keep the run short.
module tb_tdc_readback;
  localparam int NUM = 2, HW_W = 8, CPB = 16, NBYTES = 1 + 2 * NUM;

  logic clk, rst_n, run, report_take, txd, frame_sent;
  logic [NUM-1:0][HW_W-1:0] rep_min;
  logic [NUM-1:0] rep_seen;
  int checks = 0, failures = 0;

  tdc_readback #(.NUM(NUM), .HW_W(HW_W), .CLKS_PER_BIT(CPB)) dut (.*);

  initial clk = 0;
  always #5 clk = ~clk;

  // Expected frames, queued at each report_take.
  logic [7:0] expq[$];
  always @(posedge clk) begin
    if (rst_n && report_take) begin
      expq.push_back(8'hA5);
      for (int s = 0; s < NUM; s++) begin
        expq.push_back({rep_seen[s], 7'(s)});
        expq.push_back(8'(rep_min[s]));
      end
    end
  end

  // Controller stand-in: values change randomly every few cycles.
  always @(negedge clk) begin
    if ($urandom_range(0, 3) == 0) begin
      for (int s = 0; s < NUM; s++) rep_min[s] = HW_W'($urandom_range(0, 128));
      rep_seen = NUM'($urandom);
    end
  end

  task automatic uart_get(output logic [7:0] b, output time t_start);
    @(negedge txd);
    t_start = $time;
    #(CPB * 10 / 2);                       // middle of start bit
    checks++; if (txd !== 1'b0) begin failures++; $display("FAIL start bit"); end
    for (int i = 0; i < 8; i++) begin #(CPB * 10); b[i] = txd; end
    #(CPB * 10);
    checks++; if (txd !== 1'b1) begin failures++; $display("FAIL stop bit"); end
  endtask

  int frames = 0;
  initial begin
    logic [7:0] b, e;
    time t0, t1, tf;
    rst_n = 0; run = 0;
    for (int s = 0; s < NUM; s++) rep_min[s] = '0;
    rep_seen = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) @(posedge clk);
    checks++; if (txd !== 1'b1) begin failures++; $display("FAIL idle line"); end
    #1 run = 1;
    for (int f = 0; f < 6; f++) begin
      for (int k = 0; k < NBYTES; k++) begin
        uart_get(b, t1);
        if (k == 0) tf = t1;
        if (k == 1) begin
          checks++;
          if (t1 - t0 < 10 * CPB * 10 || t1 - t0 > 10 * CPB * 10 + 40) begin
            failures++; $display("FAIL byte spacing %0t", t1 - t0);
          end
        end
        t0 = t1;
        e = (expq.size() > 0) ? expq.pop_front() : 8'hxx;
        checks++;
        if (b !== e) begin failures++; $display("FAIL frame %0d byte %0d got %h exp %h", f, k, b, e); end
      end
      frames++;
    end
    run = 0;
    checks++; if (frames != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * CPB * 10 * NBYTES * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
