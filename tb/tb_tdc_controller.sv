`timescale 1ns / 1ps
// tb_tdc_controller -- random test of the sensory controller against a
// cycle-level reference model written with $countones. Sensor words are built
// with a chosen Hamming weight (mostly near 64, sometimes far off), thresholds,
// enable, tag_clear, nmi_clear and report_take are randomized, and every output
// is compared each cycle. It also checks the 2-cycle capture-to-request latency
// on a directed violation. Default sizes: 2 sensors x 128 bits.
module tb_tdc_controller;
  localparam int NUM = 2, WIDTH = 128, HW_W = 8;

  logic clk, rst_n;
  logic [NUM-1:0][WIDTH-1:0] sens;
  logic enable, tag_clear, nmi_clear, report_take;
  logic [NUM-1:0][HW_W-1:0] thr_lo, thr_hi, hw, rep_min;
  logic [NUM-1:0] violation, fault_tags, rep_seen;
  logic nmi_req;
  int checks = 0, failures = 0;

  tdc_controller #(.NUM(NUM), .WIDTH(WIDTH)) dut (.*);

  initial clk = 0;
  always #1.25 clk = ~clk;

  // Reference state.
  logic [NUM-1:0][WIDTH-1:0] r_sq;
  logic [NUM-1:0][HW_W-1:0]  r_hw, r_min;
  logic [NUM-1:0]            r_viol, r_tags, r_seen;
  logic                      r_nmi;

  function automatic logic [WIDTH-1:0] word_with_hw(int w);
    logic [WIDTH-1:0] x = '0;
    int placed = 0;
    while (placed < w) begin
      int b = $urandom_range(0, WIDTH - 1);
      if (!x[b]) begin x[b] = 1'b1; placed++; end
    end
    return x;
  endfunction

  task automatic drive_random();
    for (int s = 0; s < NUM; s++) begin
      int w = ($urandom_range(0, 9) == 0) ? $urandom_range(0, WIDTH) : $urandom_range(58, 70);
      sens[s] = word_with_hw(w);
    end
    enable      = $urandom_range(0, 7) != 0;
    tag_clear   = $urandom_range(0, 15) == 0;
    nmi_clear   = $urandom_range(0, 7) == 0;
    report_take = $urandom_range(0, 7) == 0;
  endtask

  task automatic ref_step();
    logic [NUM-1:0] vn;
    for (int s = 0; s < NUM; s++)
      vn[s] = enable && ((r_hw[s] < thr_lo[s]) || (r_hw[s] > thr_hi[s]));
    for (int s = 0; s < NUM; s++) begin
      if (report_take) begin r_min[s] = r_hw[s]; r_seen[s] = vn[s]; end
      else begin
        if (r_hw[s] < r_min[s]) r_min[s] = r_hw[s];
        r_seen[s] = r_seen[s] | vn[s];
      end
    end
    r_tags = (tag_clear ? '0 : r_tags) | vn;
    r_nmi  = (r_nmi && !nmi_clear) || (|vn);
    r_viol = vn;
    for (int s = 0; s < NUM; s++) r_hw[s] = HW_W'($countones(r_sq[s]));
    r_sq = sens;
  endtask

  task automatic compare();
    checks++;
    if (hw !== r_hw || violation !== r_viol || fault_tags !== r_tags ||
        nmi_req !== r_nmi || rep_min !== r_min || rep_seen !== r_seen) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t hw=%h/%h viol=%b/%b tags=%b/%b nmi=%b/%b min=%h/%h seen=%b/%b",
                 $time, hw, r_hw, violation, r_viol, fault_tags, r_tags, nmi_req, r_nmi,
                 rep_min, r_min, rep_seen, r_seen);
    end
  endtask

  initial begin
    rst_n = 0; sens = '0; enable = 0; tag_clear = 0; nmi_clear = 0; report_take = 0;
    for (int s = 0; s < NUM; s++) begin thr_lo[s] = 8'd60; thr_hi[s] = 8'd68; end
    r_sq = '0; r_hw = '0; r_min = '1; r_viol = '0; r_tags = '0; r_seen = '0; r_nmi = 0;
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1;
    // Random phase.
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      drive_random();
      if (i % 500 == 0)
        for (int s = 0; s < NUM; s++) begin
          thr_lo[s] = HW_W'($urandom_range(50, 64));
          thr_hi[s] = HW_W'($urandom_range(64, 78));
        end
      @(posedge clk);
      ref_step();
      #0.1 compare();
    end
    // Directed latency: quiet, then one out-of-window word on sensor 1.
    @(negedge clk);
    enable = 1; tag_clear = 1; nmi_clear = 1; report_take = 0;
    for (int s = 0; s < NUM; s++) begin thr_lo[s] = 8'd60; thr_hi[s] = 8'd68; sens[s] = word_with_hw(64); end
    repeat (4) @(negedge clk);
    tag_clear = 0; nmi_clear = 0;
    sens[1] = word_with_hw(20);
    @(negedge clk);                       // captured at the edge before this
    sens[1] = word_with_hw(64);
    @(posedge clk); #0.1;                 // edge k+1: HW visible
    checks++; if (hw[1] != 8'd20 || nmi_req) begin failures++; $display("FAIL latency HW stage"); end
    @(posedge clk); #0.1;                 // edge k+2: request raised
    checks++; if (!nmi_req || fault_tags != 2'b10) begin failures++; $display("FAIL latency NMI stage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
