`timescale 1ns / 1ps
// fault_monitor_top -- on-chip part of the glitch/radiation detection and
// response framework for a soft RISC-V processor on an FPGA.
//
// Delay-based sensors placed next to the processor's blocks see the supply
// disturbance of a glitch, a laser or a particle strike as a change in their
// Hamming weight, often before any logic fails. This top level holds
//   * NUM tdc_sensor instances (behavioural models of the placed carry-chain
//     sensors), one per watched region, e.g. sensor 0 beside the ALU;
//   * tdc_calibrator, which tunes each sensor's initial delay to HW ~= WIDTH/2
//     and derives the alarm windows;
//   * tdc_controller, which compares every sample with its window, keeps fault
//     tags for the housekeeping controller and raises an interrupt request;
//   * tdc_readback, a UART that streams tagged sensor readings out;
//   * sync_2ff crossings between the sample clock (tdc_clk) and the core clock;
//   * nmi_unit, the core's non-maskable-interrupt extension that sends the core
//     into its sanity-check routine.
// The processor itself, its memories, the housekeeping controller, the binary
// translator and the partial-reconfiguration path are outside this block: the
// core side appears as the nmi_unit's pipeline/CSR ports, the housekeeping
// side as cal_start, tag_clear, fault_tags and uart_txd.
//
// Clocks and resets: tdc_clk samples the sensors and runs calibrator,
// controller and readback (it is meant to be faster than the core clock);
// core_clk runs nmi_unit. Each reset is active low, asserted asynchronously
// and assumed released synchronously to its clock. Detection is enabled once a
// calibration has completed and while none is running. Timing from a sample
// outside the window to the core: 3 tdc_clk edges to nmi_req in the sensor
// domain, then 2 core_clk edges of synchronization before the NMI can be taken.
// skew_ps is a modelling input of the sensor models (the disturbance at each
// sensor, in ps), not a pin of the real chip.
module fault_monitor_top #(
  parameter int unsigned     NUM          = tdc_pkg::NUM_SENSORS,
  parameter int unsigned     WIDTH        = tdc_pkg::TDC_WIDTH,
  parameter int unsigned     CAL_STAGES   = tdc_pkg::CAL_STAGES,
  parameter int unsigned     AVG_LOG      = 8,
  parameter int unsigned     MARGIN       = 4,
  parameter int unsigned     CLKS_PER_BIT = 3472,
  parameter int unsigned     XLEN         = 32,
  parameter logic [XLEN-1:0] NMI_VECTOR   = 32'h0000_0100,
  localparam int unsigned    HW_W         = $clog2(WIDTH + 1),
  localparam int unsigned    CAL_W        = $clog2(CAL_STAGES + 1)
) (
  // sensor / monitor domain
  input  logic                      tdc_clk,
  input  logic                      tdc_rst_n,
  input  logic [NUM-1:0][15:0]      skew_ps,      // modelled disturbance per sensor
  // housekeeping side
  input  logic                      cal_start,    // pulse: (re)calibrate sensors
  input  logic                      tag_clear,    // pulse: clear fault tags
  output logic                      cal_busy,
  output logic                      cal_done,
  output logic [NUM-1:0]            fault_tags,
  output logic [NUM-1:0][HW_W-1:0]  sensor_hw,    // current weights
  output logic [NUM-1:0][CAL_W-1:0] sensor_calib, // chosen calibration settings
  output logic [NUM-1:0]            violation,    // current sample out of window
  output logic                      uart_txd,     // sensor readback UART
  output logic                      frame_sent,   // readback frame finished
  // processor core side
  input  logic                      core_clk,
  input  logic                      core_rst_n,
  input  logic                      can_take,
  input  logic [XLEN-1:0]           pc,
  input  logic                      mnret,
  input  logic [11:0]               csr_addr,
  input  logic                      csr_we,
  input  logic [XLEN-1:0]           csr_wdata,
  output logic [XLEN-1:0]           csr_rdata,
  output logic                      csr_hit,
  output logic                      redirect,
  output logic [XLEN-1:0]           redirect_pc,
  output logic                      nmi_taken,
  output logic                      nmie          // NMIs enabled in the core
);

  logic [NUM-1:0][WIDTH-1:0] sens;
  logic [NUM-1:0][HW_W-1:0]  thr_lo, thr_hi, rep_min;
  logic [NUM-1:0]            rep_seen;
  logic                      nmi_req_tdc, nmi_req_core;
  logic                      ack_core, ack_tdc, ack_tdc_q, report_take;
  logic                      enable;

  // Sensors.
  for (genvar s = 0; s < NUM; s++) begin : g_sensor
    tdc_sensor #(.WIDTH(WIDTH), .CAL_STAGES(CAL_STAGES)) u_tdc (
      .ref_clk (tdc_clk),
      .calib   (sensor_calib[s]),
      .skew_ps (int'(signed'(skew_ps[s]))),
      .sens_out(sens[s])
    );
  end

  tdc_calibrator #(
    .NUM(NUM), .WIDTH(WIDTH), .CAL_STAGES(CAL_STAGES), .AVG_LOG(AVG_LOG),
    .MARGIN(MARGIN), .CAL_RESET(CAL_STAGES / 2)
  ) u_cal (
    .clk(tdc_clk), .rst_n(tdc_rst_n), .start(cal_start), .hw(sensor_hw),
    .calib(sensor_calib), .thr_lo(thr_lo), .thr_hi(thr_hi),
    .busy(cal_busy), .done(cal_done)
  );

  assign enable = cal_done && !cal_busy;

  // Acknowledge from the core: a one-core-cycle pulse, stretched into a level
  // until the request has dropped, then synchronized and edge-detected.
  logic ack_hold;
  always_ff @(posedge core_clk or negedge core_rst_n) begin
    if (!core_rst_n)    ack_hold <= 1'b0;
    else if (nmi_taken) ack_hold <= 1'b1;
    else if (!nmi_req_core) ack_hold <= 1'b0;
  end
  assign ack_core = ack_hold;

  sync_2ff u_sync_ack (.clk(tdc_clk), .rst_n(tdc_rst_n), .d(ack_core), .q(ack_tdc));
  always_ff @(posedge tdc_clk or negedge tdc_rst_n) begin
    if (!tdc_rst_n) ack_tdc_q <= 1'b0;
    else            ack_tdc_q <= ack_tdc;
  end

  tdc_controller #(.NUM(NUM), .WIDTH(WIDTH)) u_ctrl (
    .clk(tdc_clk), .rst_n(tdc_rst_n), .sens(sens), .enable(enable),
    .thr_lo(thr_lo), .thr_hi(thr_hi), .tag_clear(tag_clear),
    .nmi_clear(ack_tdc && !ack_tdc_q), .report_take(report_take),
    .hw(sensor_hw), .violation(violation), .fault_tags(fault_tags),
    .nmi_req(nmi_req_tdc), .rep_min(rep_min), .rep_seen(rep_seen)
  );

  tdc_readback #(.NUM(NUM), .HW_W(HW_W), .CLKS_PER_BIT(CLKS_PER_BIT)) u_rb (
    .clk(tdc_clk), .rst_n(tdc_rst_n), .run(1'b1), .rep_min(rep_min),
    .rep_seen(rep_seen), .report_take(report_take), .txd(uart_txd),
    .frame_sent(frame_sent)
  );

  sync_2ff u_sync_nmi (.clk(core_clk), .rst_n(core_rst_n), .d(nmi_req_tdc), .q(nmi_req_core));

  nmi_unit #(.XLEN(XLEN), .NMI_VECTOR(NMI_VECTOR)) u_nmi (
    .clk(core_clk), .rst_n(core_rst_n), .nmi_req(nmi_req_core),
    .can_take(can_take), .pc(pc), .mnret(mnret), .csr_addr(csr_addr),
    .csr_we(csr_we), .csr_wdata(csr_wdata), .csr_rdata(csr_rdata),
    .csr_hit(csr_hit), .redirect(redirect), .redirect_pc(redirect_pc),
    .nmi_taken(nmi_taken), .nmie(nmie)
  );

endmodule
