`timescale 1ns / 1ps
// tb_nmi_unit -- random and directed test of the NMI extension against a
// reference model: taking the NMI only at an instruction boundary with NMIE
// set, redirect to the vector, saving mnepc/mncause, masking until mnret,
// returning to mnepc, the one-cycle acknowledge and CSR read/write access.
module tb_nmi_unit;
  import tdc_pkg::*;
  localparam int XLEN = 32;
  localparam logic [31:0] VEC = 32'h0000_0100, CAUSE = 32'h8000_0000;

  logic clk, rst_n, nmi_req, can_take, mnret, csr_we, csr_hit, redirect, nmi_taken, nmie;
  logic [31:0] pc, csr_wdata, csr_rdata, redirect_pc;
  logic [11:0] csr_addr;
  int checks = 0, failures = 0, takes = 0, rets = 0;

  nmi_unit dut (.*);

  initial clk = 0;
  always #2.5 clk = ~clk;

  logic [31:0] r_scratch, r_epc, r_cause;
  logic r_nmie, r_taken;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t got %h exp %h", what, $time, got, exp);
    end
  endtask

  initial begin
    rst_n = 0; nmi_req = 0; can_take = 0; mnret = 0; csr_we = 0; csr_addr = '0;
    csr_wdata = '0; pc = '0;
    r_scratch = 0; r_epc = 0; r_cause = 0; r_nmie = 1; r_taken = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      logic take;
      @(negedge clk);
      nmi_req  = $urandom_range(0, 3) == 0;
      can_take = $urandom_range(0, 1) == 1;
      mnret    = !r_nmie && ($urandom_range(0, 5) == 0);
      pc       = $urandom & 32'hFFFF_FFFE;
      csr_we   = $urandom_range(0, 9) == 0;
      case ($urandom_range(0, 4))
        0: csr_addr = CSR_MNSCRATCH;
        1: csr_addr = CSR_MNEPC;
        2: csr_addr = CSR_MNCAUSE;
        3: csr_addr = CSR_MNSTATUS;
        default: csr_addr = 12'h300;
      endcase
      csr_wdata = $urandom;
      #0.5;
      take = nmi_req && r_nmie && can_take;
      // Combinational outputs.
      chk("redirect", redirect, take || mnret);
      if (take) chk("vector", redirect_pc, VEC);
      else if (mnret) chk("return pc", redirect_pc, r_epc);
      chk("csr_hit", csr_hit, csr_addr inside {CSR_MNSCRATCH, CSR_MNEPC, CSR_MNCAUSE, CSR_MNSTATUS});
      case (csr_addr)
        CSR_MNSCRATCH: chk("rd scratch", csr_rdata, r_scratch);
        CSR_MNEPC:     chk("rd epc", csr_rdata, r_epc);
        CSR_MNCAUSE:   chk("rd cause", csr_rdata, r_cause);
        CSR_MNSTATUS:  chk("rd status", csr_rdata, {28'd0, r_nmie, 3'd0});
        default:       chk("rd other", csr_rdata, 0);
      endcase
      chk("nmie", nmie, r_nmie);
      chk("taken", nmi_taken, r_taken);
      // Reference update at the coming edge.
      if (csr_we) case (csr_addr)
        CSR_MNSCRATCH: r_scratch = csr_wdata;
        CSR_MNEPC:     r_epc = {csr_wdata[31:1], 1'b0};
        CSR_MNCAUSE:   r_cause = csr_wdata;
        CSR_MNSTATUS:  r_nmie = csr_wdata[3];
        default: ;
      endcase
      if (take) begin r_epc = pc; r_cause = CAUSE; r_nmie = 0; takes++; end
      else if (mnret) begin r_nmie = 1; rets++; end
      r_taken = take;
    end
    checks++;
    if (takes == 0 || rets == 0) begin failures++; $display("FAIL no take/return seen"); end
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
