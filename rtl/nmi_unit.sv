`timescale 1ns / 1ps
// nmi_unit -- non-maskable interrupt extension for the processor core.
//
// When the sensor controller reports a disturbance the core must leave what it
// is doing and run a software sanity check of its own units. This block is the
// part of the core's CSR/trap logic that makes that happen:
//   * nmi_req (already synchronized to the core clock) is taken at the next
//     instruction boundary (can_take) whenever NMIs are enabled (NMIE). It
//     outranks every other trap, so the core must give redirect priority to
//     this block.
//   * Taking it, in the same cycle: redirect = 1 and redirect_pc = NMI_VECTOR
//     (the sanity-check handler). On the clock edge mnepc <= pc,
//     mncause <= NMI_CAUSE, NMIE <= 0 (no nesting), and nmi_taken pulses for
//     one cycle; nmi_taken is the acknowledge sent back to the sensor
//     controller to drop its request.
//   * mnret (the handler's return) gives redirect = 1, redirect_pc = mnepc,
//     and sets NMIE again on the clock edge.
// The CSRs use the RISC-V resumable-NMI (Smrnmi) numbers: mnscratch 0x740,
// mnepc 0x741, mncause 0x742, mnstatus 0x744 with NMIE in bit 3; only these
// fields exist here. An external NMI from the sensor controller with highest
// priority that enters a predefined check routine follows the design
// description; the CSR layout, the vector, the cause value and NMIE = 1 out of
// reset (the monitor is armed from the start) are this design's choices.
// CSR reads are combinational; writes take effect on the clock edge.
module nmi_unit #(
  parameter int unsigned      XLEN       = 32,
  parameter logic [XLEN-1:0]  NMI_VECTOR = 32'h0000_0100,
  parameter logic [XLEN-1:0]  NMI_CAUSE  = 32'h8000_0000,
  parameter logic             NMIE_RESET = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            nmi_req,      // synchronized request (level)
  input  logic            can_take,     // core is at an instruction boundary
  input  logic [XLEN-1:0] pc,           // PC of the instruction to resume
  input  logic            mnret,        // core executes mnret
  input  logic [11:0]     csr_addr,
  input  logic            csr_we,
  input  logic [XLEN-1:0] csr_wdata,
  output logic [XLEN-1:0] csr_rdata,
  output logic            csr_hit,      // csr_addr is one of ours
  output logic            redirect,
  output logic [XLEN-1:0] redirect_pc,
  output logic            nmi_taken,    // one-cycle acknowledge
  output logic            nmie
);
  import tdc_pkg::*;

  logic [XLEN-1:0] mnscratch, mnepc, mncause;
  logic            take;

  assign take        = nmi_req && nmie && can_take;
  assign redirect    = take || mnret;
  assign redirect_pc = take ? NMI_VECTOR : mnepc;

  always_comb begin
    csr_hit   = 1'b1;
    csr_rdata = '0;
    unique case (csr_addr)
      CSR_MNSCRATCH: csr_rdata = mnscratch;
      CSR_MNEPC:     csr_rdata = mnepc;
      CSR_MNCAUSE:   csr_rdata = mncause;
      CSR_MNSTATUS:  csr_rdata[MNSTATUS_NMIE] = nmie;
      default:       csr_hit = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mnscratch <= '0;
      mnepc     <= '0;
      mncause   <= '0;
      nmie      <= NMIE_RESET;
      nmi_taken <= 1'b0;
    end else begin
      nmi_taken <= take;
      if (csr_we) begin
        unique case (csr_addr)
          CSR_MNSCRATCH: mnscratch <= csr_wdata;
          CSR_MNEPC:     mnepc     <= {csr_wdata[XLEN-1:1], 1'b0};
          CSR_MNCAUSE:   mncause   <= csr_wdata;
          CSR_MNSTATUS:  nmie      <= csr_wdata[MNSTATUS_NMIE];
          default: ;
        endcase
      end
      if (take) begin
        mnepc   <= {pc[XLEN-1:1], 1'b0};
        mncause <= NMI_CAUSE;
        nmie    <= 1'b0;
      end else if (mnret) begin
        nmie    <= 1'b1;
      end
    end
  end

  // Handshake rules: after the acknowledge NMIs are masked, and the core may
  // only return (mnret) from inside the handler, i.e. while NMIs are masked.
  a_ack_once:   assert property (@(posedge clk) disable iff (!rst_n) nmi_taken |-> !nmie);
  a_mnret_in_handler: assert property (@(posedge clk) disable iff (!rst_n)
                                       mnret |-> !nmie)
    else $error("mnret executed outside the NMI handler");

endmodule
