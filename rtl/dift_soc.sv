// dift_soc: FPGA-logic part of a PULPino-style SoC extended for DIFT.
//
// Three AXI masters share a tagged AXI4 interconnect: the host port (the ARM
// processing system, which loads program and data), the data port of the
// tag-aware RISC-V core, and the DIFT shell that encloses the obfuscator
// accelerator. The slaves are the instruction RAM (no tags), the tagged data
// RAM (one tag bit per byte) and an AXI-to-APB bridge whose only APB slave is
// the shell, which holds the accelerator's registers and its own.
//
// Address map: 0x0000_0000 instruction RAM (32 KB), 0x0010_0000 data RAM
// (32 KB + 4 KB of tags), 0x1A10_0000 accelerator and shell registers.
// The core itself is not part of this module: its data port (tagged AXI
// master) and instruction-fetch port are ports here. dift_en selects whether
// the shell protects the accelerator (1) or is transparent (0).
// The block structure follows the SoC's published block diagram; the bus
// protocol details and the address map are this design's choices.
module dift_soc
  import dift_pkg::*;
#(
  parameter int unsigned IRAM_BYTES = 32768,
  parameter int unsigned DRAM_BYTES = 32768,
  parameter int unsigned IMG_W      = 128,
  parameter int unsigned IMG_H      = 96
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     dift_en,
  // host (ARM processing system) AXI master
  input  axi_req_t host_req,
  output axi_rsp_t host_rsp,
  // core data port (tagged AXI master)
  input  axi_req_t core_req,
  output axi_rsp_t core_rsp,
  // core instruction fetch
  input  logic     fetch_req,
  input  addr_t    fetch_addr,
  output data_t    fetch_rdata,
  output logic     fetch_rvalid,
  // interrupts to the core
  output logic     irq_acc_done,
  output logic     irq_dift
);

  localparam int unsigned NM = 3;
  localparam int unsigned NS = 3;

  axi_req_t [NM-1:0] m_req;
  axi_rsp_t [NM-1:0] m_rsp;
  axi_req_t [NS-1:0] s_req;
  axi_rsp_t [NS-1:0] s_rsp;
  axi_req_t          shell_req;
  axi_rsp_t          shell_rsp;
  apb_req_t [0:0]    apb_req;
  apb_rsp_t [0:0]    apb_rsp;

  assign m_req[0] = host_req;
  assign m_req[1] = core_req;
  assign m_req[2] = shell_req;
  assign host_rsp  = m_rsp[0];
  assign core_rsp  = m_rsp[1];
  assign shell_rsp = m_rsp[2];

  axi_interconnect #(
    .NM(NM), .NS(NS),
    .SLV_BASE({APB_BASE, DRAM_BASE, IRAM_BASE}),
    .SLV_MASK({~(APB_SIZE - 1), ~(AddrW'(DRAM_BYTES) - 1), ~(AddrW'(IRAM_BYTES) - 1)})
  ) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  instr_ram #(.SIZE_BYTES(IRAM_BYTES)) u_iram (
    .clk, .rst_n, .axi_req(s_req[0]), .axi_rsp(s_rsp[0]),
    .fetch_req, .fetch_addr, .fetch_rdata, .fetch_rvalid
  );

  data_ram #(.SIZE_BYTES(DRAM_BYTES)) u_dram (
    .clk, .rst_n, .axi_req(s_req[1]), .axi_rsp(s_rsp[1])
  );

  apb_interconnect #(.NPS(1)) u_apb (
    .clk, .rst_n, .axi_req(s_req[2]), .axi_rsp(s_rsp[2]), .apb_req, .apb_rsp
  );

  dift_shell #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_shell (
    .clk, .rst_n, .dift_en,
    .apb_req(apb_req[0]), .apb_rsp(apb_rsp[0]),
    .axi_req(shell_req), .axi_rsp(shell_rsp),
    .irq_done(irq_acc_done), .irq_viol(irq_dift)
  );

endmodule
