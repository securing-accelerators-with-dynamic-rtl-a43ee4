// instr_ram: instruction memory of the SoC.
//
// The host (the ARM processing system) writes the program through a
// single-beat AXI4 slave port before the core starts; the core fetches
// through a separate read port. This memory is not extended for DIFT: tags
// written over AXI are dropped and reads return tag 0.
//
// Fetch port timing: fetch_req with fetch_addr (byte address) in one cycle,
// fetch_rdata valid in the next cycle (fetch_rvalid). AXI timing as in
// axi_to_mem. The size (32 KB) and the two-port arrangement are this
// design's choice; the published design only names the memory.
module instr_ram
  import dift_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t axi_req,
  output axi_rsp_t axi_rsp,
  input  logic     fetch_req,
  input  addr_t    fetch_addr,
  output data_t    fetch_rdata,
  output logic     fetch_rvalid
);

  localparam int unsigned WORDS = SIZE_BYTES / StrbW;
  localparam int unsigned AW    = $clog2(WORDS);

  logic          mem_req, mem_we;
  logic [AW-1:0] mem_addr;
  strb_t         mem_be;
  data_t         mem_wdata, mem_rdata;
  tag_t          mem_wtag;

  axi_to_mem #(.WORDS(WORDS)) u_port (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .mem_req, .mem_we, .mem_addr, .mem_be, .mem_wdata, .mem_wtag,
    .mem_rdata, .mem_rtag('0)
  );

  logic [7:0] mem [WORDS][StrbW];

  // Port A: host load / read-back
  always_ff @(posedge clk) begin
    if (mem_req) begin
      for (int b = 0; b < StrbW; b++) begin
        if (mem_we && mem_be[b]) mem[mem_addr][b] <= mem_wdata[8*b +: 8];
        if (!mem_we) mem_rdata[8*b +: 8] <= mem[mem_addr][b];
      end
    end
  end

  // Port B: instruction fetch
  always_ff @(posedge clk) begin
    if (fetch_req) begin
      for (int b = 0; b < StrbW; b++) fetch_rdata[8*b +: 8] <= mem[fetch_addr[AW+1:2]][b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fetch_rvalid <= 1'b0;
    else        fetch_rvalid <= fetch_req;
  end

endmodule
