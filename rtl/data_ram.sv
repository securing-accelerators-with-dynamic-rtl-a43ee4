// data_ram: tagged data memory of the SoC (coupled tagging scheme).
//
// Each 32-bit word is stored together with 4 tag bits, one per byte, in the
// same entry of one array: a byte and its tag share an address. At the
// default 32 KB of data this adds 4 KB of tags, the 32 KB -> 36 KB growth the
// DIFT extension of the SoC reports. A byte-enabled write updates the data
// byte and its tag bit together; a read returns the word and its four tags.
//
// Interface: single-beat tagged AXI4 slave (see axi_to_mem); a write is
// answered one cycle after its handshake, a read delivers data one cycle
// after its handshake. The memory is a plain synchronous array that maps to
// block RAM; its port and timing are this design's choice.
module data_ram
  import dift_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t axi_req,
  output axi_rsp_t axi_rsp
);

  localparam int unsigned WORDS = SIZE_BYTES / StrbW;
  localparam int unsigned AW    = $clog2(WORDS);

  logic          mem_req, mem_we;
  logic [AW-1:0] mem_addr;
  strb_t         mem_be;
  data_t         mem_wdata, mem_rdata;
  tag_t          mem_wtag, mem_rtag;

  axi_to_mem #(.WORDS(WORDS)) u_port (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .mem_req, .mem_we, .mem_addr, .mem_be, .mem_wdata, .mem_wtag,
    .mem_rdata, .mem_rtag
  );

  // One entry = {tag bit, data byte} for each of the four byte lanes.
  typedef logic [8:0] tbyte_t;
  tbyte_t mem [WORDS][StrbW];

  always_ff @(posedge clk) begin
    if (mem_req) begin
      for (int b = 0; b < StrbW; b++) begin
        if (mem_we && mem_be[b]) mem[mem_addr][b] <= {mem_wtag[b], mem_wdata[8*b +: 8]};
        if (!mem_we) begin
          mem_rdata[8*b +: 8] <= mem[mem_addr][b][7:0];
          mem_rtag[b]         <= mem[mem_addr][b][8];
        end
      end
    end
  end

endmodule
