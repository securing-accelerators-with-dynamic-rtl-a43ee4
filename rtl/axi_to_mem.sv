// axi_to_mem: single-beat AXI4 slave in front of a synchronous SRAM port.
//
// One transaction is served at a time. A write is taken when AW and W are both
// valid (AW and W handshake in the same cycle), is written to the SRAM in that
// cycle and answered with an OKAY on B. A read is taken when no write is
// pending, the SRAM is read in the AR handshake cycle and the word, with its
// tags, is held on R until the master takes it. Writes win over reads.
//
// Timing: write = AW/W handshake, B valid from the next cycle;
//         read  = AR handshake, R valid from the next cycle.
// The word address is taken from the low address bits (byte address / 4);
// the interconnect has already decoded the base. Tags are passed through
// untouched: a memory with no tag storage simply ties mem_rtag to zero.
// The handshake scheme is this design's own choice.
module axi_to_mem
  import dift_pkg::*;
#(
  parameter int unsigned WORDS = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  axi_req_t                 axi_req,
  output axi_rsp_t                 axi_rsp,
  output logic                     mem_req,
  output logic                     mem_we,
  output logic [$clog2(WORDS)-1:0] mem_addr,
  output strb_t                    mem_be,
  output data_t                    mem_wdata,
  output tag_t                     mem_wtag,
  input  data_t                    mem_rdata,
  input  tag_t                     mem_rtag
);

  localparam int unsigned AW = $clog2(WORDS);

  typedef enum logic [1:0] {S_IDLE, S_BRESP, S_RDATA} state_e;
  state_e state_q, state_d;

  logic do_write, do_read;

  always_comb begin
    do_write = (state_q == S_IDLE) && axi_req.aw_valid && axi_req.w_valid;
    do_read  = (state_q == S_IDLE) && !do_write && axi_req.ar_valid;

    mem_req   = do_write || do_read;
    mem_we    = do_write;
    mem_addr  = do_write ? axi_req.aw_addr[AW+1:2] : axi_req.ar_addr[AW+1:2];
    mem_be    = axi_req.w_strb;
    mem_wdata = axi_req.w_data;
    mem_wtag  = axi_req.w_tag;

    axi_rsp          = '0;
    axi_rsp.aw_ready = do_write;
    axi_rsp.w_ready  = do_write;
    axi_rsp.ar_ready = do_read;
    axi_rsp.b_valid  = (state_q == S_BRESP);
    axi_rsp.b_resp   = RESP_OKAY;
    axi_rsp.r_valid  = (state_q == S_RDATA);
    axi_rsp.r_data   = mem_rdata;
    axi_rsp.r_tag    = mem_rtag;
    axi_rsp.r_resp   = RESP_OKAY;

    state_d = state_q;
    unique case (state_q)
      S_IDLE:  if (do_write) state_d = S_BRESP; else if (do_read) state_d = S_RDATA;
      S_BRESP: if (axi_req.b_ready) state_d = S_IDLE;
      S_RDATA: if (axi_req.r_ready) state_d = S_IDLE;
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= S_IDLE;
    else        state_q <= state_d;
  end

endmodule
