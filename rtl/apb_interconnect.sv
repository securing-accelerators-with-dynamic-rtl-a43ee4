// apb_interconnect: AXI4-to-APB bridge with an APB address decoder.
//
// The peripheral side of the SoC, where the accelerator's memory-mapped
// registers live. A single-beat AXI4 write (AW and W together) or read (AR) is
// taken when the bridge is idle, turned into one APB3 transfer (SETUP phase,
// then ACCESS until PREADY) on the APB slave chosen by address bits [15:12]
// (4 KB per slave), and answered on B or R. PSLVERR becomes SLVERR; an
// address beyond the last slave gets DECERR without an APB transfer. Writes
// win over reads. Tags are not carried onto APB: registers are not tagged,
// and R returns tag 0.
//
// Timing: handshake, SETUP, ACCESS (>= 1 cycle), then the response; a
// zero-wait-state APB slave gives a response 3 cycles after the handshake.
// The bridge structure and the 4 KB slots follow the PULPino style and are
// this design's choice; the published design only names an APB interconnect.
module apb_interconnect
  import dift_pkg::*;
#(
  parameter int unsigned NPS = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  axi_req_t           axi_req,
  output axi_rsp_t           axi_rsp,
  output apb_req_t [NPS-1:0] apb_req,
  input  apb_rsp_t [NPS-1:0] apb_rsp
);

  localparam int unsigned PW = (NPS > 1) ? $clog2(NPS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_ACCESS, S_BRESP, S_RDATA} state_e;
  state_e state_q;

  logic          write_q;
  addr_t         addr_q;
  data_t         wdata_q, rdata_q;
  resp_e         resp_q;
  logic [PW-1:0] sel_q;
  logic          take_w, take_r, hit;
  addr_t         new_addr;
  logic [3:0]    slot;
  apb_rsp_t      cur;

  always_comb begin
    take_w   = (state_q == S_IDLE) && axi_req.aw_valid && axi_req.w_valid;
    take_r   = (state_q == S_IDLE) && !take_w && axi_req.ar_valid;
    new_addr = take_w ? axi_req.aw_addr : axi_req.ar_addr;
    slot     = new_addr[15:12];
    hit      = (32'(slot) < NPS);
    cur      = apb_rsp[sel_q];

    axi_rsp          = '0;
    axi_rsp.aw_ready = take_w;
    axi_rsp.w_ready  = take_w;
    axi_rsp.ar_ready = take_r;
    axi_rsp.b_valid  = (state_q == S_BRESP);
    axi_rsp.b_resp   = resp_q;
    axi_rsp.r_valid  = (state_q == S_RDATA);
    axi_rsp.r_data   = rdata_q;
    axi_rsp.r_resp   = resp_q;

    for (int p = 0; p < NPS; p++) begin
      apb_req[p].psel    = ((state_q == S_SETUP) || (state_q == S_ACCESS)) && (sel_q == PW'(p));
      apb_req[p].penable = (state_q == S_ACCESS);
      apb_req[p].pwrite  = write_q;
      apb_req[p].paddr   = {20'h0, addr_q[11:0]};
      apb_req[p].pwdata  = wdata_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      write_q <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      rdata_q <= '0;
      resp_q  <= RESP_OKAY;
      sel_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (take_w || take_r) begin
          write_q <= take_w;
          addr_q  <= new_addr;
          wdata_q <= axi_req.w_data;
          sel_q   <= PW'(slot);
          rdata_q <= '0;
          if (hit) begin
            state_q <= S_SETUP;
          end else begin
            resp_q  <= RESP_DECERR;
            state_q <= take_w ? S_BRESP : S_RDATA;
          end
        end
        S_SETUP:  state_q <= S_ACCESS;
        S_ACCESS: if (cur.pready) begin
          resp_q  <= cur.pslverr ? RESP_SLVERR : RESP_OKAY;
          rdata_q <= write_q ? '0 : cur.prdata;
          state_q <= write_q ? S_BRESP : S_RDATA;
        end
        S_BRESP:  if (axi_req.b_ready) state_q <= S_IDLE;
        S_RDATA:  if (axi_req.r_ready) state_q <= S_IDLE;
        default:  state_q <= S_IDLE;
      endcase
    end
  end

  // APB rule: once selected, address and data stay put until PREADY.
  a_apb_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_ACCESS) && !cur.pready |=> (state_q == S_ACCESS) && $stable(addr_q));

endmodule
