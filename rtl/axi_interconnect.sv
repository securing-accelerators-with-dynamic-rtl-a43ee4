// axi_interconnect: tagged single-beat AXI4 interconnect.
//
// NM masters reach NS slaves through two independent paths, one for writes
// (AW, W, B) and one for reads (AR, R), so a read and a write can be in flight
// at the same time. Each path serves one transaction at a time:
//   1. a round-robin arbiter picks a master that has a request (AW or AR
//      valid) and registers the grant and the decoded slave;
//   2. the request channels of that master are routed to the slave; AW and W
//      are each passed until their own handshake;
//   3. the response (B or R) is routed back and its handshake frees the path.
// An address that no slave claims gets a DECERR from the interconnect itself.
// The tag bits on W and R travel in the same beat as the data, so tags add no
// cycles. A slave i claims an address when (addr & SLV_MASK[i]) == SLV_BASE[i].
//
// Timing: the grant costs one cycle; after that the path is combinational from
// master to slave and back. The arbitration scheme, the single outstanding
// transaction per path and the address map are this design's choices; the
// published design only names an AXI4 interconnect extended with tags.
module axi_interconnect
  import dift_pkg::*;
#(
  parameter int unsigned NM = 3,
  parameter int unsigned NS = 3,
  parameter logic [NS-1:0][AddrW-1:0] SLV_BASE = {APB_BASE, DRAM_BASE, IRAM_BASE},
  parameter logic [NS-1:0][AddrW-1:0] SLV_MASK = {32'hFFFF_0000, 32'hFFFF_8000, 32'hFFFF_8000}
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axi_req_t [NM-1:0] m_req,
  output axi_rsp_t [NM-1:0] m_rsp,
  output axi_req_t [NS-1:0] s_req,
  input  axi_rsp_t [NS-1:0] s_rsp
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = $clog2(NS + 1);   // value NS = decode error

  function automatic logic [SW-1:0] decode(addr_t a);
    decode = SW'(NS);
    for (int s = NS - 1; s >= 0; s--)
      if ((a & SLV_MASK[s]) == SLV_BASE[s]) decode = SW'(s);
  endfunction

  // Round-robin choice: first requester after the last winner.
  function automatic logic [MW-1:0] rr_pick(logic [NM-1:0] reqs, logic [MW-1:0] last);
    int unsigned idx;
    rr_pick = last;
    for (int k = NM; k >= 1; k--) begin
      idx = (int'(last) + k) % NM;
      if (reqs[idx]) rr_pick = MW'(idx);
    end
  endfunction

  // ---------------- write path ----------------
  logic          wr_busy_q, aw_done_q, w_done_q;
  logic [MW-1:0] wr_m_q, wr_last_q;
  logic [SW-1:0] wr_s_q;
  logic [NM-1:0] aw_reqs;
  logic          wr_aw_hs, wr_w_hs, wr_b_hs, wr_err;

  // ---------------- read path ----------------
  logic          rd_busy_q, ar_done_q;
  logic [MW-1:0] rd_m_q, rd_last_q;
  logic [SW-1:0] rd_s_q;
  logic [NM-1:0] ar_reqs;
  logic          rd_ar_hs, rd_r_hs, rd_err;

  axi_req_t mreq_w, mreq_r;     // granted masters' requests
  axi_rsp_t srsp_w, srsp_r;     // responses seen by the granted masters

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      aw_reqs[m] = m_req[m].aw_valid;
      ar_reqs[m] = m_req[m].ar_valid;
    end
    mreq_w = m_req[wr_m_q];
    mreq_r = m_req[rd_m_q];
    wr_err = (wr_s_q == SW'(NS));
    rd_err = (rd_s_q == SW'(NS));

    // Write-path response seen by the granted master
    srsp_w = '0;
    if (wr_busy_q) begin
      if (wr_err) begin
        srsp_w.aw_ready = !aw_done_q;
        srsp_w.w_ready  = !w_done_q;
        srsp_w.b_valid  = aw_done_q && w_done_q;
        srsp_w.b_resp   = RESP_DECERR;
      end else begin
        srsp_w.aw_ready = s_rsp[wr_s_q].aw_ready && !aw_done_q;
        srsp_w.w_ready  = s_rsp[wr_s_q].w_ready && !w_done_q;
        srsp_w.b_valid  = s_rsp[wr_s_q].b_valid;
        srsp_w.b_resp   = s_rsp[wr_s_q].b_resp;
      end
    end
    // Read-path response seen by the granted master
    srsp_r = '0;
    if (rd_busy_q) begin
      if (rd_err) begin
        srsp_r.ar_ready = !ar_done_q;
        srsp_r.r_valid  = ar_done_q;
        srsp_r.r_resp   = RESP_DECERR;
      end else begin
        srsp_r.ar_ready = s_rsp[rd_s_q].ar_ready && !ar_done_q;
        srsp_r.r_valid  = s_rsp[rd_s_q].r_valid;
        srsp_r.r_data   = s_rsp[rd_s_q].r_data;
        srsp_r.r_tag    = s_rsp[rd_s_q].r_tag;
        srsp_r.r_resp   = s_rsp[rd_s_q].r_resp;
      end
    end

    wr_aw_hs = wr_busy_q && mreq_w.aw_valid && srsp_w.aw_ready;
    wr_w_hs  = wr_busy_q && mreq_w.w_valid  && srsp_w.w_ready;
    wr_b_hs  = wr_busy_q && srsp_w.b_valid  && mreq_w.b_ready;
    rd_ar_hs = rd_busy_q && mreq_r.ar_valid && srsp_r.ar_ready;
    rd_r_hs  = rd_busy_q && srsp_r.r_valid  && mreq_r.r_ready;

    // Route to the masters
    for (int m = 0; m < NM; m++) begin
      m_rsp[m] = '0;
      if (wr_busy_q && wr_m_q == MW'(m)) begin
        m_rsp[m].aw_ready = srsp_w.aw_ready;
        m_rsp[m].w_ready  = srsp_w.w_ready;
        m_rsp[m].b_valid  = srsp_w.b_valid;
        m_rsp[m].b_resp   = srsp_w.b_resp;
      end
      if (rd_busy_q && rd_m_q == MW'(m)) begin
        m_rsp[m].ar_ready = srsp_r.ar_ready;
        m_rsp[m].r_valid  = srsp_r.r_valid;
        m_rsp[m].r_data   = srsp_r.r_data;
        m_rsp[m].r_tag    = srsp_r.r_tag;
        m_rsp[m].r_resp   = srsp_r.r_resp;
      end
    end

    // Route to the slaves
    for (int s = 0; s < NS; s++) begin
      s_req[s] = '0;
      s_req[s].aw_addr = mreq_w.aw_addr;
      s_req[s].w_data  = mreq_w.w_data;
      s_req[s].w_strb  = mreq_w.w_strb;
      s_req[s].w_tag   = mreq_w.w_tag;
      s_req[s].ar_addr = mreq_r.ar_addr;
      if (wr_busy_q && wr_s_q == SW'(s)) begin
        s_req[s].aw_valid = mreq_w.aw_valid && !aw_done_q;
        s_req[s].w_valid  = mreq_w.w_valid && !w_done_q;
        s_req[s].b_ready  = mreq_w.b_ready;
      end
      if (rd_busy_q && rd_s_q == SW'(s)) begin
        s_req[s].ar_valid = mreq_r.ar_valid && !ar_done_q;
        s_req[s].r_ready  = mreq_r.r_ready;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy_q <= 1'b0; aw_done_q <= 1'b0; w_done_q <= 1'b0;
      wr_m_q <= '0; wr_last_q <= MW'(NM - 1); wr_s_q <= '0;
      rd_busy_q <= 1'b0; ar_done_q <= 1'b0;
      rd_m_q <= '0; rd_last_q <= MW'(NM - 1); rd_s_q <= '0;
    end else begin
      // write path
      if (!wr_busy_q) begin
        if (|aw_reqs) begin
          wr_busy_q <= 1'b1;
          wr_m_q    <= rr_pick(aw_reqs, wr_last_q);
          wr_last_q <= rr_pick(aw_reqs, wr_last_q);
          wr_s_q    <= decode(m_req[rr_pick(aw_reqs, wr_last_q)].aw_addr);
        end
      end else begin
        if (wr_aw_hs) aw_done_q <= 1'b1;
        if (wr_w_hs)  w_done_q  <= 1'b1;
        if (wr_b_hs) begin
          wr_busy_q <= 1'b0; aw_done_q <= 1'b0; w_done_q <= 1'b0;
        end
      end
      // read path
      if (!rd_busy_q) begin
        if (|ar_reqs) begin
          rd_busy_q <= 1'b1;
          rd_m_q    <= rr_pick(ar_reqs, rd_last_q);
          rd_last_q <= rr_pick(ar_reqs, rd_last_q);
          rd_s_q    <= decode(m_req[rr_pick(ar_reqs, rd_last_q)].ar_addr);
        end
      end else begin
        if (rd_ar_hs) ar_done_q <= 1'b1;
        if (rd_r_hs) begin
          rd_busy_q <= 1'b0; ar_done_q <= 1'b0;
        end
      end
    end
  end

  // AXI rule: a valid request is held, unchanged, until it is accepted.
  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].aw_valid && !m_rsp[m].aw_ready |=> m_req[m].aw_valid && $stable(m_req[m].aw_addr));
    a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].w_valid && !m_rsp[m].w_ready |=> m_req[m].w_valid && $stable(m_req[m].w_data));
    a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].ar_valid && !m_rsp[m].ar_ready |=> m_req[m].ar_valid && $stable(m_req[m].ar_addr));
  end

endmodule
