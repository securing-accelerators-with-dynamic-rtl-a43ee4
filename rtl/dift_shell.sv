// dift_shell: DIFT shell that encloses the obfuscator accelerator.
//
// The accelerator knows nothing about tags. The shell sits on its two ports
// and does the tag work for it:
//  * Register snooping. APB accesses below offset 0x40 go to the
//    accelerator; the shell keeps its own copy of the image addresses and of
//    the four patch bounds, taken from the same writes, so it knows what the
//    run will do. Offsets 0x40 and up are the shell's own registers.
//  * Tag propagation, reads. Every word the accelerator reads from its input
//    image comes back with 4 tag bits; the shell stores them in a tag buffer
//    of three image rows, row y in slot y mod 3 (the accelerator holds at most
//    rows r-1, r, r+1 at a time).
//  * Tag propagation, writes. For each word the accelerator writes to its
//    output image the shell computes the tag of each pixel: 0 inside the patch
//    (the blur declassifies the pixel), the tag of the same input pixel
//    outside it (a copy keeps its tag). A pixel whose input tag is not in the
//    buffer, or a write outside the output image, counts as sensitive.
//  * Tag checking. The policy is that no output pixel may be sensitive. A
//    write with any tag bit set is not passed on: the shell answers it itself
//    with SLVERR, records the address of the first such write since the flag
//    was last cleared, and raises the violation exception
//    (irq_viol, held until software clears STATUS). Writes that pass carry
//    their computed tags, which the policy makes all zero.
// With dift_en low (an unprotected accelerator) the shell passes everything
// through untouched, writes carry the accelerator's zero tags and nothing is
// checked.
//
// Timing: the checks are combinational on the request path, so the shell adds
// no cycle to any transfer; tags move in the same beat as their data.
// From the published design: the shell encloses an unmodified accelerator, intercepts its
// memory reads and writes, adds tags and checks them against the policy, and
// raises an exception before a sensitive pixel is written. This design's own
// choices: the three-row tag buffer, the register layout, blocking the write
// with SLVERR, and dift_en as a pin rather than a register.
module dift_shell
  import dift_pkg::*;
#(
  parameter int unsigned IMG_W = 128,
  parameter int unsigned IMG_H = 96
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     dift_en,     // 1: shell protects the accelerator
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output axi_req_t axi_req,
  input  axi_rsp_t axi_rsp,
  output logic     irq_done,    // accelerator finished a run (1-cycle pulse)
  output logic     irq_viol     // DIFT exception
);

  typedef logic [15:0] coord_t;
  localparam int unsigned IMG_BYTES = IMG_W * IMG_H;

  // ---------------- accelerator ----------------
  apb_req_t acc_apb_req;
  apb_rsp_t acc_apb_rsp;
  axi_req_t acc_req;
  axi_rsp_t acc_rsp;

  obfuscator #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_acc (
    .clk, .rst_n,
    .apb_req(acc_apb_req), .apb_rsp(acc_apb_rsp),
    .axi_req(acc_req),     .axi_rsp(acc_rsp),
    .irq(irq_done)
  );

  // ---------------- register snooping ----------------
  addr_t  src_q, dst_q, vaddr_q;
  coord_t i_row_q, e_row_q, i_col_q, e_col_q;
  logic   run_q, viol_q;
  logic   shell_sel, apb_wr;

  always_comb begin
    shell_sel           = apb_req.paddr[7:0] >= REG_SHELL_CTRL;
    acc_apb_req         = apb_req;
    acc_apb_req.psel    = apb_req.psel && !shell_sel;
    apb_wr              = apb_req.psel && apb_req.penable && apb_req.pwrite;
    apb_rsp.pready      = 1'b1;
    apb_rsp.pslverr     = 1'b0;
    apb_rsp.prdata      = acc_apb_rsp.prdata;
    if (shell_sel) begin
      unique case (apb_req.paddr[7:0])
        REG_SHELL_CTRL:   apb_rsp.prdata = {31'h0, dift_en};
        REG_SHELL_STATUS: apb_rsp.prdata = {31'h0, viol_q};
        REG_SHELL_VADDR:  apb_rsp.prdata = vaddr_q;
        default:          apb_rsp.prdata = '0;
      endcase
    end else begin
      apb_rsp.pready  = acc_apb_rsp.pready;
      apb_rsp.pslverr = acc_apb_rsp.pslverr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q <= '0; dst_q <= '0;
      i_row_q <= '0; e_row_q <= '0; i_col_q <= '0; e_col_q <= '0;
      run_q <= 1'b0;
    end else begin
      if (irq_done) run_q <= 1'b0;
      // Same acceptance rule as the accelerator: no changes during a run
      if (apb_wr && !shell_sel && !run_q) begin
        unique case (apb_req.paddr[7:0])
          REG_CTRL:  run_q   <= apb_req.pwdata[0];
          REG_SRC:   src_q   <= apb_req.pwdata;
          REG_DST:   dst_q   <= apb_req.pwdata;
          REG_I_ROW: i_row_q <= apb_req.pwdata[15:0];
          REG_E_ROW: e_row_q <= apb_req.pwdata[15:0];
          REG_I_COL: i_col_q <= apb_req.pwdata[15:0];
          REG_E_COL: e_col_q <= apb_req.pwdata[15:0];
          default: ;
        endcase
      end
    end
  end

  // ---------------- tag buffer (reads) ----------------
  logic [IMG_W-1:0] tagbuf   [3];
  coord_t           slot_row [3];
  logic [2:0]       slot_vld;
  addr_t            rd_addr_q, rd_off;
  coord_t           rd_row;
  int unsigned      rd_col;
  logic [1:0]       rd_slot;

  always_comb begin
    rd_off  = rd_addr_q - src_q;
    rd_row  = coord_t'(rd_off / IMG_W);
    rd_col  = int'(rd_off % IMG_W) & ~3;
    rd_slot = 2'(rd_row % 3);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr_q <= '0;
      slot_vld  <= '0;
      for (int s = 0; s < 3; s++) begin
        tagbuf[s]   <= '0;
        slot_row[s] <= '0;
      end
    end else begin
      if (acc_req.ar_valid && acc_rsp.ar_ready) rd_addr_q <= acc_req.ar_addr;
      if (acc_req.r_ready && acc_rsp.r_valid && rd_off < IMG_BYTES) begin
        tagbuf[rd_slot][rd_col +: TagW] <= axi_rsp.r_tag;
        slot_row[rd_slot]               <= rd_row;
        slot_vld[rd_slot]               <= 1'b1;
      end
      if (run_q && irq_done) slot_vld <= '0;   // forget tags after each run
    end
  end

  // ---------------- tag computation and check (writes) ----------------
  typedef enum logic [1:0] {W_IDLE, W_PASS, W_BLOCK} wstate_e;
  wstate_e wst_q;
  addr_t   wr_addr, wr_addr_q, wr_off;
  coord_t  wr_row;
  int unsigned wr_col;
  logic [1:0]  wr_slot;
  tag_t    wr_tag;
  logic    in_img, viol;

  always_comb begin
    wr_addr = (wst_q == W_IDLE) ? acc_req.aw_addr : wr_addr_q;
    wr_off  = wr_addr - dst_q;
    in_img  = (wr_off < IMG_BYTES) && (wr_off[1:0] == 2'b00);
    wr_row  = coord_t'(wr_off / IMG_W);
    wr_col  = int'(wr_off % IMG_W);
    wr_slot = 2'(wr_row % 3);
    for (int j = 0; j < TagW; j++) begin
      if (!in_img)
        wr_tag[j] = 1'b1;
      else if (wr_row >= i_row_q && wr_row < e_row_q &&
               (wr_col + j) >= int'(i_col_q) && (wr_col + j) < int'(e_col_q))
        wr_tag[j] = 1'b0;                                  // blurred: declassified
      else if (slot_vld[wr_slot] && slot_row[wr_slot] == wr_row)
        wr_tag[j] = tagbuf[wr_slot][wr_col + j];           // copied: tag kept
      else
        wr_tag[j] = 1'b1;                                  // unknown: sensitive
    end
    viol = dift_en && (|wr_tag);
  end

  // Request path to the interconnect, and responses to the accelerator
  always_comb begin
    axi_req = acc_req;
    acc_rsp = axi_rsp;
    if (dift_en) begin
      axi_req.w_tag = wr_tag;
      unique case (wst_q)
        W_IDLE: begin
          // A checked write goes out only once its address is known
          axi_req.aw_valid = acc_req.aw_valid && !viol;
          axi_req.w_valid  = acc_req.aw_valid && acc_req.w_valid && !viol;
          acc_rsp.aw_ready = viol ? (acc_req.aw_valid && acc_req.w_valid) : axi_rsp.aw_ready;
          acc_rsp.w_ready  = viol ? (acc_req.aw_valid && acc_req.w_valid)
                                  : (acc_req.aw_valid && axi_rsp.w_ready);
          acc_rsp.b_valid  = 1'b0;
          axi_req.b_ready  = 1'b0;
        end
        W_PASS: ;
        W_BLOCK: begin
          axi_req.aw_valid = 1'b0;
          axi_req.w_valid  = 1'b0;
          axi_req.b_ready  = 1'b0;
          acc_rsp.aw_ready = 1'b0;
          acc_rsp.w_ready  = 1'b0;
          acc_rsp.b_valid  = 1'b1;
          acc_rsp.b_resp   = RESP_SLVERR;
        end
        default: ;
      endcase
    end else begin
      axi_req.w_tag = acc_req.w_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst_q     <= W_IDLE;
      wr_addr_q <= '0;
      viol_q    <= 1'b0;
      vaddr_q   <= '0;
    end else begin
      if (apb_wr && apb_req.paddr[7:0] == REG_SHELL_STATUS && apb_req.pwdata[0]) viol_q <= 1'b0;
      unique case (wst_q)
        W_IDLE: if (dift_en && acc_req.aw_valid) begin
          wr_addr_q <= acc_req.aw_addr;
          if (viol) begin
            if (acc_req.w_valid) begin
              wst_q   <= W_BLOCK;
              viol_q  <= 1'b1;
              if (!viol_q) vaddr_q <= acc_req.aw_addr;   // first since cleared
            end
          end else if (axi_rsp.aw_ready) begin
            // AW accepted; W may follow in this or a later cycle
            wst_q <= W_PASS;
          end
        end
        W_PASS:  if (axi_rsp.b_valid && acc_req.b_ready) wst_q <= W_IDLE;
        W_BLOCK: if (acc_req.b_ready) wst_q <= W_IDLE;
        default: wst_q <= W_IDLE;
      endcase
    end
  end

  assign irq_viol = viol_q;

  // A blocked write never reaches the interconnect.
  a_no_leak: assert property (@(posedge clk) disable iff (!rst_n)
    dift_en && (wst_q == W_IDLE) && viol |-> !axi_req.aw_valid && !axi_req.w_valid);

endmodule
