// axi_mem_model: behavioural tagged memory with a single-beat AXI4 slave port,
// for testbenches. Byte array mem[] and tag array tag[] are accessed by the
// testbench directly. With stall = 1 the ready and valid signals are held low
// for random numbers of cycles, to test back-pressure. Counts reads/writes.
module axi_mem_model
  import dift_pkg::*;
#(
  parameter int unsigned BYTES = 65536
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req,
  output axi_rsp_t rsp
);

  logic [7:0] mem [BYTES];
  logic       tag [BYTES];
  bit         stall = 0;
  int unsigned n_wr = 0, n_rd = 0;

  addr_t aw_a;
  bit    aw_have = 0, w_have = 0, b_pend = 0, r_pend = 0;
  data_t w_d;
  strb_t w_s;
  tag_t  w_t;

  function automatic bit coin();
    return !stall || ($urandom_range(2) != 0);
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0; aw_have = 0; w_have = 0; b_pend = 0; r_pend = 0;
    end else begin
      // handshakes of the cycle that just ended
      if (req.aw_valid && rsp.aw_ready) begin aw_have = 1; aw_a = req.aw_addr; end
      if (req.w_valid && rsp.w_ready) begin
        w_have = 1; w_d = req.w_data; w_s = req.w_strb; w_t = req.w_tag;
      end
      if (rsp.b_valid && req.b_ready) b_pend = 0;
      if (rsp.r_valid && req.r_ready) r_pend = 0;
      if (req.ar_valid && rsp.ar_ready) begin
        r_pend = 1;
        rsp.r_resp <= RESP_OKAY;
        for (int b = 0; b < 4; b++) begin
          rsp.r_data[8*b +: 8] <= mem[(req.ar_addr & ~32'h3) % BYTES + b];
          rsp.r_tag[b]         <= tag[(req.ar_addr & ~32'h3) % BYTES + b];
        end
        n_rd++;
      end
      if (aw_have && w_have) begin
        for (int b = 0; b < 4; b++)
          if (w_s[b]) begin
            mem[(aw_a & ~32'h3) % BYTES + b] = w_d[8*b +: 8];
            tag[(aw_a & ~32'h3) % BYTES + b] = w_t[b];
          end
        aw_have = 0; w_have = 0; b_pend = 1;
        rsp.b_resp <= RESP_OKAY;
        n_wr++;
      end
      rsp.aw_ready <= !aw_have && !b_pend && coin();
      rsp.w_ready  <= !w_have && !b_pend && coin();
      rsp.b_valid  <= b_pend && (rsp.b_valid || coin());
      rsp.ar_ready <= !r_pend && coin() && !(req.ar_valid && rsp.ar_ready);
      rsp.r_valid  <= r_pend && (rsp.r_valid || coin());
    end
  end

endmodule
