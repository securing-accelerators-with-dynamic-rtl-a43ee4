// axi_master_bfm: testbench driver for one tagged single-beat AXI4 master port.
// Tasks write() and read() perform one transfer each and return the response;
// signals are driven and sampled on the falling clock edge, so every
// handshake takes place on the rising edge in between. Ready and valid are
// sampled 1 ns after the falling edge, once combinational logic has settled. The optional random
// delay before a transfer exercises arbitration and back-pressure.
module axi_master_bfm
  import dift_pkg::*;
(
  input  logic     clk,
  output axi_req_t req,
  input  axi_rsp_t rsp
);

  int unsigned max_gap = 0;   // random idle cycles before each transfer
  int unsigned n_wr = 0, n_rd = 0;

  initial req = '0;

  task automatic gap();
    int unsigned n = (max_gap == 0) ? 0 : $urandom_range(max_gap);
    repeat (n) @(negedge clk);
  endtask

  task automatic write(input addr_t a, input data_t d, input strb_t s, input tag_t t,
                       output resp_e r);
    bit awd = 0, wd = 0;
    gap();
    @(negedge clk);
    req.aw_valid = 1'b1; req.aw_addr = a;
    req.w_valid  = 1'b1; req.w_data = d; req.w_strb = s; req.w_tag = t;
    while (!(awd && wd)) begin
      #1;
      if (req.aw_valid && rsp.aw_ready) awd = 1;
      if (req.w_valid && rsp.w_ready) wd = 1;
      @(negedge clk);
      if (awd) req.aw_valid = 1'b0;
      if (wd)  req.w_valid  = 1'b0;
    end
    req.b_ready = 1'b1;
    #1;
    while (!rsp.b_valid) begin @(negedge clk); #1; end
    r = rsp.b_resp;
    @(negedge clk);
    req.b_ready = 1'b0;
    n_wr++;
  endtask

  task automatic read(input addr_t a, output data_t d, output tag_t t, output resp_e r);
    gap();
    @(negedge clk);
    req.ar_valid = 1'b1; req.ar_addr = a;
    #1;
    while (!rsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req.ar_valid = 1'b0;
    req.r_ready  = 1'b1;
    #1;
    while (!rsp.r_valid) begin @(negedge clk); #1; end
    d = rsp.r_data; t = rsp.r_tag; r = rsp.r_resp;
    @(negedge clk);
    req.r_ready = 1'b0;
    n_rd++;
  endtask

endmodule
