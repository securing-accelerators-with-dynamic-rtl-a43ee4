// apb_master_bfm: testbench driver for an APB3 master. write() and read()
// each perform one SETUP + ACCESS transfer and wait for PREADY.
module apb_master_bfm
  import dift_pkg::*;
(
  input  logic     clk,
  output apb_req_t req,
  input  apb_rsp_t rsp
);

  initial req = '0;

  task automatic write(input addr_t a, input data_t d);
    @(negedge clk);
    req.psel = 1'b1; req.penable = 1'b0; req.pwrite = 1'b1; req.paddr = a; req.pwdata = d;
    @(negedge clk);
    req.penable = 1'b1;
    #1;
    while (!rsp.pready) begin @(negedge clk); #1; end
    @(negedge clk);
    req.psel = 1'b0; req.penable = 1'b0;
  endtask

  task automatic read(input addr_t a, output data_t d);
    @(negedge clk);
    req.psel = 1'b1; req.penable = 1'b0; req.pwrite = 1'b0; req.paddr = a;
    @(negedge clk);
    req.penable = 1'b1;
    #1;
    while (!rsp.pready) begin @(negedge clk); #1; end
    d = rsp.prdata;
    @(negedge clk);
    req.psel = 1'b0; req.penable = 1'b0;
  endtask

endmodule
