// tb_instr_ram: self-checking test of the instruction RAM.
// The host port loads a random program with random byte strobes and tags;
// the fetch port then reads every loaded word back (data valid one cycle
// after the request) and the AXI port reads some back too. Tags must be
// dropped: AXI reads return tag 0 whatever was written.
module tb_instr_ram;
  import dift_pkg::*;

  localparam int unsigned WORDS = 8192;
  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  logic  fetch_req = 0, fetch_rvalid;
  addr_t fetch_addr = '0;
  data_t fetch_rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  instr_ram dut (.clk, .rst_n, .axi_req(req), .axi_rsp(rsp),
                 .fetch_req, .fetch_addr, .fetch_rdata, .fetch_rvalid);
  axi_master_bfm bfm (.clk, .req, .rsp);

  data_t prog [int];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d, rd; tag_t rt; resp_e r; int unsigned w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      w = (i < 4) ? ((i < 2) ? i : WORDS - 4 + i) : $urandom_range(WORDS - 1);
      d = $urandom;
      bfm.write(IRAM_BASE + 4 * w, d, 4'hF, 4'hF, r);
      check(r == RESP_OKAY, "load OKAY");
      prog[w] = d;
    end
    // partial-word write
    w = 5; bfm.write(IRAM_BASE + 20, 32'hFFFF_FFFF, 4'hF, 4'h0, r);
    bfm.write(IRAM_BASE + 20, 32'h00AB_0000, 4'b0100, 4'h0, r);
    prog[5] = 32'hFFAB_FFFF;
    foreach (prog[k]) begin
      @(negedge clk);
      fetch_req = 1; fetch_addr = IRAM_BASE + 4 * k;
      @(negedge clk);
      fetch_req = 0;
      check(fetch_rvalid && fetch_rdata == prog[k], $sformatf("fetch word %0d", k));
    end
    @(negedge clk);
    check(!fetch_rvalid, "rvalid low without request");
    foreach (prog[k]) if (k % 4 == 1) begin
      bfm.read(IRAM_BASE + 4 * k, rd, rt, r);
      check(rd == prog[k] && rt == '0 && r == RESP_OKAY, $sformatf("AXI read word %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
