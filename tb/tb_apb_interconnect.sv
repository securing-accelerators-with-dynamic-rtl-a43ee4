// tb_apb_interconnect: self-checking test of the AXI-to-APB bridge.
// Two APB slave models with register files sit behind the bridge (NPS = 2);
// slave 1 inserts random wait states and flags offset 0xFFC as an error.
// Checks: register write/read-back through AXI, routing by address bits
// [15:12], PSLVERR -> SLVERR, DECERR beyond the last slave without an APB
// transfer, and the response latency with a zero-wait slave (the B response
// is valid 3 cycles after the AW/W handshake: SETUP, ACCESS, response).
module tb_apb_interconnect;
  import dift_pkg::*;

  localparam int unsigned NPS = 2;
  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  apb_req_t [NPS-1:0] apb_req;
  apb_rsp_t [NPS-1:0] apb_rsp;
  int checks = 0, failures = 0, waits = 0, apb_xfers = 0;

  always #5 clk = ~clk;

  apb_interconnect #(.NPS(NPS)) dut (.clk, .rst_n, .axi_req(req), .axi_rsp(rsp), .apb_req, .apb_rsp);
  axi_master_bfm bfm (.clk, .req, .rsp);

  data_t regs [NPS][1024];
  int unsigned wait_cnt [NPS];

  // APB slave models
  always_comb
    for (int p = 0; p < NPS; p++) begin
      apb_rsp[p].pready  = (p == 0) || (wait_cnt[p] == 0);
      apb_rsp[p].prdata  = regs[p][apb_req[p].paddr[11:2]];
      apb_rsp[p].pslverr = (p == 1) && (apb_req[p].paddr[11:0] == 12'hFFC);
    end

  always @(posedge clk) begin
    for (int p = 0; p < NPS; p++) begin
      if (apb_req[p].psel && !apb_req[p].penable) begin
        wait_cnt[p] <= (p == 1) ? $urandom_range(3) : 0;
        apb_xfers++;
      end
      if (apb_req[p].psel && apb_req[p].penable) begin
        if (!apb_rsp[p].pready) begin wait_cnt[p] <= wait_cnt[p] - 1; waits++; end
        else if (apb_req[p].pwrite) regs[p][apb_req[p].paddr[11:2]] <= apb_req[p].pwdata;
      end
    end
  end

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

  int unsigned cyc = 0, t_aw = 0;
  always @(posedge clk) begin
    cyc++;
    if (req.aw_valid && rsp.aw_ready) t_aw = cyc;
  end

  initial begin
    data_t d, rd, exp [NPS][1024]; bit seen [NPS][1024]; tag_t rt; resp_e r;
    int unsigned p, w, x0;
    wait_cnt[0] = 0; wait_cnt[1] = 0;
    foreach (seen[i, j]) seen[i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency on the zero-wait slave
    bfm.write(APB_BASE + 32'h10, 32'h1234_5678, 4'hF, 4'h0, r);
    check(r == RESP_OKAY && regs[0][4] == 32'h1234_5678, "write reached slave 0");
    exp[0][4] = 32'h1234_5678; seen[0][4] = 1;
    for (int i = 0; i < 200; i++) begin
      p = $urandom_range(NPS - 1);
      w = $urandom_range(63);
      if ($urandom_range(1) != 0) begin
        d = $urandom;
        bfm.write(APB_BASE + 32'(p) * 32'h1000 + 4 * w, d, 4'hF, 4'hF, r);
        check(r == RESP_OKAY, "write OKAY");
        exp[p][w] = d; seen[p][w] = 1;
      end else begin
        bfm.read(APB_BASE + 32'(p) * 32'h1000 + 4 * w, rd, rt, r);
        check(r == RESP_OKAY && rt == '0 && rd == regs[p][w], $sformatf("read slave %0d word %0d", p, w));
        if (seen[p][w]) check(rd == exp[p][w], "read-back equals written");
      end
    end
    bfm.read(APB_BASE + 32'h1FFC, rd, rt, r);
    check(r == RESP_SLVERR, "PSLVERR gives SLVERR");
    x0 = apb_xfers;
    bfm.write(APB_BASE + 32'h2000, 32'h5, 4'hF, 4'h0, r);
    check(r == RESP_DECERR, "beyond last slave gives DECERR");
    bfm.read(APB_BASE + 32'h3004, rd, rt, r);
    check(r == RESP_DECERR, "beyond last slave gives DECERR (read)");
    check(apb_xfers == x0, "no APB transfer for a decode error");
    check(waits > 0, "wait states exercised");
    $display("wait cycles=%0d apb transfers=%0d", waits, apb_xfers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // zero-wait write on slave 0: B valid exactly 3 cycles after handshake
  always @(posedge clk)
    if (rsp.b_valid && req.b_ready && t_aw != 0 && !apb_req[1].psel && apb_req[0].paddr[11:2] == 4) begin
      check(cyc == t_aw + 3, "zero-wait APB write latency is 3 cycles");
      t_aw = 0;
    end
endmodule
