// tb_axi_interconnect: self-checking test of the tagged AXI4 interconnect.
// Three master drivers run at once with random gaps against three memory
// models that stall at random. Each master writes random words and tags into
// its own part of every slave and reads them back; data, tags and responses
// are compared with a model per master. Unmapped addresses must return DECERR
// without reaching any slave. The test counts cycles in which several masters
// wanted the same path (arbitration) and requires some; it also checks that a
// lone transfer into an idle interconnect is granted within one cycle.
module tb_axi_interconnect;
  import dift_pkg::*;

  localparam int unsigned NM = 3, NS = 3;
  logic clk = 0, rst_n = 0;
  axi_req_t [NM-1:0] m_req;
  axi_rsp_t [NM-1:0] m_rsp;
  axi_req_t [NS-1:0] s_req;
  axi_rsp_t [NS-1:0] s_rsp;
  int checks = 0, failures = 0;
  int contention = 0, decerrs = 0;
  int unsigned done_masters = 0;

  always #5 clk = ~clk;

  axi_interconnect dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);

  for (genvar s = 0; s < NS; s++) begin : g_s
    axi_mem_model #(.BYTES(65536)) mem (.clk, .rst_n, .req(s_req[s]), .rsp(s_rsp[s]));
  end
  for (genvar m = 0; m < NM; m++) begin : g_m
    axi_master_bfm bfm (.clk, .req(m_req[m]), .rsp(m_rsp[m]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    int naw = 0, nar = 0;
    for (int m = 0; m < NM; m++) begin
      naw += int'(m_req[m].aw_valid);
      nar += int'(m_req[m].ar_valid);
    end
    if (naw > 1 || nar > 1) contention++;
  end

  localparam addr_t BASES [NS] = '{IRAM_BASE, DRAM_BASE, APB_BASE};

  task automatic run_master(input int m);
    data_t exp_d [int];
    tag_t  exp_t [int];
    data_t d, rd; tag_t t, rt; resp_e r; addr_t a;
    int unsigned s, w;
    for (int i = 0; i < 150; i++) begin
      s = $urandom_range(NS - 1);
      w = $urandom_range(15);
      a = BASES[s] + 32'(m) * 1024 + 4 * w;
      if ($urandom_range(2) != 0) begin
        d = $urandom; t = 4'($urandom);
        case (m)
          0: g_m[0].bfm.write(a, d, 4'hF, t, r);
          1: g_m[1].bfm.write(a, d, 4'hF, t, r);
          default: g_m[2].bfm.write(a, d, 4'hF, t, r);
        endcase
        check(r == RESP_OKAY, "write OKAY");
        exp_d[int'(a)] = d; exp_t[int'(a)] = t;
      end else begin
        case (m)
          0: g_m[0].bfm.read(a, rd, rt, r);
          1: g_m[1].bfm.read(a, rd, rt, r);
          default: g_m[2].bfm.read(a, rd, rt, r);
        endcase
        if (exp_d.exists(int'(a)))
          check(rd == exp_d[int'(a)] && rt == exp_t[int'(a)] && r == RESP_OKAY,
                $sformatf("master %0d read %h", m, a));
      end
    end
    done_masters++;
  endtask

  initial begin
    data_t rd; tag_t rt; resp_e r;
    int unsigned wr0, rd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lone transfer: grant register + slave; measure AR valid -> AR ready at slave
    g_m[1].bfm.write(DRAM_BASE + 32'h40, 32'hCAFE_F00D, 4'hF, 4'b1001, r);
    g_m[1].bfm.read(DRAM_BASE + 32'h40, rd, rt, r);
    check(rd == 32'hCAFE_F00D && rt == 4'b1001, "lone read-back");
    check(g_s[1].mem.mem[16'h40] == 8'h0D && g_s[1].mem.tag[16'h43] == 1'b1,
          "lone write landed in the data RAM slave");
    // decode error, no slave touched
    wr0 = g_s[0].mem.n_wr + g_s[1].mem.n_wr + g_s[2].mem.n_wr;
    rd0 = g_s[0].mem.n_rd + g_s[1].mem.n_rd + g_s[2].mem.n_rd;
    g_m[0].bfm.write(32'h8000_0000, 32'h1, 4'hF, 4'h0, r);
    check(r == RESP_DECERR, "unmapped write DECERR"); decerrs++;
    g_m[2].bfm.read(32'h0001_0000, rd, rt, r);
    check(r == RESP_DECERR, "unmapped read DECERR"); decerrs++;
    check(wr0 == g_s[0].mem.n_wr + g_s[1].mem.n_wr + g_s[2].mem.n_wr &&
          rd0 == g_s[0].mem.n_rd + g_s[1].mem.n_rd + g_s[2].mem.n_rd,
          "unmapped accesses reach no slave");
    // concurrent traffic with random stalls
    g_s[0].mem.stall = 1; g_s[1].mem.stall = 1; g_s[2].mem.stall = 1;
    g_m[0].bfm.max_gap = 3; g_m[1].bfm.max_gap = 3; g_m[2].bfm.max_gap = 3;
    fork
      run_master(0);
      run_master(1);
      run_master(2);
    join
    check(done_masters == 3, "all masters finished");
    check(contention > 0, "arbitration between masters happened");
    check(g_s[0].mem.n_wr > 0 && g_s[0].mem.n_rd > 0, "slave 0 used");
    check(g_s[1].mem.n_wr > 0 && g_s[1].mem.n_rd > 0, "slave 1 used");
    check(g_s[2].mem.n_wr > 0 && g_s[2].mem.n_rd > 0, "slave 2 used");
    $display("contention cycles=%0d decode errors=%0d", contention, decerrs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
