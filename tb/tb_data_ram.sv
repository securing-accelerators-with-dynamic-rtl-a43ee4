// tb_data_ram: self-checking test of the tagged data RAM.
// Random byte-enabled writes with random tags go to random words; a model in
// the testbench keeps the expected byte and tag of every location. Reads are
// checked for data and tags. Also checks the response latencies (B one cycle
// after the write handshake, R one cycle after the read handshake) and that
// the top and bottom words of the 32 KB array are distinct.
module tb_data_ram;
  import dift_pkg::*;

  localparam int unsigned BYTES = 32768;
  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  data_ram dut (.clk, .rst_n, .axi_req(req), .axi_rsp(rsp));
  axi_master_bfm bfm (.clk, .req, .rsp);

  logic [7:0] ref_d [int];
  logic       ref_t [int];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency monitor
  int unsigned t_aw = 0, t_ar = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (req.aw_valid && rsp.aw_ready) t_aw = cyc;
      if (req.ar_valid && rsp.ar_ready) t_ar = cyc;
      if (rsp.b_valid && req.b_ready && t_aw != 0) begin
        check(cyc == t_aw + 1, "B one cycle after AW/W handshake"); t_aw = 0;
      end
      if (rsp.r_valid && req.r_ready && t_ar != 0) begin
        check(cyc == t_ar + 1, "R one cycle after AR handshake"); t_ar = 0;
      end
    end
  end

  initial begin
    addr_t a; data_t d, rd; strb_t s; tag_t t, rt; resp_e r;
    int unsigned w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // edges of the array
    bfm.write(DRAM_BASE + 0,         32'h1122_3344, 4'hF, 4'b0101, r);
    bfm.write(DRAM_BASE + BYTES - 4, 32'hA5A5_5A5A, 4'hF, 4'b1010, r);
    bfm.read(DRAM_BASE + 0, rd, rt, r);
    check(rd == 32'h1122_3344 && rt == 4'b0101, "word 0");
    bfm.read(DRAM_BASE + BYTES - 4, rd, rt, r);
    check(rd == 32'hA5A5_5A5A && rt == 4'b1010 && r == RESP_OKAY, "last word");
    for (int b = 0; b < 4; b++) begin
      ref_d[b] = 8'(32'h1122_3344 >> (8*b)); ref_t[b] = b[0] ? 1'b0 : 1'b1;
      ref_d[BYTES-4+b] = 8'(32'hA5A5_5A5A >> (8*b)); ref_t[BYTES-4+b] = b[0];
    end
    // random traffic over a window of 64 words plus the edges
    for (int i = 0; i < 600; i++) begin
      w = (i % 7 == 0) ? $urandom_range(BYTES/4 - 1) : $urandom_range(63);
      a = DRAM_BASE + 4 * w;
      if ($urandom_range(1) != 0) begin
        d = $urandom; s = 4'($urandom); t = 4'($urandom);
        bfm.write(a, d, s, t, r);
        check(r == RESP_OKAY, "write OKAY");
        for (int b = 0; b < 4; b++)
          if (s[b]) begin ref_d[4*w+b] = d[8*b +: 8]; ref_t[4*w+b] = t[b]; end
      end else begin
        bfm.read(a, rd, rt, r);
        for (int b = 0; b < 4; b++)
          if (ref_d.exists(4*w+b)) begin
            check(rd[8*b +: 8] == ref_d[4*w+b] && rt[b] == ref_t[4*w+b],
                  $sformatf("read word %0d byte %0d", w, b));
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
