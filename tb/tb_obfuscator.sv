// tb_obfuscator: self-checking test of the obfuscation accelerator at its
// default image size (128 x 96). A random image is placed in a memory model
// that stalls at random; the registers are programmed over APB and the run
// is started. The output image is compared pixel by pixel with a reference
// computed here: 3x3 mean (rounded down, edges repeated) inside the patch
// [i_row, e_row) x [i_col, e_col), plain copy elsewhere. Runs: a patch in the
// middle, a patch touching all four image edges, and an empty patch (copy
// only). Also checks the STATUS bits, the single irq pulse per run, that
// register writes during a run are ignored, and the number of memory reads
// and writes of a run, which follows from the row schedule.
module tb_obfuscator;
  import dift_pkg::*;

  localparam int unsigned W = 128, H = 96;
  localparam addr_t SRC = 32'h0000_0000, DST = 32'h0000_4000;
  logic clk = 0, rst_n = 0;
  apb_req_t preq; apb_rsp_t prsp;
  axi_req_t req;  axi_rsp_t rsp;
  logic irq;
  int checks = 0, failures = 0, irqs = 0;

  always #5 clk = ~clk;

  obfuscator dut (.clk, .rst_n, .apb_req(preq), .apb_rsp(prsp), .axi_req(req), .axi_rsp(rsp), .irq);
  apb_master_bfm apb (.clk, .req(preq), .rsp(prsp));
  axi_mem_model #(.BYTES(65536)) mem (.clk, .rst_n, .req, .rsp);

  always @(posedge clk) if (rst_n && irq) irqs++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int px(int r, int c);
    r = (r < 0) ? 0 : (r >= H) ? H - 1 : r;
    c = (c < 0) ? 0 : (c >= W) ? W - 1 : c;
    return int'(mem.mem[SRC + r * W + c]);
  endfunction

  task automatic run(input int ir, input int er, input int ic, input int ec);
    data_t st;
    int bad = 0, exp_v, sum, irq0, prow, rd0, wr0;
    for (int i = 0; i < W * H; i++) mem.mem[SRC + i] = 8'($urandom);
    apb.write(APB_BASE + REG_SRC,   SRC);
    apb.write(APB_BASE + REG_DST,   DST);
    apb.write(APB_BASE + REG_I_ROW, ir);
    apb.write(APB_BASE + REG_E_ROW, er);
    apb.write(APB_BASE + REG_I_COL, ic);
    apb.write(APB_BASE + REG_E_COL, ec);
    apb.read(APB_BASE + REG_E_COL, st);
    check(st == 32'(ec), "register read-back");
    irq0 = irqs; rd0 = mem.n_rd; wr0 = mem.n_wr;
    apb.write(APB_BASE + REG_CTRL, 1);
    apb.read(APB_BASE + REG_STATUS, st);
    check(st[0] == 1'b1 && st[1] == 1'b0, "busy during run");
    apb.write(APB_BASE + REG_DST, 32'h0000_8000);            // must be ignored
    apb.read(APB_BASE + REG_DST, st);
    check(st == DST, "register write ignored during run");
    do apb.read(APB_BASE + REG_STATUS, st); while (st[0]);
    check(st[1] == 1'b1, "done after run");
    check(irqs == irq0 + 1, "one irq per run");
    prow = 0;
    for (int r = 0; r < H; r++) if (r >= ir && r < er && ic < ec) prow++;
    check(mem.n_wr - wr0 == H * W / 4, "writes per run");
    check(mem.n_rd - rd0 == (H + 2 * prow) * W / 4, "reads per run");
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        if (r >= ir && r < er && c >= ic && c < ec) begin
          sum = 0;
          for (int dr = -1; dr <= 1; dr++)
            for (int dc = -1; dc <= 1; dc++) sum += px(r + dr, c + dc);
          exp_v = sum / 9;
        end else exp_v = px(r, c);
        if (int'(mem.mem[DST + r * W + c]) != exp_v) begin
          bad++;
          if (bad < 5) $display("pixel (%0d,%0d) = %0d, expected %0d", r, c, mem.mem[DST + r * W + c], exp_v);
        end
      end
    check(bad == 0, $sformatf("output image, patch %0d..%0d x %0d..%0d", ir, er, ic, ec));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    mem.stall = 1;
    run(30, 52, 40, 77);
    run(0, H, 0, W);
    run(10, 20, 50, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
