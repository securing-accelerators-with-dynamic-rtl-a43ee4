// tb_dift_shell: self-checking test of the DIFT shell around the accelerator,
// at the default image size. The pixels of the true face patch carry tag 1 in
// the memory model; all others carry tag 0. Four runs:
//  A. protection on, honest patch: no violation, correct image, all output
//     tags 0 (blurred pixels are declassified, copied ones keep tag 0);
//  B. protection on, attacked patch (shrunk): every output word holding a
//     sensitive pixel outside the configured patch is blocked - memory keeps
//     its old contents there - the violation flag, irq_viol and the address
//     register report the first blocked word; the flag clears on write-1;
//     blocked writes are counted as the writes that never reach memory;
//  C. protection off, same attack: the run completes and the sensitive pixels
//     leak into the output with tag 0 (what an unprotected accelerator does);
//  E. protection on, attack moves the patch: checked as in B;
//  D. protection on and off, honest patch, no memory stalls: the two runs
//     take exactly the same number of cycles (the shell adds no latency).
module tb_dift_shell;
  import dift_pkg::*;

  localparam int unsigned W = 128, H = 96;
  localparam addr_t SRC = 32'h0000_0000, DST = 32'h0000_4000;
  localparam int FR0 = 20, FR1 = 60, FC0 = 30, FC1 = 90;   // true face patch
  logic clk = 0, rst_n = 0, dift_en = 1;
  apb_req_t preq; apb_rsp_t prsp;
  axi_req_t req;  axi_rsp_t rsp;
  logic irq_done, irq_viol;
  int checks = 0, failures = 0;
  int blocked = 0, leaks = 0, slverr = 0;

  always #5 clk = ~clk;

  dift_shell dut (.clk, .rst_n, .dift_en, .apb_req(preq), .apb_rsp(prsp),
                  .axi_req(req), .axi_rsp(rsp), .irq_done, .irq_viol);
  apb_master_bfm apb (.clk, .req(preq), .rsp(prsp));
  axi_mem_model #(.BYTES(65536)) mem (.clk, .rst_n, .req, .rsp);

  // Blocked writes never reach memory: count them as the writes missing
  // from the memory model's count (each run issues H * W / 4 writes).
  int wr_before;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit face(int r, int c);
    return r >= FR0 && r < FR1 && c >= FC0 && c < FC1;
  endfunction

  function automatic int px(int r, int c);
    r = (r < 0) ? 0 : (r >= H) ? H - 1 : r;
    c = (c < 0) ? 0 : (c >= W) ? W - 1 : c;
    return int'(mem.mem[SRC + r * W + c]);
  endfunction

  function automatic int blur(int r, int c);
    int s = 0;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) s += px(r + dr, c + dc);
    return s / 9;
  endfunction

  task automatic setup_mem();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        mem.mem[SRC + r * W + c] = 8'($urandom);
        mem.tag[SRC + r * W + c] = face(r, c);
        mem.mem[DST + r * W + c] = 8'hEE;        // marker of "never written"
        mem.tag[DST + r * W + c] = 1'b0;
      end
  endtask

  task automatic run(input int ir, input int er, input int ic, input int ec, output int cycles);
    data_t st;
    int t0;
    apb.write(APB_BASE + REG_SRC,   SRC);
    apb.write(APB_BASE + REG_DST,   DST);
    apb.write(APB_BASE + REG_I_ROW, ir);
    apb.write(APB_BASE + REG_E_ROW, er);
    apb.write(APB_BASE + REG_I_COL, ic);
    apb.write(APB_BASE + REG_E_COL, ec);
    apb.write(APB_BASE + REG_CTRL, 1);
    t0 = $time;
    @(posedge irq_done);
    cycles = ($time - t0) / 10;
    apb.read(APB_BASE + REG_STATUS, st);
    check(st[1], "accelerator done");
  endtask


  // Protected run with an attacked patch [ir, er) x [ic, ec): every output word
  // holding a face pixel outside that patch must be blocked (memory keeps its
  // marker), all other words must be correct with tag 0; then the exception,
  // the address of the first blocked word and the clearing of the flag.
  task automatic check_protected_attack(input string nm, input int ir, input int er,
                                        input int ic, input int ec);
    data_t st;
    int cyc, bad = 0, exp_blocked = 0, first_bad = -1;
    bit in_patch, word_bad;
    dift_en = 1;
    setup_mem();
    wr_before = mem.n_wr;
    run(ir, er, ic, ec, cyc);
    slverr = H * W / 4 - (mem.n_wr - wr_before);
    for (int r = 0; r < H; r++)
      for (int w = 0; w < W / 4; w++) begin
        word_bad = 0;
        for (int j = 0; j < 4; j++) begin
          in_patch = r >= ir && r < er && 4 * w + j >= ic && 4 * w + j < ec;
          if (face(r, 4 * w + j) && !in_patch) word_bad = 1;
        end
        if (word_bad) begin
          exp_blocked++;
          if (first_bad < 0) first_bad = r * W + 4 * w;
          for (int j = 0; j < 4; j++) if (mem.mem[DST + r * W + 4 * w + j] != 8'hEE) bad++;
        end else
          for (int j = 0; j < 4; j++) begin
            in_patch = r >= ir && r < er && 4 * w + j >= ic && 4 * w + j < ec;
            if (int'(mem.mem[DST + r * W + 4 * w + j]) != (in_patch ? blur(r, 4 * w + j) : px(r, 4 * w + j))) bad++;
            if (mem.tag[DST + r * W + 4 * w + j]) bad++;
          end
      end
    blocked += slverr;
    check(bad == 0, {nm, ": sensitive words blocked, others correct"});
    check(slverr == exp_blocked, $sformatf("%s: %0d blocked writes, expected %0d", nm, slverr, exp_blocked));
    check(irq_viol, {nm, ": exception raised"});
    apb.read(APB_BASE + REG_SHELL_STATUS, st);
    check(st[0], {nm, ": violation flag"});
    apb.read(APB_BASE + REG_SHELL_VADDR, st);
    check(st == DST + 32'(first_bad), {nm, ": address of first blocked write"});
    apb.write(APB_BASE + REG_SHELL_STATUS, 1);
    apb.read(APB_BASE + REG_SHELL_STATUS, st);
    check(!st[0] && !irq_viol, {nm, ": violation cleared"});
  endtask

  initial begin
    data_t st;
    int cyc, cyc_on, cyc_off, bad, tag1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    mem.stall = 1;

    // ---- A: protected, honest patch ----
    dift_en = 1;
    setup_mem();
    run(FR0, FR1, FC0, FC1, cyc);
    bad = 0; tag1 = 0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        if (int'(mem.mem[DST + r * W + c]) != (face(r, c) ? blur(r, c) : px(r, c))) bad++;
        if (mem.tag[DST + r * W + c]) tag1++;
      end
    check(bad == 0, "A: output image");
    check(tag1 == 0, "A: output tags all 0");
    check(!irq_viol, "A: no violation");

    // ---- B: protected, attack shrinks the patch to its left half ----
    check_protected_attack("B", FR0, FR1, FC0, (FC0 + FC1) / 2);
    // ---- E: protected, attack moves the patch 4 rows down, 12 columns right ----
    check_protected_attack("E", FR0 + 4, FR1 + 4, FC0 + 12, FC1 + 12);

    // ---- C: unprotected, same attack: the leak succeeds ----
    dift_en = 0;
    setup_mem();
    wr_before = mem.n_wr;
    run(FR0, FR1, FC0, (FC0 + FC1) / 2, cyc);
    slverr = H * W / 4 - (mem.n_wr - wr_before);
    leaks = 0; bad = 0;
    for (int r = FR0; r < FR1; r++)
      for (int c = (FC0 + FC1) / 2; c < FC1; c++) begin
        if (int'(mem.mem[DST + r * W + c]) == px(r, c) && !mem.tag[DST + r * W + c]) leaks++;
        else bad++;
      end
    check(bad == 0 && leaks > 0, "C: unprotected accelerator leaks raw sensitive pixels with tag 0");
    check(!irq_viol && slverr == 0, "C: nothing detected");
    apb.read(APB_BASE + REG_SHELL_CTRL, st);
    check(st[0] == 1'b0, "C: CTRL reports protection off");

    // ---- D: no cycle overhead ----
    mem.stall = 0;
    dift_en = 1; setup_mem(); run(FR0, FR1, FC0, FC1, cyc_on);
    dift_en = 0; setup_mem(); run(FR0, FR1, FC0, FC1, cyc_off);
    check(cyc_on == cyc_off, $sformatf("D: %0d cycles protected, %0d unprotected", cyc_on, cyc_off));

    $display("blocked writes=%0d leaked pixels=%0d run cycles=%0d", blocked, leaks, cyc_on);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
