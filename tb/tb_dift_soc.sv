// tb_dift_soc: end-to-end test of the SoC at its default parameters
// (32 KB instruction RAM, 32 KB + tags data RAM, 128 x 96 image).
// The testbench plays the two parts that are outside the RTL: the host that
// loads memory (host port) and the tag-aware core (data and fetch ports).
// It loads a program into the instruction RAM and checks it through the fetch
// port, loads an image whose face patch is tagged sensitive into the data
// RAM, and runs the four demonstration scenarios:
//  1. software blur by the core over its data port, tags declassified;
//  2. accelerator blur, honest patch, shell off: correct image;
//  3. accelerator, attacked (shrunk) patch, shell off: raw sensitive pixels
//     reach the output with tag 0 and nothing is detected;
//  4. accelerator, same attack, shell on: the exception is raised, the
//     sensitive words never reach memory, the shell reports the address.
// While the accelerator runs, the core polls its STATUS register and the host
// reads the instruction RAM, so the interconnect has to arbitrate. Each
// mechanism (core stalled by arbitration, DECERR, blur, blocked write, leak,
// exception, done interrupt, shell mode switch) is counted and must occur.
module tb_dift_soc;
  import dift_pkg::*;

  localparam int unsigned W = 128, H = 96;
  localparam addr_t SRC = DRAM_BASE, DST = DRAM_BASE + 32'h4000;
  localparam int FR0 = 24, FR1 = 64, FC0 = 40, FC1 = 100;      // true face patch
  localparam int AC1 = 70;                                     // attacked e_col_blur

  logic clk = 0, rst_n = 0, dift_en = 0;
  axi_req_t host_req, core_req;
  axi_rsp_t host_rsp, core_rsp;
  logic  fetch_req = 0, fetch_rvalid, irq_acc_done, irq_dift;
  addr_t fetch_addr = '0;
  data_t fetch_rdata;
  int checks = 0, failures = 0;
  int n_stall = 0, n_decerr = 0, n_blur = 0, n_block = 0, n_leak = 0, n_exc = 0, n_done = 0, n_mode = 0;

  always #5 clk = ~clk;

  dift_soc dut (.clk, .rst_n, .dift_en, .host_req, .host_rsp, .core_req, .core_rsp,
                .fetch_req, .fetch_addr, .fetch_rdata, .fetch_rvalid, .irq_acc_done, .irq_dift);
  axi_master_bfm host (.clk, .req(host_req), .rsp(host_rsp));
  axi_master_bfm core (.clk, .req(core_req), .rsp(core_rsp));

  byte unsigned img [H][W];
  data_t prog [64];
  logic last_en = 0;

  always @(posedge clk) if (rst_n) begin
    if (core_req.ar_valid && !core_rsp.ar_ready) n_stall++;
    if (irq_acc_done) n_done++;
    if (irq_dift && !$past(irq_dift)) n_exc++;
    if (dift_en != last_en) begin n_mode++; last_en <= dift_en; end
  end

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
    return int'(img[r][c]);
  endfunction
  function automatic int blur(int r, int c);
    int s = 0;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) s += px(r + dr, c + dc);
    return s / 9;
  endfunction

  task automatic host_load_image();
    data_t d; tag_t t; resp_e r;
    for (int row = 0; row < H; row++)
      for (int w = 0; w < W / 4; w++) begin
        for (int j = 0; j < 4; j++) begin
          d[8*j +: 8] = img[row][4*w+j];
          t[j] = face(row, 4*w+j);
        end
        host.write(SRC + 32'(row * W + 4 * w), d, 4'hF, t, r);
      end
  endtask

  task automatic host_fill_output();
    resp_e r;
    for (int i = 0; i < W * H / 4; i++) host.write(DST + 32'(4 * i), 32'hEEEE_EEEE, 4'hF, 4'h0, r);
  endtask

  // expected output of a run with patch columns [FC0, ec); mode: 0 = copy/blur,
  // returns counts of mismatches against the rules of each scenario
  task automatic host_check_output(input int ec, input bit protect, input string tagname);
    data_t d; tag_t t; resp_e r;
    int bad = 0, badtag = 0, leak = 0, blk = 0, bl = 0;
    bit inp, sens;
    for (int row = 0; row < H; row++)
      for (int w = 0; w < W / 4; w++) begin
        host.read(DST + 32'(row * W + 4 * w), d, t, r);
        sens = 0;
        for (int j = 0; j < 4; j++)
          if (face(row, 4*w+j) && !(row >= FR0 && row < FR1 && 4*w+j >= FC0 && 4*w+j < ec)) sens = 1;
        if (protect && sens) begin
          if (d != 32'hEEEE_EEEE) bad++;
          blk++;
        end else
          for (int j = 0; j < 4; j++) begin
            inp = row >= FR0 && row < FR1 && 4*w+j >= FC0 && 4*w+j < ec;
            if (int'(d[8*j +: 8]) != (inp ? blur(row, 4*w+j) : px(row, 4*w+j))) bad++;
            if (inp) bl++;
            if (t[j]) badtag++;
            if (face(row, 4*w+j) && !inp) leak++;
          end
      end
    check(bad == 0, {tagname, ": output pixels"});
    check(badtag == 0, {tagname, ": output tags 0"});
    n_blur += bl; n_block += blk; n_leak += leak;
    if (protect) check(leak == 0 && blk > 0, {tagname, ": no leak, writes blocked"});
    $display("%s: blurred=%0d blocked words=%0d leaked pixels=%0d", tagname, bl, blk, leak);
  endtask

  task automatic core_run_acc(input int ec);
    data_t st; tag_t t; resp_e r; data_t d;
    core.write(APB_BASE + REG_SRC,   SRC, 4'hF, 0, r);
    check(r == RESP_OKAY, "APB write through AXI");
    core.write(APB_BASE + REG_DST,   DST, 4'hF, 0, r);
    core.write(APB_BASE + REG_I_ROW, FR0, 4'hF, 0, r);
    core.write(APB_BASE + REG_E_ROW, FR1, 4'hF, 0, r);
    core.write(APB_BASE + REG_I_COL, FC0, 4'hF, 0, r);
    core.write(APB_BASE + REG_E_COL, ec,  4'hF, 0, r);
    core.write(APB_BASE + REG_CTRL,  1,   4'hF, 0, r);
    fork
      begin   // core polls STATUS
        do core.read(APB_BASE + REG_STATUS, st, t, r); while (st[0]);
      end
      begin   // host reads the program back meanwhile
        for (int i = 0; i < 64; i++) begin
          host.read(IRAM_BASE + 32'(4 * i), d, t, r);
          check(d == prog[i] && t == 0, "host program read-back during run");
        end
      end
    join
    check(st[1], "accelerator done");
  endtask

  initial begin
    data_t d; tag_t t; resp_e r;
    int bad, dummy;
    for (int row = 0; row < H; row++) for (int c = 0; c < W; c++) img[row][c] = 8'($urandom);
    for (int i = 0; i < 64; i++) prog[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- host loads program and image ----
    for (int i = 0; i < 64; i++) host.write(IRAM_BASE + 32'(4 * i), prog[i], 4'hF, 4'h0, r);
    bad = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); fetch_req = 1; fetch_addr = IRAM_BASE + 32'(4 * i);
      @(negedge clk); fetch_req = 0;
      if (!fetch_rvalid || fetch_rdata != prog[i]) bad++;
    end
    check(bad == 0, "core fetches the loaded program");
    host_load_image();
    host.read(SRC + 32'(FR0 * W + FC0), d, t, r);
    check(t == 4'hF, "face pixels tagged in data RAM");
    core.read(32'h4000_0000, d, t, r);
    check(r == RESP_DECERR, "unmapped address"); if (r == RESP_DECERR) n_decerr++;

    // ---- scenario 1: software blur on the core ----
    host_fill_output();
    for (int row = 0; row < H; row++)
      for (int w = 0; w < W / 4; w++) begin
        core.read(SRC + 32'(row * W + 4 * w), d, t, r);
        for (int j = 0; j < 4; j++)
          if (face(row, 4*w+j)) begin d[8*j +: 8] = 8'(blur(row, 4*w+j)); t[j] = 1'b0; end
        core.write(DST + 32'(row * W + 4 * w), d, 4'hF, t, r);
      end
    host_check_output(FC1, 0, "scenario 1 (software)");

    // ---- scenario 2: accelerator, no attack, shell off ----
    dift_en = 0;
    host_fill_output();
    core_run_acc(FC1);
    host_check_output(FC1, 0, "scenario 2 (accelerator)");
    check(!irq_dift, "scenario 2: no exception");

    // ---- scenario 3: accelerator, attack, shell off ----
    host_fill_output();
    dummy = n_leak;
    core_run_acc(AC1);
    host_check_output(AC1, 0, "scenario 3 (attack, unprotected)");
    check(n_leak > dummy && !irq_dift, "scenario 3: the attack leaks and is not detected");

    // ---- scenario 4: accelerator, attack, shell on ----
    dift_en = 1;
    host_fill_output();
    dummy = n_leak;
    core_run_acc(AC1);
    host_check_output(AC1, 1, "scenario 4 (attack, protected)");
    check(irq_dift, "scenario 4: exception raised");
    core.read(APB_BASE + REG_SHELL_VADDR, d, t, r);
    check(d == DST + 32'(FR0 * W + (AC1 / 4) * 4), "scenario 4: address of first blocked write");
    core.write(APB_BASE + REG_SHELL_STATUS, 1, 4'hF, 0, r);
    repeat (2) @(negedge clk);
    check(!irq_dift, "scenario 4: exception cleared");

    // ---- every mechanism happened ----
    check(n_stall > 0,  "core stalled by arbitration");
    check(n_decerr > 0, "decode error");
    check(n_blur > 0,   "blur");
    check(n_block > 0,  "blocked write");
    check(n_leak > 0,   "leak without shell");
    check(n_exc > 0,    "DIFT exception");
    check(n_done == 3,  "accelerator done interrupts");
    check(n_mode > 0,   "shell mode switch");
    $display("stall=%0d decerr=%0d blur=%0d blocked=%0d leak=%0d exc=%0d done=%0d mode=%0d",
             n_stall, n_decerr, n_blur, n_block, n_leak, n_exc, n_done, n_mode);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
