// obfuscator: face-obfuscation accelerator.
//
// Blurs a rectangular patch of an 8-bit grayscale image and copies every
// other pixel unchanged. The patch is rows [i_row_blur, e_row_blur) and
// columns [i_col_blur, e_col_blur) of an IMG_W x IMG_H image stored row by row,
// one byte per pixel, at byte address SRC; the result goes to DST. The blur is
// the mean (rounded down) of the 3x3 neighbourhood of the pixel in the input
// image, with the border pixels repeated at the image edges.
//
// How it works: the image is processed one output row at a time. For a row
// that crosses the patch the accelerator reads input rows r-1, r and r+1
// (clamped to the image) into three line buffers; for any other row it reads
// row r only. It then writes the output row one 32-bit word (4 pixels) at a
// time, each word computed in one cycle from three neighbouring words of each
// line buffer. Every memory access is a single-beat AXI4 transfer, one at a
// time.
//
// Interface: APB3 slave for the registers (dift_pkg REG_*; zero wait states),
// AXI4 master for the image data, irq pulses for one cycle when a run ends.
// The accelerator knows nothing about DIFT: it drives w_tag = 0 and ignores
// r_tag; the DIFT shell wraps it to add and check the tags.
//
// From the published design: the patch parameters, memory-mapped registers for the two
// image addresses and the four patch bounds, and a blur applied to the patch
// only. This design's own choices: the 3x3 box filter, the half-open bounds,
// the image size parameters, the register layout, the row schedule and the
// bus protocol. All register writes are ignored while a run is in progress.
// IMG_W must be a multiple of 4.
module obfuscator
  import dift_pkg::*;
#(
  parameter int unsigned IMG_W = 128,
  parameter int unsigned IMG_H = 96
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output axi_req_t axi_req,
  input  axi_rsp_t axi_rsp,
  output logic     irq
);

  localparam int unsigned WPR = IMG_W / 4;          // words per row
  localparam int unsigned KW  = (WPR > 1) ? $clog2(WPR) : 1;

  typedef logic [15:0] coord_t;

  // ---------------- registers ----------------
  addr_t  src_q, dst_q;
  coord_t i_row_q, e_row_q, i_col_q, e_col_q;
  logic   busy_q, done_q;
  logic   start;

  // ---------------- engine ----------------
  typedef enum logic [2:0] {S_IDLE, S_ROW, S_RADDR, S_RDATA, S_WRITE, S_WRESP} state_e;
  state_e state_q;

  coord_t        row_q;                 // output row being produced
  logic          patch_row_q;           // row crosses the patch
  logic [1:0]    slot_q;                // line buffer being loaded
  logic [KW-1:0] word_q;                // word within the row
  logic          aw_done_q, w_done_q;

  data_t lb [3][WPR];                   // line buffers: rows r-1, r, r+1

  coord_t slot_row;                     // input row loaded into slot_q
  data_t  out_word;

  // Register file (APB, zero wait states)
  always_comb begin
    apb_rsp.pready  = 1'b1;
    apb_rsp.pslverr = 1'b0;
    apb_rsp.prdata  = '0;
    unique case (apb_req.paddr[7:0])
      REG_STATUS: apb_rsp.prdata = {30'h0, done_q, busy_q};
      REG_SRC:    apb_rsp.prdata = src_q;
      REG_DST:    apb_rsp.prdata = dst_q;
      REG_I_ROW:  apb_rsp.prdata = {16'h0, i_row_q};
      REG_E_ROW:  apb_rsp.prdata = {16'h0, e_row_q};
      REG_I_COL:  apb_rsp.prdata = {16'h0, i_col_q};
      REG_E_COL:  apb_rsp.prdata = {16'h0, e_col_q};
      default:    apb_rsp.prdata = '0;
    endcase
  end

  wire apb_wr = apb_req.psel && apb_req.penable && apb_req.pwrite && !busy_q;
  assign start = apb_wr && (apb_req.paddr[7:0] == REG_CTRL) && apb_req.pwdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q <= '0; dst_q <= '0;
      i_row_q <= '0; e_row_q <= '0; i_col_q <= '0; e_col_q <= '0;
    end else if (apb_wr) begin
      unique case (apb_req.paddr[7:0])
        REG_SRC:   src_q   <= apb_req.pwdata;
        REG_DST:   dst_q   <= apb_req.pwdata;
        REG_I_ROW: i_row_q <= apb_req.pwdata[15:0];
        REG_E_ROW: e_row_q <= apb_req.pwdata[15:0];
        REG_I_COL: i_col_q <= apb_req.pwdata[15:0];
        REG_E_COL: e_col_q <= apb_req.pwdata[15:0];
        default: ;
      endcase
    end
  end

  // Input row held by each line buffer slot: r-1, r, r+1, clamped
  always_comb begin
    unique case (slot_q)
      2'd0:    slot_row = (row_q == 0) ? row_q : row_q - 1'b1;
      2'd2:    slot_row = (row_q == coord_t'(IMG_H - 1)) ? row_q : row_q + 1'b1;
      default: slot_row = row_q;
    endcase
  end

  // One output word: 4 pixels of row row_q starting at column 4*word_q
  always_comb begin
    logic [7:0]  win [3][6];            // columns 4k-1 .. 4k+4 of each slot
    logic [11:0] sum;
    int unsigned col;
    data_t       wl, wc, wr;
    for (int s = 0; s < 3; s++) begin
      wc = lb[s][word_q];
      wl = (word_q == 0)             ? wc : lb[s][word_q - 1'b1];
      wr = (word_q == KW'(WPR - 1))  ? wc : lb[s][word_q + 1'b1];
      win[s][0] = (word_q == 0)            ? wc[7:0]   : wl[31:24];
      for (int j = 0; j < 4; j++) win[s][j+1] = wc[8*j +: 8];
      win[s][5] = (word_q == KW'(WPR - 1)) ? wc[31:24] : wr[7:0];
    end
    out_word = '0;
    for (int j = 0; j < 4; j++) begin
      col = 4 * int'(word_q) + j;
      sum = '0;
      for (int s = 0; s < 3; s++)
        for (int d = 0; d < 3; d++) sum = sum + 12'(win[s][j+d]);
      if (patch_row_q && col >= int'(i_col_q) && col < int'(e_col_q))
        out_word[8*j +: 8] = 8'(sum / 12'd9);
      else
        out_word[8*j +: 8] = win[1][j+1];
    end
  end

  // AXI master
  always_comb begin
    axi_req          = '0;
    axi_req.ar_valid = (state_q == S_RADDR);
    axi_req.ar_addr  = src_q + addr_t'(slot_row) * addr_t'(IMG_W) + addr_t'({word_q, 2'b00});
    axi_req.r_ready  = (state_q == S_RDATA);
    axi_req.aw_valid = (state_q == S_WRITE) && !aw_done_q;
    axi_req.aw_addr  = dst_q + addr_t'(row_q) * addr_t'(IMG_W) + addr_t'({word_q, 2'b00});
    axi_req.w_valid  = (state_q == S_WRITE) && !w_done_q;
    axi_req.w_data   = out_word;
    axi_req.w_strb   = '1;
    axi_req.w_tag    = '0;
    axi_req.b_ready  = (state_q == S_WRESP);
  end

  always_ff @(posedge clk) begin
    if (state_q == S_RDATA && axi_rsp.r_valid) lb[slot_q][word_q] <= axi_rsp.r_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      busy_q <= 1'b0; done_q <= 1'b0; irq <= 1'b0;
      row_q <= '0; patch_row_q <= 1'b0; slot_q <= '0; word_q <= '0;
      aw_done_q <= 1'b0; w_done_q <= 1'b0;
    end else begin
      irq <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          busy_q  <= 1'b1;
          done_q  <= 1'b0;
          row_q   <= '0;
          state_q <= S_ROW;
        end
        S_ROW: begin
          patch_row_q <= (row_q >= i_row_q) && (row_q < e_row_q) && (i_col_q < e_col_q);
          slot_q      <= ((row_q >= i_row_q) && (row_q < e_row_q) && (i_col_q < e_col_q)) ? 2'd0 : 2'd1;
          word_q      <= '0;
          state_q     <= S_RADDR;
        end
        S_RADDR: if (axi_rsp.ar_ready) state_q <= S_RDATA;
        S_RDATA: if (axi_rsp.r_valid) begin
          if (word_q == KW'(WPR - 1)) begin
            word_q <= '0;
            if (slot_q == 2'd2 || !patch_row_q) begin
              state_q <= S_WRITE;
            end else begin
              slot_q  <= slot_q + 1'b1;
              state_q <= S_RADDR;
            end
          end else begin
            word_q  <= word_q + 1'b1;
            state_q <= S_RADDR;
          end
        end
        S_WRITE: begin
          if (axi_rsp.aw_ready) aw_done_q <= 1'b1;
          if (axi_rsp.w_ready)  w_done_q  <= 1'b1;
          if ((aw_done_q || axi_rsp.aw_ready) && (w_done_q || axi_rsp.w_ready)) begin
            aw_done_q <= 1'b0;
            w_done_q  <= 1'b0;
            state_q   <= S_WRESP;
          end
        end
        S_WRESP: if (axi_rsp.b_valid) begin
          if (word_q == KW'(WPR - 1)) begin
            if (row_q == coord_t'(IMG_H - 1)) begin
              busy_q  <= 1'b0;
              done_q  <= 1'b1;
              irq     <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              row_q   <= row_q + 1'b1;
              state_q <= S_ROW;
            end
          end else begin
            word_q  <= word_q + 1'b1;
            state_q <= S_WRITE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
