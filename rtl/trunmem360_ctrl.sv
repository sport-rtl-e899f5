// trunmem360_ctrl: the global TrunMEM360 controller.
//
// Per frame it (1) starts the tile classification for the newest predicted
// gaze and holds the pixel input off until the region map is complete, then
// (2) moves the frame through the three-bank truncation memory one pass at a
// time: up to WORDS pixels of one tile are written into the bank of the
// tile's region with the tile's truncation level (the truncation happens on
// the fly in the bank's column managers), then read back and sent to the
// DRAM display buffer. Frames alternate between DRAM frame buffers A and B
// (dram_buf), so the GPU can read the other one; this ping-pong and the
// per-region bank enable follow the paper, the pass-by-pass write/read
// schedule is this design's choice (it mirrors the paper's chip validation,
// where 1,024 pixels are written and read back per pass).
//
// Bank command timing (see trunc_sram_bank): while writing, each accepted
// pixel is loaded into the bank's input registers (din_en) and written one
// clock later (wl_en + we) while the next pixel loads, so one pixel per clock
// goes in. Reading works the same way with addresses. Precharge bar is high
// only in clocks with a wordline access.
//
// Pixel word: {8'h00, R, G, B}; byte select 0111 keeps the unused top byte
// lane idle.
//
// Interface: frame_start_i (one clock) starts a frame when idle. Pixels are
// offered on in_valid/in_pix and taken when in_ready is high (valid/ready
// handshake; in_ready is low during classification and while a pass is read
// out, which stalls the source). dram_valid/dram_addr/dram_data carry the
// truncated pixels out, dram_addr being the pixel index in the frame.
// frame_done pulses with the last pixel of a frame; dram_buf flips on the
// next clock. trained goes high after the first whole frame.
module trunmem360_ctrl
  import sport_pkg::*;
#(
  parameter int unsigned WORDS    = 1024,
  parameter int unsigned TILES    = 2040,
  parameter int unsigned TILE_PIX = 4096,
  localparam int unsigned WAW     = $clog2(WORDS),
  localparam int unsigned TAW     = $clog2(TILES),
  localparam int unsigned PAW     = $clog2(TILE_PIX),
  localparam int unsigned PIXW    = $clog2(TILES * TILE_PIX)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   frame_start_i,
  output logic                   cls_start_o,
  input  logic                   cls_done_i,
  // pixel stream
  input  logic                   in_valid,
  input  logic [CHANNELS*PIX_BITS-1:0] in_pix,
  output logic                   in_ready,
  // from the region expander
  output logic                   x_frame_start,
  output logic                   x_adv,
  input  logic [TAW-1:0]         x_tile,
  input  logic [PAW-1:0]         x_pix_in_tile,
  input  logic [WAW-1:0]         x_word_addr,
  input  logic                   x_pass_first,
  input  logic                   x_pass_last,
  input  logic                   x_frame_last,
  input  logic [NUM_REGIONS-1:0] x_bank_en,
  input  trunc_t                 x_t,
  // TrunMEM360 commands
  output logic [NUM_REGIONS-1:0] bank_en,
  output logic                   din_en,
  output logic [WORD_BITS-1:0]   din,
  output logic [WAW-1:0]         addr,
  output logic [BYTE_LANES-1:0]  byte_sel,
  output trunc_t                 t_out,
  output logic                   trunc_en,
  output logic                   pre_b,
  output logic                   wl_en,
  output logic                   we,
  output logic                   re,
  input  logic [WORD_BITS-1:0]   mem_dout,
  input  logic                   mem_dout_valid,
  // DRAM display buffer
  output logic                   dram_valid,
  output logic                   dram_buf,
  output logic [PIXW-1:0]        dram_addr,
  output logic [CHANNELS*PIX_BITS-1:0] dram_data,
  // status
  output logic                   frame_done,
  output logic                   trained
);

  typedef enum logic [2:0] {C_IDLE, C_CLS, C_WRITE, C_WFLUSH, C_READ} cstate_e;
  cstate_e state;

  logic [NUM_REGIONS-1:0] pass_bank;
  trunc_t                 pass_t;
  logic [PIXW-1:0]        pass_base;
  logic [WAW:0]           n_words;
  logic                   last_pass;
  logic                   wr_pend;
  logic [WAW:0]           ld_cnt, out_cnt;
  logic                   rd_pend;
  logic                   accept, rd_load;

  always_comb begin
    in_ready      = (state == C_WRITE);
    accept        = in_ready && in_valid;
    x_adv         = accept;
    x_frame_start = (state == C_IDLE) && frame_start_i;
    cls_start_o   = x_frame_start;
    rd_load       = (state == C_READ) && (ld_cnt < n_words);

    bank_en  = pass_bank;
    din_en   = 1'b0;
    din      = {8'h00, in_pix};
    addr     = x_word_addr;
    byte_sel = BYTE_LANES'(4'b0111);
    t_out    = pass_t;
    trunc_en = 1'b1;
    wl_en    = 1'b0;
    we       = 1'b0;
    re       = 1'b0;
    unique case (state)
      C_WRITE: begin
        if (accept && x_pass_first) begin
          bank_en = x_bank_en;
          t_out   = x_t;
        end
        din_en = accept;
        wl_en  = wr_pend;
        we     = wr_pend;
      end
      C_WFLUSH: begin
        wl_en = wr_pend;
        we    = wr_pend;
      end
      C_READ: begin
        din_en = rd_load;
        addr   = WAW'(ld_cnt);
        wl_en  = rd_pend;
        re     = rd_pend;
      end
      default: ;
    endcase
    pre_b = wl_en;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      pass_bank  <= '0;
      pass_t     <= '0;
      pass_base  <= '0;
      n_words    <= '0;
      last_pass  <= 1'b0;
      wr_pend    <= 1'b0;
      ld_cnt     <= '0;
      out_cnt    <= '0;
      rd_pend    <= 1'b0;
      dram_valid <= 1'b0;
      dram_buf   <= 1'b0;
      dram_addr  <= '0;
      dram_data  <= '0;
      frame_done <= 1'b0;
      trained    <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      dram_valid <= 1'b0;
      if (frame_done) dram_buf <= ~dram_buf;
      unique case (state)
        C_IDLE: if (frame_start_i) state <= C_CLS;
        C_CLS:  if (cls_done_i) state <= C_WRITE;
        C_WRITE: begin
          wr_pend <= accept;
          if (accept) begin
            if (x_pass_first) begin
              pass_bank <= x_bank_en;
              pass_t    <= x_t;
              pass_base <= PIXW'(x_tile) * PIXW'(TILE_PIX) + PIXW'(x_pix_in_tile);
            end
            if (x_pass_last) begin
              n_words   <= (WAW+1)'(x_word_addr) + 1'b1;
              last_pass <= x_frame_last;
              state     <= C_WFLUSH;
            end
          end
        end
        C_WFLUSH: begin
          wr_pend <= 1'b0;
          ld_cnt  <= '0;
          out_cnt <= '0;
          rd_pend <= 1'b0;
          state   <= C_READ;
        end
        C_READ: begin
          rd_pend <= rd_load;
          if (rd_load) ld_cnt <= ld_cnt + 1'b1;
          if (mem_dout_valid) begin
            dram_valid <= 1'b1;
            dram_addr  <= pass_base + PIXW'(out_cnt);
            dram_data  <= mem_dout[CHANNELS*PIX_BITS-1:0];
            out_cnt    <= out_cnt + 1'b1;
            if (out_cnt + 1'b1 == n_words) begin
              if (last_pass) begin
                frame_done <= 1'b1;
                trained    <= 1'b1;
                state      <= C_IDLE;
              end else begin
                state <= C_WRITE;
              end
            end
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
