// sport_top: the SPORT display-path truncation engine (gaze prediction, tile
// classification, WS-PSNR-consistent truncation level selection and the
// three-bank TrunMEM360 truncation memory) that sits between the video
// decoder's display output and the DRAM frame buffers.
//
// Flow per frame:
//   1. IMU samples (1 kHz) update the gaze predictor continuously.
//   2. frame_start launches the tile classifier on the latest predicted gaze;
//      it fills the region map (FoV / Border / Background per tile).
//   3. The decoded frame streams in tile by tile (in_valid/in_ready). The
//      region expander gives each pixel its bank and truncation level; the
//      controller writes it into that bank of TrunMEM360, where the column
//      truncation managers keep the 8-t MSBs of each channel and the dummy
//      1 0..0 pattern replaces the rest, and reads each pass back out to the
//      DRAM frame buffer (A or B, alternating per frame).
//   4. In parallel, the truncation level selector computes each tile's
//      WS-PSNR-limited levels for the three region thresholds and stores them
//      in the level table; they set the Border/Background levels (and the FoV
//      level in SPORT-A mode) of that tile in the next frame. Before the first
//      frame is complete the paper's fixed levels 0/4/5 apply.
// sport_a selects SPORT-A (adaptive FoV level) instead of SPORT-B (lossless
// FoV, the paper's recommended configuration).
//
// The decoder, IMU, DRAM, GPU and display are outside this module; their
// connections are the ports. active_bits/total_bits count the stored bits
// that were not power-gated and all stored bits; 1 - active/total is the
// paper's memory power saving measure.
//
// Defaults: 4K ERP (3840 x 2160, padded to 34 tile rows), 64 x 64 tiles,
// 1024 x 32-bit banks, 16 CORDIC steps, T_total 9.33 ms, 1 ms IMU period,
// moderate thresholds 40/35/30 dB.
module sport_top
  import sport_pkg::*;
#(
  parameter int unsigned TILE_ROWS       = 34,
  parameter int unsigned TILE_COLS       = 60,
  parameter int unsigned TILE_SIZE       = 64,
  parameter int unsigned FRAME_H         = 2160,
  parameter int unsigned FRAME_W         = 3840,
  parameter int unsigned WORDS           = 1024,
  parameter int unsigned ITER            = 16,
  parameter int unsigned T_TOTAL_US      = 9330,
  parameter int unsigned DT_US           = 1000,
  parameter int unsigned THETA_FOV_DB    = 40,
  parameter int unsigned THETA_BORDER_DB = 35,
  parameter int unsigned THETA_BG_DB     = 30,
  localparam int unsigned TILES          = TILE_ROWS * TILE_COLS,
  localparam int unsigned TAW            = $clog2(TILES),
  localparam int unsigned TILE_PIX       = TILE_SIZE * TILE_SIZE,
  localparam int unsigned PIXW           = $clog2(TILES * TILE_PIX)
) (
  input  logic        clk,
  input  logic        rst_n,
  // head tracker
  input  logic        imu_valid,
  input  angle_t      imu_theta,
  input  angle_t      imu_phi,
  // configuration
  input  logic        sport_a,
  // decoder display stream
  input  logic        frame_start,
  input  logic        in_valid,
  input  logic [CHANNELS*PIX_BITS-1:0] in_pix,
  output logic        in_ready,
  // DRAM display buffer
  output logic        dram_valid,
  output logic        dram_buf,     // buffer being written (0 = A, 1 = B)
  output logic        gpu_buf,      // buffer the GPU reads
  output logic [PIXW-1:0] dram_addr,
  output logic [CHANNELS*PIX_BITS-1:0] dram_data,
  // status
  output logic        frame_done,
  output logic        cls_busy,
  output angle_t      gaze_theta,
  output angle_t      gaze_phi,
  output logic        gaze_clipped,
  output logic [TAW:0] n_fov,
  output logic [TAW:0] n_border,
  output logic [TAW:0] n_bg,
  output logic [47:0] active_bits,
  output logic [47:0] total_bits
);

  localparam int unsigned WAW = $clog2(WORDS);
  localparam int unsigned PAW = $clog2(TILE_PIX);
  localparam int unsigned RW  = $clog2(TILE_ROWS * TILE_SIZE);

  // ---------------- gaze prediction ----------------
  logic               pred_valid;
  logic signed [31:0] omega_theta, omega_phi;

  gaze_predictor #(.T_TOTAL_US(T_TOTAL_US), .DT_US(DT_US)) u_pred (
    .clk, .rst_n,
    .imu_valid, .theta_now(imu_theta), .phi_now(imu_phi),
    .pred_valid,
    .theta_pred(gaze_theta), .phi_pred(gaze_phi),
    .omega_theta, .omega_phi,
    .clip_hit  (gaze_clipped)
  );

  // ---------------- tile classification ----------------
  logic          cls_start, cls_done;
  logic [TAW-1:0] rom_addr;
  tile_meta_t    rom_data;
  logic          map_we;
  logic [TAW-1:0] map_waddr, map_raddr;
  logic [7:0]    map_wdata, map_rdata;

  tile_rom #(
    .TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .TILE_SIZE(TILE_SIZE),
    .FRAME_H(FRAME_H), .FRAME_W(FRAME_W)
  ) u_rom (.clk, .addr_i(rom_addr), .data_o(rom_data));

  tile_classifier #(
    .TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .ITER(ITER)
  ) u_cls (
    .clk, .rst_n,
    .start      (cls_start),
    .theta_g    (gaze_theta),
    .phi_g      (gaze_phi),
    .busy       (cls_busy),
    .done       (cls_done),
    .rom_addr_o (rom_addr),
    .rom_data_i (rom_data),
    .map_we_o   (map_we),
    .map_waddr_o(map_waddr),
    .map_wdata_o(map_wdata),
    .n_fov, .n_border, .n_bg
  );

  region_map_sram #(.ENTRIES(TILES), .WIDTH(8)) u_map (
    .clk,
    .we_i(map_we), .waddr_i(map_waddr), .wdata_i(map_wdata),
    .raddr_i(map_raddr), .rdata_o(map_rdata)
  );

  // ---------------- region expansion ----------------
  logic           frame_start_x, adv, trained;
  logic [TAW-1:0] x_tile;
  logic [PAW-1:0] x_pix;
  logic [RW-1:0]  x_row;
  logic [WAW-1:0] x_word;
  logic           x_first, x_pass_first, x_pass_last, x_tile_last, x_frame_last;
  region_e        x_region;
  logic [NUM_REGIONS-1:0] x_bank_en;
  trunc_t         x_t;
  level_set_t     lvl_rdata;

  region_expander #(
    .TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .TILE_SIZE(TILE_SIZE),
    .WORDS(WORDS)
  ) u_exp (
    .clk, .rst_n,
    .frame_start(frame_start_x),
    .adv, .sport_a, .trained,
    .map_raddr, .map_rdata, .lvl_rdata,
    .tile(x_tile), .pix_in_tile(x_pix), .row(x_row), .word_addr(x_word),
    .first_in_tile(x_first), .pass_first(x_pass_first),
    .pass_last(x_pass_last), .tile_last(x_tile_last),
    .frame_last(x_frame_last),
    .region(x_region), .bank_en(x_bank_en), .t(x_t)
  );

  // ---------------- truncation level selection ----------------
  logic           lv_valid;
  level_set_t     lv_set;
  logic [TAW-1:0] lv_tile;

  trunc_level_selector #(
    .FRAME_H(FRAME_H), .FRAME_ROWS(TILE_ROWS * TILE_SIZE),
    .THETA_FOV_DB(THETA_FOV_DB), .THETA_BORDER_DB(THETA_BORDER_DB),
    .THETA_BG_DB(THETA_BG_DB)
  ) u_sel (
    .clk, .rst_n,
    .tile_start  (adv && x_first),
    .pix_valid   (adv),
    .pix         (in_pix),
    .pix_row     (x_row),
    .tile_end    (adv && x_tile_last),
    .levels_valid(lv_valid),
    .levels      (lv_set)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    lv_tile <= '0;
    else if (adv && x_tile_last)   lv_tile <= x_tile;
  end

  region_map_sram #(.ENTRIES(TILES), .WIDTH($bits(level_set_t))) u_lvl (
    .clk,
    .we_i(lv_valid), .waddr_i(lv_tile), .wdata_i(lv_set),
    .raddr_i(map_raddr), .rdata_o(lvl_rdata)
  );

  // ---------------- controller and memory ----------------
  logic [NUM_REGIONS-1:0] bank_en;
  logic                   din_en, trunc_en, pre_b, wl_en, we, re;
  logic [WORD_BITS-1:0]   din, mem_dout;
  logic [WAW-1:0]         addr;
  logic [BYTE_LANES-1:0]  byte_sel;
  trunc_t                 t_cmd;
  logic                   mem_dout_valid;
  logic [WORD_BITS-1:0]   col_gated [NUM_REGIONS];

  trunmem360_ctrl #(.WORDS(WORDS), .TILES(TILES), .TILE_PIX(TILE_PIX)) u_ctrl (
    .clk, .rst_n,
    .frame_start_i(frame_start),
    .cls_start_o  (cls_start),
    .cls_done_i   (cls_done),
    .in_valid, .in_pix, .in_ready,
    .x_frame_start(frame_start_x),
    .x_adv        (adv),
    .x_tile, .x_pix_in_tile(x_pix), .x_word_addr(x_word),
    .x_pass_first, .x_pass_last, .x_frame_last, .x_bank_en, .x_t,
    .bank_en, .din_en, .din, .addr, .byte_sel, .t_out(t_cmd), .trunc_en,
    .pre_b, .wl_en, .we, .re,
    .mem_dout, .mem_dout_valid,
    .dram_valid, .dram_buf, .dram_addr, .dram_data,
    .frame_done, .trained
  );

  trunmem360 #(.WORDS(WORDS)) u_mem (
    .clk, .rst_n,
    .bank_en, .din_en, .din, .addr, .byte_sel, .t_in(t_cmd), .trunc_en,
    .pre_b, .wl_en, .we, .re,
    .dout(mem_dout), .dout_valid(mem_dout_valid),
    .col_gated
  );

  assign gpu_buf = ~dram_buf;

  // ---------------- power accounting ----------------
  logic [WORD_BITS-1:0] gated_now;
  logic [5:0]           active_now;
  always_comb begin
    gated_now = '0;
    for (int b = 0; b < NUM_REGIONS; b++)
      if (bank_en[b]) gated_now = col_gated[b];
    active_now = '0;
    for (int c = 0; c < CHANNELS * PIX_BITS; c++)
      active_now = active_now + 6'(!gated_now[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_bits <= '0;
      total_bits  <= '0;
    end else if (wl_en && we) begin
      active_bits <= active_bits + 48'(active_now);
      total_bits  <= total_bits + 48'(CHANNELS * PIX_BITS);
    end
  end

endmodule
