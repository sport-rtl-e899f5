// trunc_level_selector: WS-PSNR-consistent truncation level selection (the
// paper's Algorithm 2) for one tile at a time.
//
// For each level t = 1..7 the tile's expected latitude-weighted MSE is
//   E[WS-MSE_b](t) = sum_i w_i (y_i mod 2^t - 2^(t-1))^2 / W_b,
// with w_i = cos(phi_i) of the pixel's row, W_b = sum_i w_i, and the dummy
// value 2^(t-1) of the 10..0 pattern. The chosen level is the largest t such
// that every level up to it satisfies E[WS-MSE_b] <= xi_b = 255^2 /
// 10^(theta_b/10); the search stops at the first level that fails, as in the
// paper. To avoid a divider the test is done as
//   256 * sum w e^2  <=  xi_Q8 * W_b
// with xi in Q8, rounded at elaboration from the WS-PSNR thresholds.
// The three region thresholds (moderate configuration: 40, 35, 30 dB) are
// evaluated side by side from the same sums, so each tile gets a level for
// each region it might fall in.
//
// The paper runs Algorithm 2 in software on training data. In this design it
// is a streaming hardware unit; each of the three colour channels of a pixel
// counts as one sample of the tile (this design's choice), and the row
// weights come from a table filled at initialisation with
// w(r) = cos(pi/2 - pi*r/H) = sin(pi*r/H) (paper's latitude formula), zero for
// the padding rows below the frame.
//
// Interface: tile_start clears the sums (it may coincide with the first
// pixel, which is then counted). pix_valid qualifies pix (R, G, B bytes,
// R in [23:16]) and pix_row, the pixel's row in the frame. tile_end, given
// with or after the last pixel, makes levels_valid pulse three clocks later
// with the three levels.
module trunc_level_selector
  import sport_pkg::*;
#(
  parameter int unsigned FRAME_H         = 2160,
  parameter int unsigned FRAME_ROWS      = 2176,  // tile rows x tile size
  parameter int unsigned THETA_FOV_DB    = 40,
  parameter int unsigned THETA_BORDER_DB = 35,
  parameter int unsigned THETA_BG_DB     = 30,
  localparam int unsigned RW             = $clog2(FRAME_ROWS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          tile_start,
  input  logic                          pix_valid,
  input  logic [CHANNELS*PIX_BITS-1:0]  pix,
  input  logic [RW-1:0]                 pix_row,
  input  logic                          tile_end,
  output logic                          levels_valid,
  output level_set_t                    levels
);

  function automatic longint unsigned xi_q8(input int unsigned theta_db);
    real xi;
    xi = 65025.0 / (10.0 ** (real'(theta_db) / 10.0));
    return longint'($rtoi(xi * 256.0 + 0.5));
  endfunction

  localparam longint unsigned XI_Q8 [NUM_REGIONS] = '{
    xi_q8(THETA_FOV_DB), xi_q8(THETA_BORDER_DB), xi_q8(THETA_BG_DB)
  };

  // row weight table, Q1.15
  logic [15:0] wtab [FRAME_ROWS];
  initial begin
    for (int unsigned r = 0; r < FRAME_ROWS; r++) begin
      logic [63:0] sc;
      if (2 * r > FRAME_H && r < FRAME_H) begin
        wtab[r] = wtab[FRAME_H - r];          // sin(pi r/H) = sin(pi (H-r)/H)
      end else if (r < FRAME_H) begin
        sc = cordic_sincos(32'((64'(r) << 31) / 64'(FRAME_H)), 30);
        wtab[r] = 16'((sc[63:32] + 32'd16384) >> 15);
      end else begin
        wtab[r] = '0;
      end
    end
  end

  // stage 1: weight lookup
  logic        s1_valid, s1_end, s1_start;
  logic [CHANNELS*PIX_BITS-1:0] s1_pix;
  logic [15:0] s1_w;

  // stage 2: accumulation
  logic [47:0] acc [1:7];
  logic [47:0] wsum;
  logic        s2_end;

  // squared errors of the current pixel, per level
  logic [15:0] sq [1:7];

  always_comb begin
    for (int t = 1; t <= 7; t++) begin
      sq[t] = '0;
      for (int ch = 0; ch < CHANNELS; ch++) begin
        logic signed [8:0] e;
        logic [7:0] y, lsb;
        y   = s1_pix[ch*PIX_BITS +: PIX_BITS];
        lsb = y & 8'((1 << t) - 1);
        e   = signed'(9'(lsb)) - signed'(9'(1 << (t - 1)));
        sq[t] = sq[t] + 16'(e * e);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_end   <= 1'b0;
      s1_start <= 1'b0;
      s1_pix   <= '0;
      s1_w     <= '0;
    end else begin
      s1_valid <= pix_valid;
      s1_end   <= tile_end;
      s1_start <= tile_start;
      s1_pix   <= pix;
      s1_w     <= wtab[pix_row];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 1; t <= 7; t++) acc[t] <= '0;
      wsum   <= '0;
      s2_end <= 1'b0;
    end else begin
      s2_end <= s1_end;
      if (s1_start) begin
        for (int t = 1; t <= 7; t++)
          acc[t] <= s1_valid ? 48'(s1_w) * 48'(sq[t]) : '0;
        wsum <= s1_valid ? 48'(s1_w) * 48'(CHANNELS) : '0;
      end else if (s1_valid) begin
        for (int t = 1; t <= 7; t++)
          acc[t] <= acc[t] + 48'(s1_w) * 48'(sq[t]);
        wsum <= wsum + 48'(s1_w) * 48'(CHANNELS);
      end
    end
  end

  // stage 3: threshold test and level search
  trunc_t lvl [NUM_REGIONS];
  always_comb begin
    for (int k = 0; k < NUM_REGIONS; k++) begin
      logic run;
      run    = 1'b1;
      lvl[k] = '0;
      for (int t = 1; t <= 7; t++) begin
        if (run && ({8'b0, acc[t], 8'b0} <= 64'(XI_Q8[k]) * {16'b0, wsum}))
          lvl[k] = trunc_t'(t);
        else
          run = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      levels_valid <= 1'b0;
      levels       <= '0;
    end else begin
      levels_valid <= s2_end;
      if (s2_end) begin
        levels.fov    <= lvl[REG_FOV];
        levels.border <= lvl[REG_BORDER];
        levels.bg     <= lvl[REG_BG];
      end
    end
  end

endmodule
