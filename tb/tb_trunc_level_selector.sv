// tb_trunc_level_selector: self-checking test of the WS-PSNR-consistent
// truncation level search.
//
// Streams 8 x 8-pixel tiles at random places in a 60-row frame padded to 64
// rows. Each tile's pixels have least significant bits scattered around the
// dummy value of a random level with a random spread. One tile in ten has
// every byte = 24 mod 64, whose error stays at most 8 up to level 6, the only
// way to reach level 6 (at 30 dB); levels 0, 1 and 7 cannot be reached with
// these thresholds. The reference recomputes, in real arithmetic, each level's
// latitude-weighted MSE with w(r) = sin(pi r / H) (zero on padding rows) and
// finds the largest level whose MSE, and that of every level below it, stays
// under 255^2 / 10^(theta/10) for 40, 35 and 30 dB. Where a level's MSE lies
// within 0.2 % of a threshold the fixed-point hardware may decide either way
// and both answers are accepted. Also checks that levels_valid comes exactly
// three clocks after tile_end.
module tb_trunc_level_selector;
  import sport_pkg::*;

  localparam int H = 60, ROWS = 64, TS = 8;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tile_start = 1'b0, pix_valid = 1'b0, tile_end = 1'b0;
  logic [23:0] pix = '0;
  logic [5:0]  pix_row = '0;
  logic        levels_valid;
  level_set_t  levels;
  int checks = 0, failures = 0;
  int hist [8];

  trunc_level_selector #(.FRAME_H(H), .FRAME_ROWS(ROWS)) dut (
    .clk, .rst_n, .tile_start, .pix_valid, .pix, .pix_row, .tile_end,
    .levels_valid, .levels
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [23:0] tp [TS*TS];
  int          tr [TS*TS];

  // acceptable levels for a threshold: lo..hi (hi > lo only near a boundary)
  task automatic ref_levels(input real theta, output int lo, output int hi);
    real xi, wsum, mse;
    bit  run_lo, run_hi;
    xi = 65025.0 / (10.0 ** (theta / 10.0));
    lo = 0; hi = 0; run_lo = 1; run_hi = 1;
    for (int t = 1; t <= 7; t++) begin
      real acc;
      acc = 0.0; wsum = 0.0;
      for (int i = 0; i < TS * TS; i++) begin
        real w;
        w = (tr[i] < H) ? $sin(PI * tr[i] / H) : 0.0;
        for (int ch = 0; ch < 3; ch++) begin
          int y, e;
          y = tp[i][ch*8 +: 8];
          e = (y % (1 << t)) - (1 << (t - 1));
          acc += w * e * e;
        end
        wsum += 3.0 * w;
      end
      mse = (wsum > 0.0) ? acc / wsum : 0.0;
      if (run_lo && mse <= xi * 0.998) lo = t; else run_lo = 0;
      if (run_hi && mse <= xi * 1.002) hi = t; else run_hi = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      int r0, tc, spread, lat;
      bit special;
      special = ($urandom_range(0, 9) == 0);
      r0     = $urandom_range(0, ROWS - TS);
      tc     = $urandom_range(1, 7);
      spread = $urandom_range(0, 1) ? $urandom_range(0, 3) : $urandom_range(0, 1 << tc);
      for (int i = 0; i < TS * TS; i++) begin
        tr[i] = r0 + i / TS;
        for (int ch = 0; ch < 3; ch++) begin
          int v;
          v = (1 << (tc - 1)) + $urandom_range(0, 2 * spread) - spread;
          v = (v < 0) ? 0 : (v > (1 << tc) - 1) ? (1 << tc) - 1 : v;
          tp[i][ch*8 +: 8] = 8'(($urandom_range(0, 255) & ~((1 << tc) - 1)) | v);
          if (special) tp[i][ch*8 +: 8] = 8'({$urandom_range(0, 3), 6'd24});
        end
      end
      // stream the tile, sometimes with gaps
      for (int i = 0; i < TS * TS; i++) begin
        @(negedge clk);
        pix_valid  = 1'b1;
        pix        = tp[i];
        pix_row    = 6'(tr[i]);
        tile_start = (i == 0);
        tile_end   = (i == TS * TS - 1);
        if ($urandom_range(0, 7) == 0 && i != TS * TS - 1) begin
          @(negedge clk);
          pix_valid = 1'b0; tile_start = 1'b0; pix = $urandom;
        end
      end
      @(negedge clk);
      pix_valid = 1'b0; tile_end = 1'b0; tile_start = 1'b0;
      lat = 1;
      while (!levels_valid && lat < 10) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 3) begin
        failures++;
        $display("tile %0d: levels_valid after %0d clocks", k, lat);
      end
      begin
        int lo, hi, got;
        real th [3];
        th = '{40.0, 35.0, 30.0};
        for (int reg_i = 0; reg_i < 3; reg_i++) begin
          ref_levels(th[reg_i], lo, hi);
          got = (reg_i == 0) ? int'(levels.fov) : (reg_i == 1) ? int'(levels.border)
                                                              : int'(levels.bg);
          hist[got]++;
          checks++;
          if (got < lo || got > hi) begin
            failures++;
            $display("tile %0d theta %0.0f: level %0d, expected %0d..%0d", k, th[reg_i], got, lo, hi);
          end
        end
      end
    end
    // levels 0 and 1 cannot occur (the largest error of levels 1 and 2,
    // 2^2 = 4, is below the smallest limit, 6.5 at 40 dB) and neither can 7
    for (int t = 2; t < 7; t++) begin
      checks++;
      if (hist[t] == 0) begin failures++; $display("level %0d never chosen", t); end
    end
    $display("levels chosen: %0d %0d %0d %0d %0d %0d %0d %0d", hist[0], hist[1],
             hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
