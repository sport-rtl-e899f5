// tb_sport_top: end-to-end self-checking test of the SPORT engine.
//
// A small frame keeps the run short: 3 x 6 tiles of 8 x 8 pixels (a 48 x 22
// picture padded to 24 rows), 16-word banks, so every tile passes through the
// truncation memory in four passes. Ten frames are run. Before each frame
// two IMU samples set the head position and velocity; the gaze predictor
// extrapolates, frame_start launches classification, and the frame streams
// in with random gaps. Pixel LSBs are drawn per tile around the dummy value
// of a random level, so the learnt levels vary from tile to tile.
//
// Independent reference (real arithmetic):
//   - predicted gaze = now + 9.33 (now - prev), latitude clipped at the poles,
//     longitude modulo 2 pi; compared with the engine's within rounding;
//   - each tile's region from the spherical law of cosines with the
//     predicted gaze (both regions accepted within 2e-4 of a boundary);
//   - each tile's levels for 40/35/30 dB from its pixels in the previous
//     frame (latitude-weighted MSE, 0.2 % tolerance at a threshold), the
//     fixed levels 0/4/5 before the first frame is complete, FoV lossless in
//     SPORT-B mode;
//   - every DRAM output pixel must equal its input pixel truncated at an
//     allowed level, each pixel must leave exactly once per frame.
// Mechanisms counted, each must happen: latitude clip, longitude wrap,
// writes into each of the three banks, input stall during classification
// and during read-out, DRAM buffer A/B switch, SPORT-A and SPORT-B frames and
// a switch between them, untrained and trained frames, multi-pass tiles,
// power-gated writes, a learnt level that differs from the fixed one.
// Also checked: classification within TILES x (ITER + 3) + ITER + 4 clocks,
// gpu_buf opposite to dram_buf, and the gated-bit count against the levels
// actually used.
module tb_sport_top;
  import sport_pkg::*;

  localparam int TR = 3, TC = 6, TS = 8, H = 22, WD = 48, WORDS = 16, ITER = 16;
  localparam int TILES = TR * TC, TP = TS * TS, NPIX = TILES * TP;
  localparam int NFRAMES = 10;
  localparam real PI = 3.14159265358979323846;
  localparam real BAM = 4294967296.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic imu_valid = 1'b0, sport_a = 1'b0, frame_start = 1'b0, in_valid = 1'b0;
  angle_t imu_theta = '0, imu_phi = '0;
  logic [23:0] in_pix = '0, dram_data;
  logic in_ready, dram_valid, dram_buf, gpu_buf, frame_done, cls_busy, gaze_clipped;
  logic [10:0] dram_addr;
  angle_t gaze_theta, gaze_phi;
  logic [5:0] n_fov, n_border, n_bg;
  logic [47:0] active_bits, total_bits;

  sport_top #(
    .TILE_ROWS(TR), .TILE_COLS(TC), .TILE_SIZE(TS), .FRAME_H(H), .FRAME_W(WD),
    .WORDS(WORDS), .ITER(ITER)
  ) dut (
    .clk, .rst_n, .imu_valid, .imu_theta, .imu_phi, .sport_a, .frame_start,
    .in_valid, .in_pix, .in_ready, .dram_valid, .dram_buf, .gpu_buf, .dram_addr,
    .dram_data, .frame_done, .cls_busy, .gaze_theta, .gaze_phi,
    .gaze_clipped, .n_fov, .n_border, .n_bg, .active_bits, .total_bits
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_clip = 0, n_wrap = 0, n_stall_cls = 0, n_stall_rd = 0, n_buf_switch = 0;
  int n_mode_a = 0, n_mode_b = 0, n_mode_switch = 0, n_untrained = 0, n_trained = 0;
  int n_multipass = 0, n_gated_wr = 0, n_learnt_diff = 0;
  int n_bank_wr [3] = '{0, 0, 0};

  logic [23:0] pix_cur [NPIX], pix_prev [NPIX];
  int          seen [NPIX];
  bit          allowed [TILES][8];   // allowed truncation levels per tile
  int          lv_lo [TILES][3], lv_hi [TILES][3];
  bit          have_prev_frame = 0;
  int          tile_t [TILES];       // level seen at the tile's first output
  bit          checking = 0;

  function automatic logic [23:0] trunc_pix(input logic [23:0] p, input int t);
    logic [23:0] r;
    r = p;
    if (t > 0)
      for (int c = 0; c < 3; c++) begin
        r[c*8 +: 8] = p[c*8 +: 8] & ~8'((1 << t) - 1);
        r[c*8 + t - 1] = 1'b1;
      end
    return r;
  endfunction

  // level range of a tile from the previous frame's pixels
  task automatic tile_levels(input int tl);
    real th [3];
    th = '{40.0, 35.0, 30.0};
    for (int k = 0; k < 3; k++) begin
      real xi;
      bit run_lo, run_hi;
      xi = 65025.0 / (10.0 ** (th[k] / 10.0));
      lv_lo[tl][k] = 0; lv_hi[tl][k] = 0; run_lo = 1; run_hi = 1;
      for (int t = 1; t <= 7; t++) begin
        real acc, wsum, mse;
        acc = 0.0; wsum = 0.0;
        for (int p = 0; p < TP; p++) begin
          int r;
          real w;
          r = (tl / TC) * TS + p / TS;
          w = (r < H) ? $sin(PI * r / H) : 0.0;
          for (int ch = 0; ch < 3; ch++) begin
            int y, e;
            y = pix_prev[tl * TP + p][ch*8 +: 8];
            e = (y % (1 << t)) - (1 << (t - 1));
            acc += w * e * e;
          end
          wsum += 3.0 * w;
        end
        mse = (wsum > 0.0) ? acc / wsum : 0.0;
        if (run_lo && mse <= xi * 0.998) lv_lo[tl][k] = t; else run_lo = 0;
        if (run_hi && mse <= xi * 1.002) lv_hi[tl][k] = t; else run_hi = 0;
      end
    end
  endtask

  function automatic real bam2rad(input angle_t a, input bit signed_a);
    real v;
    v = signed_a ? real'(signed'(a)) : real'(a);
    return v * 2.0 * PI / BAM;
  endfunction

  // allowed levels of every tile for the gaze the classifier uses
  task automatic build_allowed(input angle_t gt, input angle_t gp, input bit trained);
    real tg, pg;
    tg = bam2rad(gt, 1'b1);
    pg = bam2rad(gp, 1'b1);
    for (int tl = 0; tl < TILES; tl++) begin
      real lat, lon, cd, c45, c60;
      bit reg_ok [3];
      lat = PI / 2.0 - PI * real'((tl / TC) * TS + TS / 2) / real'(H);
      lon = 2.0 * PI * real'((tl % TC) * TS + TS / 2) / real'(WD) - PI;
      cd  = $sin(lat) * $sin(pg) + $cos(lat) * $cos(pg) * $cos(lon - tg);
      c45 = $cos(PI / 4.0);
      c60 = 0.5;
      reg_ok[0] = cd >= c45 - 2e-4;
      reg_ok[1] = (cd < c45 + 2e-4) && (cd >= c60 - 2e-4);
      reg_ok[2] = cd < c60 + 2e-4;
      for (int t = 0; t < 8; t++) allowed[tl][t] = 0;
      for (int k = 0; k < 3; k++) if (reg_ok[k]) begin
        if (!trained) begin
          allowed[tl][(k == 0) ? 0 : (k == 1) ? 4 : 5] = 1;
        end else if (k == 0 && !sport_a) begin
          allowed[tl][0] = 1;
        end else begin
          for (int t = lv_lo[tl][k]; t <= lv_hi[tl][k]; t++) allowed[tl][t] = 1;
          if (lv_lo[tl][k] != ((k == 0) ? 0 : (k == 1) ? 4 : 5)) n_learnt_diff++;
        end
      end
    end
  endtask

  // DRAM output check
  always @(negedge clk) if (dram_valid && checking) begin
    int a, tl;
    bit ok;
    a  = int'(dram_addr);
    tl = a / TP;
    ok = 0;
    for (int t = 0; t < 8; t++)
      if (allowed[tl][t] && dram_data === trunc_pix(pix_cur[a], t)) begin
        ok = 1;
        if (a % TP == 0) tile_t[tl] = t;
      end
    checks++;
    if (a >= NPIX || seen[a] != 0 || !ok) begin
      failures++;
      $display("%t dram addr %0d: %h from %h not allowed (seen %0d)", $time, a, dram_data,
               pix_cur[a], seen[a]);
    end
    seen[a]++;
  end

  // mechanism monitors
  logic dram_buf_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    dram_buf_q <= dram_buf;
    if (dram_buf != dram_buf_q) n_buf_switch++;
    if (in_valid && !in_ready && cls_busy)  n_stall_cls++;
    if (in_valid && !in_ready && !cls_busy) n_stall_rd++;
    if (dut.adv && dut.x_pass_first && !dut.x_first) n_multipass++;
    if (dut.wl_en && dut.we) begin
      for (int b = 0; b < 3; b++) if (dut.bank_en[b]) n_bank_wr[b]++;
      if (dut.active_now < 6'd24) n_gated_wr++;
    end
    checks++;
    if (gpu_buf !== !dram_buf) begin failures++; $display("gpu_buf = dram_buf"); end
  end

  task automatic send_imu(input angle_t th, input angle_t ph);
    @(negedge clk);
    imu_valid = 1'b1; imu_theta = th; imu_phi = ph;
    @(negedge clk);
    imu_valid = 1'b0;
  endtask

  initial begin
    longint gated_ref = 0;
    int prev_mode = -1;
    for (int i = 0; i < NPIX; i++) pix_prev[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NFRAMES; f++) begin
      angle_t th0, ph0, th1, ph1;
      real tp_r, pp_r;
      bit clip_e, wrap_e;
      int cls_clocks;
      angle_t gt, gp;
      // head motion for this frame
      th0 = $urandom;
      ph0 = angle_t'($urandom_range(0, 32'h7FFF_FFFF) - 32'h4000_0000);
      ph0 = angle_t'(signed'(ph0) / 2);   // within +-pi/4
      th1 = th0 + angle_t'($urandom_range(0, 32'h0100_0000) - 32'h0080_0000);
      ph1 = ph0 + angle_t'($urandom_range(0, 32'h0080_0000) - 32'h0040_0000);
      if (f == 2) begin ph0 = 32'h3800_0000; ph1 = 32'h3C00_0000; end   // looks up fast
      if (f == 4) begin th0 = 32'hFF00_0000; th1 = 32'hFFF0_0000; end   // crosses 2 pi
      sport_a = (f >= 5 && f < 8);
      send_imu(th0, ph0);
      send_imu(th1, ph1);
      // reference prediction
      tp_r = real'(th1) + 9.33 * real'(signed'(th1 - th0));
      pp_r = real'(signed'(ph1)) + 9.33 * real'(signed'(ph1 - ph0));
      wrap_e = (tp_r >= BAM) || (tp_r < 0.0);
      clip_e = (pp_r > 1073741824.0) || (pp_r < -1073741824.0);
      if (pp_r > 1073741824.0) pp_r = 1073741824.0;
      if (pp_r < -1073741824.0) pp_r = -1073741824.0;
      while (tp_r >= BAM) tp_r -= BAM;
      while (tp_r < 0.0) tp_r += BAM;
      @(negedge clk);
      gt = gaze_theta; gp = gaze_phi;
      begin
        real dt, dp, tol;
        dt = real'(gt) - tp_r;
        if (dt > BAM / 2.0) dt -= BAM;
        if (dt < -BAM / 2.0) dt += BAM;
        dp = real'(signed'(gp)) - pp_r;
        tol = 8.0 + 1e-4 * 16777216.0;
        checks += 2;
        if (dt > tol || dt < -tol || dp > tol || dp < -tol) begin
          failures++;
          $display("frame %0d gaze %0d/%0d expected %0.0f/%0.0f", f, gt, signed'(gp), tp_r, pp_r);
        end
        if (gaze_clipped !== clip_e) begin
          failures++; $display("frame %0d clip %b expected %b", f, gaze_clipped, clip_e);
        end
      end
      if (clip_e) n_clip++;
      if (wrap_e) n_wrap++;
      if (sport_a) n_mode_a++; else n_mode_b++;
      if (prev_mode != -1 && prev_mode != int'(sport_a)) n_mode_switch++;
      prev_mode = int'(sport_a);
      // new pixels: LSBs around the dummy of a random level per tile
      for (int tl = 0; tl < TILES; tl++) begin
        int tc, spread;
        tc = $urandom_range(1, 6);
        spread = $urandom_range(0, 1) ? $urandom_range(0, 2) : $urandom_range(0, 1 << tc);
        for (int p = 0; p < TP; p++)
          for (int ch = 0; ch < 3; ch++) begin
            int v;
            v = (1 << (tc - 1)) + $urandom_range(0, 2 * spread) - spread;
            v = (v < 0) ? 0 : (v > (1 << tc) - 1) ? (1 << tc) - 1 : v;
            pix_cur[tl * TP + p][ch*8 +: 8] = 8'(($urandom_range(0, 255) & ~((1 << tc) - 1)) | v);
          end
      end
      for (int i = 0; i < NPIX; i++) seen[i] = 0;
      if (have_prev_frame) begin
        for (int tl = 0; tl < TILES; tl++) tile_levels(tl);
        n_trained++;
      end else begin
        n_untrained++;
      end
      build_allowed(gt, gp, have_prev_frame);
      checking = 1;
      // frame start, with the first pixel already offered
      frame_start = 1'b1;
      in_valid    = 1'b1;
      in_pix      = pix_cur[0];
      @(negedge clk);
      frame_start = 1'b0;
      cls_clocks = 0;
      while (cls_busy) begin @(negedge clk); cls_clocks++; end
      checks++;
      if (cls_clocks > TILES * (ITER + 3) + ITER + 4) begin
        failures++; $display("classification took %0d clocks", cls_clocks);
      end
      checks++;
      if (int'(n_fov) + int'(n_border) + int'(n_bg) != TILES) begin
        failures++; $display("region counts %0d %0d %0d", n_fov, n_border, n_bg);
      end
      for (int i = 0; i < NPIX; i++) begin
        if ($urandom_range(0, 7) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
          // an unrelated IMU sample during the frame does not disturb it
          if ($urandom_range(0, 3) == 0) begin
            imu_valid = 1'b1; imu_theta = $urandom; imu_phi = 32'h0;
            @(negedge clk);
            imu_valid = 1'b0;
          end
        end
        in_valid = 1'b1;
        in_pix   = pix_cur[i];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 1'b0;
      while (!frame_done) @(negedge clk);
      repeat (4) @(negedge clk);
      checking = 0;
      for (int i = 0; i < NPIX; i++) begin
        checks++;
        if (seen[i] != 1) begin failures++; $display("frame %0d pixel %0d out %0d times", f, i, seen[i]); end
      end
      for (int tl = 0; tl < TILES; tl++) gated_ref += longint'(3 * tile_t[tl] * TP);
      checks++;
      if (longint'(total_bits) != longint'(24 * NPIX * (f + 1)) ||
          longint'(total_bits - active_bits) != gated_ref) begin
        failures++;
        $display("frame %0d bits active %0d total %0d, expected gated %0d", f, active_bits,
                 total_bits, gated_ref);
      end
      for (int i = 0; i < NPIX; i++) pix_prev[i] = pix_cur[i];
      have_prev_frame = 1;
      $display("frame %0d: mode %s, %s, regions %0d/%0d/%0d, power-gated bits %0.1f %%", f,
               sport_a ? "SPORT-A" : "SPORT-B", (f == 0) ? "fixed levels" : "learnt levels",
               n_fov, n_border, n_bg,
               100.0 * real'(total_bits - active_bits) / real'(total_bits));
    end
    begin
      string names [14];
      int    cnt   [14];
      names = '{"latitude clip", "longitude wrap", "FoV bank writes", "Border bank writes",
                "Background bank writes", "stall in classification", "stall in read-out",
                "A/B buffer switch", "SPORT-A frames", "SPORT-B frames", "mode switch",
                "multi-pass tiles", "power-gated writes", "learnt level differs"};
      cnt = '{n_clip, n_wrap, n_bank_wr[0], n_bank_wr[1], n_bank_wr[2], n_stall_cls,
              n_stall_rd, n_buf_switch, n_mode_a, n_mode_b, n_mode_switch, n_multipass,
              n_gated_wr, n_learnt_diff};
      for (int k = 0; k < 14; k++) begin
        $display("  %-24s %0d", names[k], cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("mechanism never happened: %s", names[k]); end
      end
      $display("  %-24s %0d / %0d", "untrained / trained", n_untrained, n_trained);
      checks++;
      if (n_untrained == 0 || n_trained == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
