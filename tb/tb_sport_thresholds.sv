// tb_sport_thresholds: the three WS-PSNR threshold configurations side by
// side.
//
// Three SPORT engines, built for the conservative (42/37/32 dB), moderate
// (40/35/30 dB) and aggressive (38/33/28 dB) thresholds, receive the same
// IMU samples and the same four small frames (3 x 6 tiles of 8 x 8 pixels,
// 16-word banks) in SPORT-A mode, so the learnt level is used in all three
// regions. For each engine every output pixel is checked against a
// real-arithmetic reference of the levels its own thresholds allow (fixed
// levels 0/4/5 in the first frame, then the levels learnt from the previous
// frame, 0.2 % tolerance at a threshold, either region within 2e-4 of a
// region boundary). Across the engines the number of power-gated bits must
// not decrease from conservative to moderate to aggressive once levels are
// learnt, and must differ somewhere. The input handshakes of the three
// engines must stay in lockstep, as the thresholds change no timing.
module tb_sport_thresholds;
  import sport_pkg::*;

  localparam int TR = 3, TC = 6, TS = 8, H = 22, WD = 48, WORDS = 16;
  localparam int TILES = TR * TC, TP = TS * TS, NPIX = TILES * TP;
  localparam int NFRAMES = 4;
  localparam real PI = 3.14159265358979323846;
  localparam int TH [3][3] = '{'{42, 37, 32}, '{40, 35, 30}, '{38, 33, 28}};

  logic clk = 1'b0, rst_n = 1'b0;
  logic imu_valid = 1'b0, frame_start = 1'b0, in_valid = 1'b0;
  angle_t imu_theta = '0, imu_phi = '0;
  logic [23:0] in_pix = '0;
  logic        in_ready [3], dram_valid [3], frame_done [3];
  logic [10:0] dram_addr [3];
  logic [23:0] dram_data [3];
  angle_t      gaze_theta [3], gaze_phi [3];
  logic [47:0] active_bits [3], total_bits [3];

  for (genvar k = 0; k < 3; k++) begin : g_cfg
    logic dram_buf, gpu_buf, cls_busy, gaze_clipped;
    logic [5:0] n_fov, n_border, n_bg;
    sport_top #(
      .TILE_ROWS(TR), .TILE_COLS(TC), .TILE_SIZE(TS), .FRAME_H(H), .FRAME_W(WD),
      .WORDS(WORDS), .THETA_FOV_DB(42 - 2 * k), .THETA_BORDER_DB(37 - 2 * k),
      .THETA_BG_DB(32 - 2 * k)
    ) dut (
      .clk, .rst_n, .imu_valid, .imu_theta, .imu_phi, .sport_a(1'b1), .frame_start,
      .in_valid, .in_pix, .in_ready(in_ready[k]), .dram_valid(dram_valid[k]),
      .dram_buf, .gpu_buf, .dram_addr(dram_addr[k]), .dram_data(dram_data[k]),
      .frame_done(frame_done[k]), .cls_busy, .gaze_theta(gaze_theta[k]),
      .gaze_phi(gaze_phi[k]), .gaze_clipped, .n_fov, .n_border, .n_bg,
      .active_bits(active_bits[k]), .total_bits(total_bits[k])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [23:0] pix_cur [NPIX], pix_prev [NPIX];
  bit          allowed [3][TILES][8];
  int          lv_lo [3][TILES][3], lv_hi [3][TILES][3];
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

  // per-level latitude-weighted MSE of a tile of the previous frame
  function automatic real tile_mse(input int tl, input int t);
    real acc, wsum;
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
    return (wsum > 0.0) ? acc / wsum : 0.0;
  endfunction

  task automatic learn_levels();
    for (int tl = 0; tl < TILES; tl++) begin
      real mse [8];
      for (int t = 1; t <= 7; t++) mse[t] = tile_mse(tl, t);
      for (int k = 0; k < 3; k++)
        for (int g = 0; g < 3; g++) begin
          real xi;
          bit run_lo, run_hi;
          xi = 65025.0 / (10.0 ** (real'(TH[k][g]) / 10.0));
          lv_lo[k][tl][g] = 0; lv_hi[k][tl][g] = 0; run_lo = 1; run_hi = 1;
          for (int t = 1; t <= 7; t++) begin
            if (run_lo && mse[t] <= xi * 0.998) lv_lo[k][tl][g] = t; else run_lo = 0;
            if (run_hi && mse[t] <= xi * 1.002) lv_hi[k][tl][g] = t; else run_hi = 0;
          end
        end
    end
  endtask

  task automatic build_allowed(input int k, input angle_t gt, input angle_t gp,
                               input bit trained);
    real tg, pg;
    tg = real'(signed'(gt)) * 2.0 * PI / 4294967296.0;
    pg = real'(signed'(gp)) * 2.0 * PI / 4294967296.0;
    for (int tl = 0; tl < TILES; tl++) begin
      real lat, lon, cd;
      bit reg_ok [3];
      lat = PI / 2.0 - PI * real'((tl / TC) * TS + TS / 2) / real'(H);
      lon = 2.0 * PI * real'((tl % TC) * TS + TS / 2) / real'(WD) - PI;
      cd  = $sin(lat) * $sin(pg) + $cos(lat) * $cos(pg) * $cos(lon - tg);
      reg_ok[0] = cd >= $cos(PI / 4.0) - 2e-4;
      reg_ok[1] = (cd < $cos(PI / 4.0) + 2e-4) && (cd >= 0.5 - 2e-4);
      reg_ok[2] = cd < 0.5 + 2e-4;
      for (int t = 0; t < 8; t++) allowed[k][tl][t] = 0;
      for (int g = 0; g < 3; g++) if (reg_ok[g]) begin
        if (!trained) allowed[k][tl][(g == 0) ? 0 : (g == 1) ? 4 : 5] = 1;
        else for (int t = lv_lo[k][tl][g]; t <= lv_hi[k][tl][g]; t++) allowed[k][tl][t] = 1;
      end
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (in_ready[0] !== in_ready[1] || in_ready[1] !== in_ready[2]) begin
      failures++; $display("%t in_ready differs between configurations", $time);
    end
    if (checking)
      for (int k = 0; k < 3; k++)
        if (dram_valid[k]) begin
          int a;
          bit ok;
          a  = int'(dram_addr[k]);
          ok = 0;
          for (int t = 0; t < 8; t++)
            if (allowed[k][a / TP][t] && dram_data[k] === trunc_pix(pix_cur[a], t)) ok = 1;
          checks++;
          if (!ok) begin
            failures++;
            $display("config %0d addr %0d: %h from %h not allowed", k, a, dram_data[k], pix_cur[a]);
          end
        end
  end

  task automatic send_imu(input angle_t th, input angle_t ph);
    @(negedge clk);
    imu_valid = 1'b1; imu_theta = th; imu_phi = ph;
    @(negedge clk);
    imu_valid = 1'b0;
  endtask

  initial begin
    longint gated_prev [3];
    bit differ;
    differ = 0;
    for (int k = 0; k < 3; k++) gated_prev[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NFRAMES; f++) begin
      angle_t th0;
      longint gated [3];
      th0 = $urandom;
      send_imu(th0, 32'h0800_0000);
      send_imu(th0 + 32'h0010_0000, 32'h0810_0000);
      @(negedge clk);
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
      if (f > 0) learn_levels();
      for (int k = 0; k < 3; k++) build_allowed(k, gaze_theta[k], gaze_phi[k], f > 0);
      checking = 1;
      frame_start = 1'b1;
      @(negedge clk);
      frame_start = 1'b0;
      for (int i = 0; i < NPIX; i++) begin
        in_valid = 1'b1;
        in_pix   = pix_cur[i];
        @(posedge clk);
        while (!in_ready[0]) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 1'b0;
      while (!frame_done[0]) @(negedge clk);
      repeat (4) @(negedge clk);
      checking = 0;
      for (int k = 0; k < 3; k++) begin
        gated[k] = longint'(total_bits[k] - active_bits[k]) - gated_prev[k];
        gated_prev[k] = longint'(total_bits[k] - active_bits[k]);
      end
      $display("frame %0d gated bits: conservative %0d, moderate %0d, aggressive %0d",
               f, gated[0], gated[1], gated[2]);
      if (f > 0) begin
        checks++;
        if (gated[0] > gated[1] || gated[1] > gated[2]) begin
          failures++; $display("gated bits do not grow with looser thresholds");
        end
        if (gated[0] != gated[2]) differ = 1;
      end
      for (int i = 0; i < NPIX; i++) pix_prev[i] = pix_cur[i];
    end
    checks++;
    if (!differ) begin failures++; $display("thresholds made no difference"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
