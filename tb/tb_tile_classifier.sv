// tb_tile_classifier: self-checking test of gaze-predictive tile
// classification on the full 60 x 34-tile 4K grid.
//
// For several predicted gaze points (equator, mid latitude, near and at a
// pole, across the +-pi longitude seam) the region of every tile is compared
// with a reference computed here in real arithmetic with the paper's
// spherical law of cosines and arccos: FoV for d <= 45 deg, Border for
// 45 < d <= 60 deg, Background beyond. Tiles within 0.02 deg of a boundary
// are not compared (fixed-point rounding may put them on either side).
// The clock count of a whole classification is checked against the paper's
// 0.42 ms at 100 MHz (42,000 clocks).
module tb_tile_classifier;
  import sport_pkg::*;

  localparam int TR = 34, TC = 60, S = 64, H = 2160, W = 3840;
  localparam int TILES = TR * TC;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  angle_t theta_g = '0, phi_g = '0;
  logic busy, done;
  logic [10:0] rom_addr_o, map_waddr_o;
  tile_meta_t rom_data_i;
  logic map_we_o;
  logic [7:0] map_wdata_o;
  logic [11:0] n_fov, n_border, n_bg;
  int checks = 0, failures = 0;
  logic [7:0] map [TILES];
  int nwrites;

  tile_rom u_rom (.clk, .addr_i(rom_addr_o), .data_o(rom_data_i));
  tile_classifier dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (map_we_o) begin
    map[map_waddr_o] <= map_wdata_o;
    nwrites++;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real th_deg, input real ph_deg);
    int cyc, ef, eb, eg, skipped;
    real tg, pg;
    tg = th_deg * PI / 180.0;
    pg = ph_deg * PI / 180.0;
    @(negedge clk);
    theta_g = angle_t'(longint'(th_deg / 360.0 * 4294967296.0));
    phi_g   = angle_t'(longint'(ph_deg / 360.0 * 4294967296.0));
    start = 1'b1;
    nwrites = 0;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done || cyc > 42000) begin
      failures++; $display("classification took %0d clocks", cyc);
    end
    checks++;
    if (nwrites != TILES) begin failures++; $display("%0d map writes", nwrites); end
    ef = 0; eb = 0; eg = 0; skipped = 0;
    for (int i = 0; i < TR; i++)
      for (int j = 0; j < TC; j++) begin
        real lat, lon, cd, d;
        int  exp_r;
        lat = PI / 2.0 - PI * real'(i * S + S / 2) / real'(H);
        lon = 2.0 * PI * real'(j * S + S / 2) / real'(W) - PI;
        cd  = $sin(lat) * $sin(pg) + $cos(lat) * $cos(pg) * $cos(lon - tg);
        if (cd > 1.0) cd = 1.0;
        if (cd < -1.0) cd = -1.0;
        d = $acos(cd) * 180.0 / PI;
        exp_r = (d <= 45.0) ? 0 : (d <= 60.0) ? 1 : 2;
        if (exp_r == 0) ef++; else if (exp_r == 1) eb++; else eg++;
        if ((d > 44.98 && d < 45.02) || (d > 59.98 && d < 60.02)) begin
          skipped++;
          continue;
        end
        checks++;
        if (map[i * TC + j] != 8'(exp_r)) begin
          failures++;
          $display("tile %0d,%0d d=%f region %0d expected %0d", i, j, d, map[i*TC+j], exp_r);
        end
      end
    checks++;
    if (int'(n_fov) + int'(n_border) + int'(n_bg) != TILES ||
        (skipped == 0 && (int'(n_fov) != ef || int'(n_border) != eb))) begin
      failures++; $display("counts %0d/%0d/%0d expected %0d/%0d/%0d", n_fov, n_border, n_bg, ef, eb, eg);
    end
    $display("gaze (%0.1f, %0.1f): %0d clocks, FoV %0d Border %0d BG %0d",
             th_deg, ph_deg, cyc, n_fov, n_border, n_bg);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0.0, 0.0);
    run(37.5, 20.0);
    run(-120.0, -35.0);
    run(179.0, 5.0);       // across the longitude seam
    run(-178.0, 70.0);
    run(10.0, 90.0);       // gaze at the north pole
    run(90.0, -88.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
