// tb_region_expander: self-checking test of the region map expansion.
//
// A 2 x 3-tile frame of 4 x 4-pixel tiles with 4-word passes (four passes
// per tile) is stepped through pixel by pixel with random stalls (adv low)
// for several frames. The region map and the level table are modelled here
// as one-clock-latency memories filled with random contents, changed
// between frames. For every pixel the testbench works out tile, pixel place,
// frame row, word address, the pass/tile/frame flags, region, one-hot bank
// enable and truncation level from first principles, for both SPORT-A and
// SPORT-B and for untrained (fixed levels 0/4/5) and trained tables.
module tb_region_expander;
  import sport_pkg::*;

  localparam int TR = 2, TC = 3, TS = 4, W = 4;
  localparam int TILES = TR * TC, TP = TS * TS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic frame_start = 1'b0, adv = 1'b0, sport_a = 1'b0, trained = 1'b0;
  logic [2:0] map_raddr, tile;
  logic [7:0] map_rdata;
  level_set_t lvl_rdata;
  logic [3:0] pix_in_tile;
  logic [2:0] row;
  logic [1:0] word_addr;
  logic first_in_tile, pass_first, pass_last, tile_last, frame_last;
  region_e region;
  logic [2:0] bank_en;
  trunc_t t;
  logic [7:0] map_mem [TILES];
  level_set_t lvl_mem [TILES];
  int checks = 0, failures = 0;
  int seen_mode [4];

  region_expander #(
    .TILE_ROWS(TR), .TILE_COLS(TC), .TILE_SIZE(TS), .WORDS(W)
  ) dut (
    .clk, .rst_n, .frame_start, .adv, .sport_a, .trained,
    .map_raddr, .map_rdata, .lvl_rdata,
    .tile, .pix_in_tile, .row, .word_addr, .first_in_tile, .pass_first,
    .pass_last, .tile_last, .frame_last, .region, .bank_en, .t
  );

  always_ff @(posedge clk) begin
    map_rdata <= map_mem[map_raddr];
    lvl_rdata <= lvl_mem[map_raddr];
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < TILES; i++) begin map_mem[i] = '0; lvl_mem[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 12; f++) begin
      @(negedge clk);
      sport_a = f[0];
      trained = f[1];
      for (int i = 0; i < TILES; i++) begin
        map_mem[i] = 8'($urandom_range(0, 3));
        lvl_mem[i] = level_set_t'($urandom);
      end
      frame_start = 1'b1;
      @(negedge clk);
      frame_start = 1'b0;
      @(negedge clk);   // map read for tile 0
      seen_mode[{sport_a, trained}]++;
      for (int tl = 0; tl < TILES; tl++)
        for (int p = 0; p < TP; p++) begin
          int reg_e, t_e;
          while ($urandom_range(0, 3) == 0) @(negedge clk);   // stall
          reg_e = (map_mem[tl][1:0] == 2'd3) ? 2 : int'(map_mem[tl][1:0]);
          if (reg_e == 0)      t_e = !sport_a ? 0 : trained ? int'(lvl_mem[tl].fov) : 0;
          else if (reg_e == 1) t_e = trained ? int'(lvl_mem[tl].border) : 4;
          else                 t_e = trained ? int'(lvl_mem[tl].bg) : 5;
          expect_eq("tile", int'(tile), tl);
          expect_eq("pix_in_tile", int'(pix_in_tile), p);
          expect_eq("row", int'(row), (tl / TC) * TS + p / TS);
          expect_eq("word_addr", int'(word_addr), p % W);
          expect_eq("first_in_tile", int'(first_in_tile), int'(p == 0));
          expect_eq("pass_first", int'(pass_first), int'(p % W == 0));
          expect_eq("pass_last", int'(pass_last), int'(p % W == W - 1));
          expect_eq("tile_last", int'(tile_last), int'(p == TP - 1));
          expect_eq("frame_last", int'(frame_last), int'(p == TP - 1 && tl == TILES - 1));
          expect_eq("region", int'(region), reg_e);
          expect_eq("bank_en", int'(bank_en), 1 << reg_e);
          expect_eq("t", int'(t), t_e);
          adv = 1'b1;
          @(negedge clk);
          adv = 1'b0;
        end
      repeat (2) @(negedge clk);
    end
    for (int m = 0; m < 4; m++) expect_eq("mode seen", int'(seen_mode[m] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
