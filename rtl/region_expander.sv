// region_expander: expands the tile-level region map to per-pixel control.
//
// Pixels arrive tile by tile (each tile row-major inside, tiles row-major in
// the frame), the order in which the paper's validation flow feeds the
// memory. For every accepted pixel the expander keeps the tile, the pixel's
// place in the tile, its frame row, and the SRAM word address within the
// current pass of WORDS pixels (a 64 x 64 tile fills a 1024-word bank in four
// passes, as in the paper). It reads the tile's region from the region map
// and its learnt truncation levels from the level table, and turns them into
// a one-hot bank enable and the truncation level t of the pixel:
//   FoV:        0 in SPORT-B mode (lossless FoV); the learnt FoV level in
//               SPORT-A mode
//   Border, BG: the learnt level of that region
// Until the level table holds levels from a whole frame (trained low) the
// fixed levels FoV 0, Border 4, Background 5 are used, the bank control
// words the paper gives. The paper names the expansion step and its
// 0.38 ms budget but not its method; the on-the-fly lookup here is this
// design's choice and costs no separate time.
//
// Interface: frame_start (one clock, before the first pixel) clears the
// counters. adv advances to the next pixel. Both memories are read with one
// clock of latency; the read address is the tile the next pixel belongs to,
// so the data are ready when that pixel is presented. All outputs describe
// the pixel at the head of the stream, combinationally.
module region_expander
  import sport_pkg::*;
#(
  parameter int unsigned TILE_ROWS = 34,
  parameter int unsigned TILE_COLS = 60,
  parameter int unsigned TILE_SIZE = 64,
  parameter int unsigned WORDS     = 1024,
  parameter int unsigned T_FOV     = 0,
  parameter int unsigned T_BORDER  = 4,
  parameter int unsigned T_BG      = 5,
  localparam int unsigned TILES    = TILE_ROWS * TILE_COLS,
  localparam int unsigned TAW      = $clog2(TILES),
  localparam int unsigned TILE_PIX = TILE_SIZE * TILE_SIZE,
  localparam int unsigned PAW      = $clog2(TILE_PIX),
  localparam int unsigned RW       = $clog2(TILE_ROWS * TILE_SIZE),
  localparam int unsigned WAW      = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            frame_start,
  input  logic            adv,
  input  logic            sport_a,
  input  logic            trained,
  output logic [TAW-1:0]  map_raddr,
  input  logic [7:0]      map_rdata,
  input  level_set_t      lvl_rdata,
  output logic [TAW-1:0]  tile,
  output logic [PAW-1:0]  pix_in_tile,
  output logic [RW-1:0]   row,
  output logic [WAW-1:0]  word_addr,
  output logic            first_in_tile,
  output logic            pass_first,
  output logic            pass_last,
  output logic            tile_last,
  output logic            frame_last,
  output region_e         region,
  output logic [NUM_REGIONS-1:0] bank_en,
  output trunc_t          t
);

  localparam int unsigned TRW = $clog2(TILE_ROWS + 1);
  localparam int unsigned TCW = $clog2(TILE_COLS + 1);
  localparam int unsigned SW  = $clog2(TILE_SIZE);

  logic [TRW-1:0] tile_r;
  logic [TCW-1:0] tile_c;
  logic [TAW-1:0] tile_next;

  always_comb begin
    tile_last     = (pix_in_tile == PAW'(TILE_PIX - 1));
    frame_last    = tile_last && (tile == TAW'(TILES - 1));
    word_addr     = WAW'(pix_in_tile % WORDS);
    first_in_tile = (pix_in_tile == '0);
    pass_first    = (word_addr == '0);
    pass_last     = tile_last || (word_addr == WAW'(WORDS - 1));
    row           = RW'(tile_r) * RW'(TILE_SIZE) + RW'(pix_in_tile >> SW);
    tile_next     = frame_last ? '0 : tile + 1'b1;
    map_raddr     = (adv && tile_last) ? tile_next : tile;

    // the unused code 3 is treated as Background
    region = (map_rdata[1:0] == 2'd3) ? REG_BG : region_e'(map_rdata[1:0]);
    if (region == REG_FOV)
      t = sport_a ? (trained ? lvl_rdata.fov : trunc_t'(T_FOV)) : '0;
    else if (region == REG_BORDER)
      t = trained ? lvl_rdata.border : trunc_t'(T_BORDER);
    else
      t = trained ? lvl_rdata.bg : trunc_t'(T_BG);
    bank_en = '0;
    bank_en[region] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tile        <= '0;
      tile_r      <= '0;
      tile_c      <= '0;
      pix_in_tile <= '0;
    end else if (frame_start) begin
      tile        <= '0;
      tile_r      <= '0;
      tile_c      <= '0;
      pix_in_tile <= '0;
    end else if (adv) begin
      pix_in_tile <= pix_in_tile + 1'b1;
      if (tile_last) begin
        pix_in_tile <= '0;
        tile        <= tile_next;
        if (frame_last) begin
          tile_r <= '0;
          tile_c <= '0;
        end else if (tile_c == TCW'(TILE_COLS - 1)) begin
          tile_c <= '0;
          tile_r <= tile_r + 1'b1;
        end else begin
          tile_c <= tile_c + 1'b1;
        end
      end
    end
  end

endmodule
