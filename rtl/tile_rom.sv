// tile_rom: static tile-centre metadata for the gaze-predictive classifier.
//
// One entry per tile of the equirectangular (ERP) frame, four 4-byte fields
// as the paper sizes it (entries x 4 x 4 bytes): sin and cos of the tile-centre
// latitude (Q2.30) and the tile-centre longitude and latitude (binary angles).
// The latitude of pixel row r is phi = pi/2 - pi*r/H (the paper's ERP
// formula); the longitude of pixel column c is theta = 2*pi*c/W - pi (this
// design's convention; the paper gives only the latitude). The tile centre is
// row i*S + S/2, column j*S + S/2; entries are stored row-major, address
// i*TILE_COLS + j.
//
// The contents are computed when the ROM is initialised, with a 30-step
// integer CORDIC, rather than read from a file. The paper sizes the ROM for
// 1,800 tiles; the default here is the 60 x 34 = 2,040 tiles of 64 x 64
// pixels used for the 4K evaluation.
//
// Interface: synchronous read, data_o holds the entry at addr_i one clock
// after the address is presented.
module tile_rom
  import sport_pkg::*;
#(
  parameter int unsigned TILE_ROWS = 34,
  parameter int unsigned TILE_COLS = 60,
  parameter int unsigned TILE_SIZE = 64,
  parameter int unsigned FRAME_H   = 2160,
  parameter int unsigned FRAME_W   = 3840,
  localparam int unsigned TILES    = TILE_ROWS * TILE_COLS,
  localparam int unsigned AW       = $clog2(TILES)
) (
  input  logic         clk,
  input  logic [AW-1:0] addr_i,
  output tile_meta_t   data_o
);

  tile_meta_t rom [TILES];

  // the latitude terms depend only on the tile row: one CORDIC per row
  initial begin
    for (int unsigned i = 0; i < TILE_ROWS; i++) begin
      logic [63:0] r, sc;
      tile_meta_t  e;
      r         = 64'(i) * 64'(TILE_SIZE) + 64'(TILE_SIZE) / 64'd2;
      e.lat     = 32'h4000_0000 - 32'((r << 31) / 64'(FRAME_H));
      sc        = cordic_sincos(e.lat, 30);
      e.sin_lat = q30_t'(sc[63:32]);
      e.cos_lat = q30_t'(sc[31:0]);
      for (int unsigned j = 0; j < TILE_COLS; j++) begin
        logic [63:0] c;
        c     = 64'(j) * 64'(TILE_SIZE) + 64'(TILE_SIZE) / 64'd2;
        e.lon = 32'((c << 32) / 64'(FRAME_W)) - 32'h8000_0000;
        rom[i * TILE_COLS + j] = e;
      end
    end
  end

  always_ff @(posedge clk) data_o <= rom[addr_i];

endmodule
