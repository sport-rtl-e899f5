// region_map_sram: the per-frame tile region map.
//
// One byte per tile (the paper's 1,800-entry, 1.8 KB map; 2,040 entries for
// the 60 x 34 tiles of a 64 x 64-tiled 4K frame). The tile classifier writes
// each tile's region once per frame; the region expander reads it while the
// frame's pixels stream through. Bits [1:0] hold the region code (sport_pkg::
// region_e); the upper bits are reserved and written as zero, which is this
// design's choice since the paper gives only the entry count and size.
//
// Interface: simple dual port. A write (we_i) takes effect at the clock edge;
// rdata_o holds the entry at raddr_i one clock after the address. A read of
// the address being written in the same cycle returns the old entry.
module region_map_sram #(
  parameter int unsigned ENTRIES = 2040,
  parameter int unsigned WIDTH   = 8,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic [AW-1:0]    raddr_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    rdata_o <= mem[raddr_i];
  end

endmodule
