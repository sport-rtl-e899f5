// trunmem360: the heterogeneous three-bank truncation memory.
//
// Three physically separate banks, one per perceptual region (FoV, Border,
// Background), each a 1024 x 32-bit truncation SRAM bank with its own column
// truncation managers. All three share the 360DataIn bus and the control
// strobes; the bank enables (one Project Select per bank) decide which bank
// a command reaches, so region-specific truncation never disturbs another
// bank. The read data of the bank that answered drives the shared 360DataOut.
// Structure as in the paper. The paper leaves open whether the FoV bank has
// power gates (it needs none when the FoV is always lossless); FOV_HAS_PG
// selects this, defaulting to gated columns so that an adaptive FoV level
// (the paper's SPORT-A variant) also saves power there.
//
// Interface: the bank command signals of trunc_sram_bank with a one-hot
// bank_en in place of proj_sel. At most one bank may be enabled at a time.
// dout/dout_valid one clock after a read access. col_gated gives each bank's
// power-gated columns.
module trunmem360
  import sport_pkg::*;
#(
  parameter int unsigned WORDS      = 1024,
  parameter bit          FOV_HAS_PG = 1'b1,
  localparam int unsigned AW        = $clog2(WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NUM_REGIONS-1:0] bank_en,
  input  logic                  din_en,
  input  logic [WORD_BITS-1:0]  din,
  input  logic [AW-1:0]         addr,
  input  logic [BYTE_LANES-1:0] byte_sel,
  input  trunc_t                t_in,
  input  logic                  trunc_en,
  input  logic                  pre_b,
  input  logic                  wl_en,
  input  logic                  we,
  input  logic                  re,
  output logic [WORD_BITS-1:0]  dout,
  output logic                  dout_valid,
  output logic [WORD_BITS-1:0]  col_gated [NUM_REGIONS]
);

  logic [WORD_BITS-1:0] bank_dout [NUM_REGIONS];
  logic [NUM_REGIONS-1:0] bank_valid;

  for (genvar b = 0; b < NUM_REGIONS; b++) begin : g_bank
    trunc_sram_bank #(
      .WORDS (WORDS),
      .HAS_PG((b == int'(REG_FOV)) ? FOV_HAS_PG : 1'b1)
    ) u_bank (
      .clk, .rst_n,
      .proj_sel  (bank_en[b]),
      .din_en, .din, .addr, .byte_sel, .t_in, .trunc_en,
      .pre_b, .wl_en, .we, .re,
      .dout      (bank_dout[b]),
      .dout_valid(bank_valid[b]),
      .col_gated (col_gated[b])
    );
  end

  always_comb begin
    dout = '0;
    for (int b = 0; b < NUM_REGIONS; b++)
      if (bank_valid[b]) dout = dout | bank_dout[b];
  end
  assign dout_valid = |bank_valid;

  a_one_bank: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(bank_en));

endmodule
