// trunc_sram_bank: one truncation SRAM bank of TrunMEM360 (1024 x 32 bit)
// with its 32 column truncation managers.
//
// The paper builds each bank from a 6T SRAM array with row decoder,
// precharge, sense amplifiers and write drivers, plus one truncation manager
// and power gate per column. Here the array is a register array and the
// periphery is the behaviour it gives: a word is written or read in one
// wordline access. The three banks of TrunMEM360 (FoV, Border, Background)
// are instances of this module; they differ only in the truncation level
// loaded into them.
//
// Operation follows the register interface the paper lists for the chip
// (Project Select, Data In Enable, Byte Select, Truncation Enable, Precharge
// Bar, Wordline Enable, Write Enable, Read Enable). The cycle-level protocol
// is this design's choice, as the paper's measured waveforms are not
// reproduced here:
//   * din_en with proj_sel loads the input registers: data word, wordline
//     address, byte select, truncation level and truncation enable.
//   * wl_en with proj_sel, pre_b high (precharge released) and we writes the
//     registered word: per column, only if its byte is selected and the
//     column is not power-gated; truncated columns take the dummy pattern.
//   * wl_en with proj_sel, pre_b high and re reads the word at the
//     registered address; dout/dout_valid follow one clock later, the
//     truncated columns replaced by the dummy pattern in the read mux.
// Loading the registers and accessing the array may happen in the same
// clock: the access uses the values loaded on an earlier clock, so one word
// per clock can be streamed. col_gated shows which columns are currently
// power-gated (from the registered level), for power accounting.
module trunc_sram_bank
  import sport_pkg::*;
#(
  parameter int unsigned WORDS  = 1024,
  parameter bit          HAS_PG = 1'b1,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 proj_sel,
  input  logic                 din_en,
  input  logic [WORD_BITS-1:0] din,
  input  logic [AW-1:0]        addr,
  input  logic [BYTE_LANES-1:0] byte_sel,
  input  trunc_t               t_in,
  input  logic                 trunc_en,
  input  logic                 pre_b,
  input  logic                 wl_en,
  input  logic                 we,
  input  logic                 re,
  output logic [WORD_BITS-1:0] dout,
  output logic                 dout_valid,
  output logic [WORD_BITS-1:0] col_gated
);

  logic [WORD_BITS-1:0]  mem [WORDS];

  logic [WORD_BITS-1:0]  din_r;
  logic [AW-1:0]         addr_r;
  logic [BYTE_LANES-1:0] bsel_r;
  trunc_t                t_r;
  logic                  ten_r;

  logic [WORD_BITS-1:0] rd_word, wbits, wen_col, dmux;
  logic [WORD_BITS-1:0] head, tail;
  logic                 access;

  assign rd_word = mem[addr_r];
  assign access  = proj_sel && wl_en && pre_b;

  for (genvar c = 0; c < WORD_BITS; c++) begin : g_col
    trunc_manager #(.BIT_POS(c % PIX_BITS), .HAS_PG(HAS_PG)) u_tm (
      .t_i       (t_r),
      .trunc_en_i(ten_r),
      .din_i     (din_r[c]),
      .sa_i      (rd_word[c]),
      .head_o    (head[c]),
      .tail_o    (tail[c]),
      .pg_off_o  (col_gated[c]),
      .wbit_o    (wbits[c]),
      .wen_o     (wen_col[c]),
      .dout_o    (dmux[c])
    );
  end

  // input registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      din_r  <= '0;
      addr_r <= '0;
      bsel_r <= '0;
      t_r    <= '0;
      ten_r  <= 1'b0;
    end else if (proj_sel && din_en) begin
      din_r  <= din;
      addr_r <= addr;
      bsel_r <= byte_sel;
      t_r    <= t_in;
      ten_r  <= trunc_en;
    end
  end

  // array write, per column
  always_ff @(posedge clk) begin
    if (access && we) begin
      for (int c = 0; c < WORD_BITS; c++)
        if (bsel_r[c / PIX_BITS] && wen_col[c]) mem[addr_r][c] <= wbits[c];
    end
  end

  // read through the truncation mux
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= access && re;
      if (access && re) dout <= dmux;
    end
  end

  // handshake rules of the array port
  a_no_we_and_re: assert property (@(posedge clk) disable iff (!rst_n)
    !(proj_sel && wl_en && we && re));
  a_no_wl_while_precharge: assert property (@(posedge clk) disable iff (!rst_n)
    !(proj_sel && wl_en && !pre_b));

endmodule
