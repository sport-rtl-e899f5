// trunc_manager: the truncation manager of one SRAM bit column.
//
// A bank has one manager per column (32 for a 32-bit word). A column holds
// bit BIT_POS of one 8-bit byte lane. For truncation level t the t least
// significant bits of each byte are dropped and read back as the dummy pattern
// 1 0 ... 0, whose value 2^(t-1) is the mean of the dropped bits (the paper's
// optimal dummy value, unchanged under WS-PSNR weighting). Each manager
// decodes the level into two flags, named after the Head/Tail signals of the
// paper's figure:
//   head = column carries the leading '1' of the dummy (BIT_POS == t-1)
//   tail = column carries a trailing '0'       (BIT_POS <  t-1)
// With t = 0 (or trunc_en low) neither is set and the column passes data
// through. The exact Head/Tail cascade is in the earlier TrunMEM work and not
// in this paper; this decoding is this design's reading of it.
//
// A head or tail column is power-gated (pg_off) when HAS_PG is set: it is not
// written and draws no current; the paper places a PMOS header and an NMOS
// footer per column, which this logic only controls. The bit sent to the write
// driver already carries the dummy value (the paper's text truncates before
// storage) and the read mux substitutes it again on the way out (the paper's
// figure shows a mux between the sense amplifier and 360DataOut), so a
// gated column reads correctly although its cells hold nothing.
//
// Purely combinational.
module trunc_manager
  import sport_pkg::*;
#(
  parameter int unsigned BIT_POS = 0,   // bit position within the byte, 0..7
  parameter bit          HAS_PG  = 1'b1 // column has power-gating switches
) (
  input  trunc_t t_i,         // truncation level of the bank
  input  logic   trunc_en_i,  // truncation enable
  input  logic   din_i,       // write data bit (360DataIn)
  input  logic   sa_i,        // sense-amplifier read bit
  output logic   head_o,
  output logic   tail_o,
  output logic   pg_off_o,    // column power-gated
  output logic   wbit_o,      // bit driven to the write driver
  output logic   wen_o,       // column write allowed
  output logic   dout_o       // read mux output (360DataOut)
);

  logic [3:0] tpos;

  always_comb begin
    tpos     = {1'b0, t_i};
    head_o   = trunc_en_i && (t_i != '0) && (4'(BIT_POS) == tpos - 4'd1);
    tail_o   = trunc_en_i && (t_i != '0) && (4'(BIT_POS) <  tpos - 4'd1);
    pg_off_o = HAS_PG && (head_o || tail_o);
    wen_o    = !pg_off_o;
    wbit_o   = head_o ? 1'b1 : (tail_o ? 1'b0 : din_i);
    dout_o   = head_o ? 1'b1 : (tail_o ? 1'b0 : sa_i);
  end

endmodule
