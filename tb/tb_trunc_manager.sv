// tb_trunc_manager: exhaustive self-checking test of the column truncation
// manager.
//
// Instantiates a manager for each bit position 0..7, with and without power
// gating, and sweeps every truncation level, enable, write bit and sense bit.
// Reference: with truncation enabled, a column below bit t is truncated; the
// column at t-1 reads and writes 1, lower ones 0 (the 10..0 dummy pattern);
// truncated columns are power-gated and not written when gating is present;
// all other columns pass data through.
module tb_trunc_manager;
  import sport_pkg::*;

  trunc_t t_i;
  logic   trunc_en_i, din_i, sa_i;
  logic [7:0] head [2], tail [2], pg [2], wbit [2], wen [2], dout [2];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 2; g++) begin : g_pg
    for (genvar b = 0; b < 8; b++) begin : g_bit
      trunc_manager #(.BIT_POS(b), .HAS_PG(g == 1)) u_tm (
        .t_i, .trunc_en_i, .din_i, .sa_i,
        .head_o(head[g][b]), .tail_o(tail[g][b]), .pg_off_o(pg[g][b]),
        .wbit_o(wbit[g][b]), .wen_o(wen[g][b]), .dout_o(dout[g][b])
      );
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 8; t++)
      for (int en = 0; en < 2; en++)
        for (int d = 0; d < 2; d++)
          for (int s = 0; s < 2; s++) begin
            t_i = trunc_t'(t); trunc_en_i = en[0]; din_i = d[0]; sa_i = s[0];
            #1;
            for (int g = 0; g < 2; g++)
              for (int b = 0; b < 8; b++) begin
                logic tr, hd, e_out, e_w, e_wen;
                tr    = (en == 1) && (b < t);
                hd    = (en == 1) && (b == t - 1);
                e_out = tr ? hd : s[0];
                e_w   = tr ? hd : d[0];
                e_wen = !(tr && g == 1);
                checks++;
                if (dout[g][b] !== e_out || wbit[g][b] !== e_w ||
                    wen[g][b] !== e_wen || pg[g][b] !== (tr && g == 1) ||
                    head[g][b] !== hd || tail[g][b] !== (tr && !hd)) begin
                  failures++;
                  $display("t=%0d en=%0d d=%0d s=%0d pg=%0d bit=%0d: dout %b wbit %b wen %b",
                           t, en, d, s, g, b, dout[g][b], wbit[g][b], wen[g][b]);
                end
              end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
