// tb_trunmem360: self-checking test of the three-bank truncation memory.
//
// Each bank (FoV, Border, Background) is written with its own random words at
// the same addresses and its own truncation level, then everything is read
// back through the shared output. The checks are that a bank returns only
// what was written to it (writes to one bank never reach another), that the
// read data carry the level's dummy pattern in the truncated bits, that the
// power-gated column mask of each bank follows its level and that
// dout_valid comes one clock after a read access. Uses 64-word banks to stay
// short; the bank logic does not depend on the depth.
module tb_trunmem360;
  import sport_pkg::*;

  localparam int N = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NUM_REGIONS-1:0] bank_en = '0;
  logic din_en = 1'b0, pre_b = 1'b0, wl_en = 1'b0, we = 1'b0, re = 1'b0;
  logic trunc_en = 1'b1;
  logic [31:0] din = '0, dout;
  logic [5:0]  addr = '0;
  logic [3:0]  byte_sel = 4'hF;
  trunc_t      t_in = '0;
  logic        dout_valid;
  logic [31:0] col_gated [NUM_REGIONS];
  logic [31:0] data [NUM_REGIONS][N];
  int          lvl  [NUM_REGIONS];
  int checks = 0, failures = 0;

  trunmem360 #(.WORDS(N)) dut (
    .clk, .rst_n, .bank_en, .din_en, .din, .addr, .byte_sel, .t_in, .trunc_en,
    .pre_b, .wl_en, .we, .re, .dout, .dout_valid, .col_gated
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] trunc_word(input logic [31:0] w, input int t);
    logic [31:0] r;
    r = w;
    if (t > 0)
      for (int b = 0; b < 4; b++) begin
        r[b*8 +: 8] = w[b*8 +: 8] & ~8'((1 << t) - 1);
        r[b*8 + t - 1] = 1'b1;
      end
    return r;
  endfunction

  task automatic cmd(input int bank, input int a, input logic [31:0] d,
                     input int t, input bit wr);
    @(negedge clk);
    bank_en = 3'(1 << bank); din_en = 1'b1; addr = 6'(a); din = d;
    t_in = trunc_t'(t);
    @(negedge clk);
    din_en = 1'b0; pre_b = 1'b1; wl_en = 1'b1; we = wr; re = !wr;
    @(posedge clk); #1;
    pre_b = 1'b0; wl_en = 1'b0; we = 1'b0; re = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 20; round++) begin
      for (int b = 0; b < NUM_REGIONS; b++) lvl[b] = $urandom_range(0, 7);
      for (int b = 0; b < NUM_REGIONS; b++) begin
        // the gated mask follows the level loaded with the word
        @(negedge clk);
        bank_en = 3'(1 << b); t_in = trunc_t'(lvl[b]); din_en = 1'b1;
        @(posedge clk); #1;
        checks++;
        if (col_gated[b] !== {4{8'((1 << lvl[b]) - 1)}}) begin
          failures++;
          $display("bank %0d level %0d gated mask %h", b, lvl[b], col_gated[b]);
        end
        din_en = 1'b0;
        for (int a = 0; a < N; a++) begin
          data[b][a] = $urandom;
          cmd(b, a, data[b][a], lvl[b], 1'b1);
        end
      end
      for (int b = 0; b < NUM_REGIONS; b++)
        for (int a = 0; a < N; a++) begin
          cmd(b, a, $urandom, lvl[b], 1'b0);
          checks++;
          if (!dout_valid || dout !== trunc_word(data[b][a], lvl[b])) begin
            failures++;
            $display("bank %0d addr %0d t=%0d: %h expected %h", b, a, lvl[b], dout,
                     trunc_word(data[b][a], lvl[b]));
          end
          @(posedge clk); #1;
          checks++;
          if (dout_valid) begin failures++; $display("dout_valid held"); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
