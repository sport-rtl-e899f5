// tb_trunc_sram_bank: self-checking test of a 1024 x 32-bit truncation SRAM
// bank, with and without column power gating.
//
// Drives the register interface (load with din_en, then wordline access with
// we or re) both one command at a time and streamed (load of the next word in
// the same clock as the access of the previous one). Every read is compared
// with a bit-level model: a column is written only if its byte is selected
// and, with power gating, if it is not truncated; it carries the dummy bit of
// the write level; on read, columns truncated at the read level give the
// 1 0..0 pattern. Also checks the paper's two examples (t = 4 -> XXXX1000,
// t = 5 -> XXX10000 per byte), the power-gated column mask, that nothing
// happens with Project Select low or precharge active, and the one-clock
// read latency.
module tb_trunc_sram_bank;
  import sport_pkg::*;

  localparam int N = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  logic proj_sel = 1'b0, din_en = 1'b0, pre_b = 1'b0, wl_en = 1'b0;
  logic we = 1'b0, re = 1'b0, trunc_en = 1'b0;
  logic [31:0] din = '0;
  logic [9:0]  addr = '0;
  logic [3:0]  byte_sel = '0;
  trunc_t      t_in = '0;
  logic [31:0] dout [2], col_gated [2];
  logic        dout_valid [2];
  logic [31:0] model [2][N];
  logic        known [N];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    trunc_sram_bank #(.HAS_PG(g == 1)) u_bank (
      .clk, .rst_n, .proj_sel, .din_en, .din, .addr, .byte_sel, .t_in,
      .trunc_en, .pre_b, .wl_en, .we, .re,
      .dout(dout[g]), .dout_valid(dout_valid[g]), .col_gated(col_gated[g])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit trunc_col(input int c, input int t, input bit en);
    return en && ((c % 8) < t);
  endfunction
  function automatic bit dummy_bit(input int c, input int t);
    return (c % 8) == t - 1;
  endfunction

  // model update for a write
  task automatic model_write(input int a, input logic [31:0] d,
                             input logic [3:0] bs, input int t, input bit en);
    for (int g = 0; g < 2; g++)
      for (int c = 0; c < 32; c++)
        if (bs[c / 8] && !(g == 1 && trunc_col(c, t, en)))
          model[g][a][c] = trunc_col(c, t, en) ? dummy_bit(c, t) : d[c];
  endtask

  function automatic logic [31:0] model_read(input int g, input int a,
                                             input int t, input bit en);
    logic [31:0] r;
    for (int c = 0; c < 32; c++)
      r[c] = trunc_col(c, t, en) ? dummy_bit(c, t) : model[g][a][c];
    return r;
  endfunction

  task automatic load(input int a, input logic [31:0] d, input logic [3:0] bs,
                      input int t, input bit en);
    @(negedge clk);
    proj_sel = 1'b1; din_en = 1'b1; addr = 10'(a); din = d; byte_sel = bs;
    t_in = trunc_t'(t); trunc_en = en;
    wl_en = 1'b0; we = 1'b0; re = 1'b0; pre_b = 1'b0;
    @(negedge clk);
    din_en = 1'b0;
  endtask

  task automatic access(input bit is_write);
    proj_sel = 1'b1; pre_b = 1'b1; wl_en = 1'b1; we = is_write; re = !is_write;
    @(negedge clk);
    wl_en = 1'b0; we = 1'b0; re = 1'b0; pre_b = 1'b0;
  endtask

  task automatic check_read(input int a, input int t, input bit en);
    load(a, $urandom, 4'hF, t, en);
    proj_sel = 1'b1; pre_b = 1'b1; wl_en = 1'b1; re = 1'b1;
    @(posedge clk); #1;
    wl_en = 1'b0; re = 1'b0; pre_b = 1'b0;
    for (int g = 0; g < 2; g++) begin
      logic [31:0] e;
      e = model_read(g, a, t, en);
      checks++;
      if (!dout_valid[g] || dout[g] !== e) begin
        failures++;
        $display("bank%0d read %0d t=%0d: %h expected %h (valid %b)", g, a, t, dout[g], e, dout_valid[g]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // initialise all words untruncated
    for (int a = 0; a < N; a++) begin
      logic [31:0] d;
      d = $urandom;
      load(a, d, 4'hF, 0, 1'b0);
      access(1'b1);
      model_write(a, d, 4'hF, 0, 1'b0);
    end
    // paper examples: a byte 0xB7 at t = 4 reads 0xB8, at t = 5 reads 0xB0
    load(7, 32'hB7B7_B7B7, 4'hF, 4, 1'b1);
    checks++;
    if (col_gated[1] !== 32'h0F0F_0F0F || col_gated[0] !== 32'h0) begin
      failures++; $display("gated mask %h / %h", col_gated[1], col_gated[0]);
    end
    access(1'b1);
    model_write(7, 32'hB7B7_B7B7, 4'hF, 4, 1'b1);
    check_read(7, 4, 1'b1);
    checks++;
    if (dout[1] !== 32'hB8B8_B8B8) begin failures++; $display("t=4 example %h", dout[1]); end
    load(8, 32'hB7B7_B7B7, 4'hF, 5, 1'b1);
    access(1'b1);
    model_write(8, 32'hB7B7_B7B7, 4'hF, 5, 1'b1);
    check_read(8, 5, 1'b1);
    checks++;
    if (dout[1] !== 32'hB0B0_B0B0) begin failures++; $display("t=5 example %h", dout[1]); end
    // random single writes and reads at the same level
    for (int k = 0; k < 3000; k++) begin
      int a, t;
      bit en;
      logic [31:0] d;
      logic [3:0] bs;
      a = $urandom_range(0, N - 1); t = $urandom_range(0, 7);
      en = $urandom_range(0, 3) != 0; d = $urandom; bs = 4'($urandom);
      load(a, d, bs, t, en);
      access(1'b1);
      model_write(a, d, bs, t, en);
      check_read(a, t, en);
    end
    // no effect without project select or with precharge active
    begin
      int a;
      a = 100;
      load(a, 32'h1234_5678, 4'hF, 0, 1'b0);
      proj_sel = 1'b0; pre_b = 1'b1; wl_en = 1'b1; we = 1'b1; din_en = 1'b1;
      din = 32'hFFFF_FFFF;
      @(negedge clk);
      wl_en = 1'b0; we = 1'b0; din_en = 1'b0; proj_sel = 1'b1; pre_b = 1'b0;
      access(1'b1);
      model_write(a, 32'h1234_5678, 4'hF, 0, 1'b0);
      check_read(a, 0, 1'b0);
    end
    // streamed writes: load word k+1 while word k is written
    begin
      logic [31:0] d [64];
      int t;
      t = 3;
      @(negedge clk);
      for (int k = 0; k <= 64; k++) begin
        proj_sel = 1'b1;
        din_en   = (k < 64);
        if (k < 64) begin
          d[k] = $urandom; din = d[k]; addr = 10'(200 + k);
          byte_sel = 4'b0111; t_in = trunc_t'(t); trunc_en = 1'b1;
        end
        wl_en = (k > 0); we = (k > 0); pre_b = (k > 0);
        @(negedge clk);
      end
      din_en = 1'b0; wl_en = 1'b0; we = 1'b0; pre_b = 1'b0;
      for (int k = 0; k < 64; k++) model_write(200 + k, d[k], 4'b0111, t, 1'b1);
      for (int k = 0; k < 64; k++) check_read(200 + k, t, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
