// tb_trunmem360_ctrl: self-checking test of the TrunMEM360 controller.
//
// The controller runs with the region expander (2 x 2 tiles of 4 x 4
// pixels, 4-word passes, so four passes per tile) and with models written
// here of the classifier handshake (done after a random delay), the region
// map (random per frame) and the three memory banks (load registers on
// din_en, write or read on a wordline access, read data one clock later,
// truncation to the loaded level on write). Random gaps are put into the
// pixel stream. Checks:
//   - every pixel of a frame leaves on the DRAM port once, at its frame
//     address, truncated with its tile's level, in the bank of its region;
//   - no pixel is taken during classification or while a pass is read out,
//     and each of those stalls happens;
//   - bank command rules: one bank enabled, precharge bar equal to the
//     wordline enable, never write and read together, one wordline access
//     per pixel in each direction;
//   - a pass of 4 pixels is taken in 4 clocks and read out in 4 + 3;
//   - frame_done once per frame, dram_buf flipping after it, trained set
//     after the first frame.
module tb_trunmem360_ctrl;
  import sport_pkg::*;

  localparam int TR = 2, TC = 2, TS = 4, W = 4;
  localparam int TILES = TR * TC, TP = TS * TS, NPIX = TILES * TP;

  logic clk = 1'b0, rst_n = 1'b0;
  logic frame_start = 1'b0, cls_start, cls_done = 1'b0;
  logic in_valid = 1'b0, in_ready;
  logic [23:0] in_pix = '0;
  logic x_frame_start, x_adv;
  logic [1:0] x_tile, map_raddr;
  logic [3:0] x_pix;
  logic [1:0] x_word;
  logic [2:0] x_row;
  logic x_first, x_pass_first, x_pass_last, x_tile_last, x_frame_last;
  region_e x_region;
  logic [2:0] x_bank_en;
  trunc_t x_t;
  logic [7:0] map_rdata;
  level_set_t lvl_rdata;
  logic [2:0] bank_en;
  logic din_en, trunc_en, pre_b, wl_en, we, re;
  logic [31:0] din, mem_dout = '0;
  logic [1:0] addr;
  logic [3:0] byte_sel;
  trunc_t t_out;
  logic mem_dout_valid = 1'b0;
  logic dram_valid, dram_buf, frame_done, trained;
  logic [5:0] dram_addr;
  logic [23:0] dram_data;

  logic [7:0]  map_mem [TILES];
  logic [23:0] frame_pix [NPIX];
  int          seen [NPIX];
  int checks = 0, failures = 0;
  int n_cls_stall = 0, n_rd_stall = 0, n_wr = 0, n_rd = 0, n_done = 0;

  region_expander #(.TILE_ROWS(TR), .TILE_COLS(TC), .TILE_SIZE(TS), .WORDS(W)) u_x (
    .clk, .rst_n, .frame_start(x_frame_start), .adv(x_adv), .sport_a(1'b0),
    .trained(1'b0), .map_raddr, .map_rdata, .lvl_rdata,
    .tile(x_tile), .pix_in_tile(x_pix), .row(x_row), .word_addr(x_word),
    .first_in_tile(x_first), .pass_first(x_pass_first), .pass_last(x_pass_last),
    .tile_last(x_tile_last), .frame_last(x_frame_last), .region(x_region),
    .bank_en(x_bank_en), .t(x_t)
  );

  trunmem360_ctrl #(.WORDS(W), .TILES(TILES), .TILE_PIX(TP)) dut (
    .clk, .rst_n, .frame_start_i(frame_start), .cls_start_o(cls_start),
    .cls_done_i(cls_done), .in_valid, .in_pix, .in_ready,
    .x_frame_start, .x_adv, .x_tile, .x_pix_in_tile(x_pix), .x_word_addr(x_word),
    .x_pass_first, .x_pass_last, .x_frame_last, .x_bank_en, .x_t,
    .bank_en, .din_en, .din, .addr, .byte_sel, .t_out, .trunc_en,
    .pre_b, .wl_en, .we, .re, .mem_dout, .mem_dout_valid,
    .dram_valid, .dram_buf, .dram_addr, .dram_data, .frame_done, .trained
  );

  always_ff @(posedge clk) begin
    map_rdata <= map_mem[map_raddr];
    lvl_rdata <= '0;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [23:0] trunc_pix(input logic [23:0] p, input int t);
    logic [23:0] r;
    r = p;
    if (t > 0)
      for (int c = 0; c < 3; c++) begin
        r[c*8 +: 8] = p[c*8 +: 8] & ~8'((1 << t) - 1);
        r[c*8 + t - 1] = 1'b1;
      end
    return r;
  endfunction

  function automatic int exp_region(input int tl);
    return (map_mem[tl][1:0] == 2'd3) ? 2 : int'(map_mem[tl][1:0]);
  endfunction

  // controller state, read through the hierarchy to count the stalls
  localparam int C_CLS = 1, C_WFLUSH = 3, C_READ = 4;
  int ctl_state;
  assign ctl_state = int'(dut.state);

  // bank model
  logic [31:0] bank [3][W];
  logic [2:0]  r_bank;
  logic [31:0] r_din;
  logic [1:0]  r_addr;
  int          r_t;
  always @(posedge clk) begin
    mem_dout_valid <= 1'b0;
    if (din_en) begin
      r_bank <= bank_en; r_din <= din; r_addr <= addr; r_t <= int'(t_out);
    end
    if (wl_en && pre_b) begin
      for (int b = 0; b < 3; b++)
        if (r_bank[b]) begin
          if (we) bank[b][r_addr] <= {8'h00, trunc_pix(r_din[23:0], trunc_en ? r_t : 0)};
          if (re) begin
            mem_dout       <= bank[b][r_addr];
            mem_dout_valid <= 1'b1;
          end
        end
    end
  end

  // command rules and stall counting
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (pre_b !== wl_en || (we && re) || ((din_en || wl_en) && !$onehot(bank_en))) begin
      failures++;
      $display("%t command rule: pre_b %b wl_en %b we %b re %b bank_en %b", $time,
               pre_b, wl_en, we, re, bank_en);
    end
    if (wl_en && we) n_wr++;
    if (wl_en && re) n_rd++;
    if (in_valid && !in_ready && ctl_state == C_CLS)  n_cls_stall++;
    if (in_valid && !in_ready && ctl_state == C_READ) n_rd_stall++;
  end

  // DRAM output check
  int frame_no = 0;
  bit check_data = 1'b1;
  always @(negedge clk) if (dram_valid && check_data) begin
    int a, tl;
    a  = int'(dram_addr);
    tl = a / TP;
    checks++;
    if (a >= NPIX || seen[a] != 0 ||
        dram_data !== trunc_pix(frame_pix[a], (exp_region(tl) == 0) ? 0 :
                                               (exp_region(tl) == 1) ? 4 : 5)) begin
      failures++;
      $display("frame %0d dram addr %0d: %h (pixel %h, region %0d, seen %0d)", frame_no, a,
               dram_data, frame_pix[a], exp_region(tl), seen[a]);
    end
    seen[a]++;
  end

  // read-out time of a pass: from the last pixel written to the last read
  int rd_start;
  always @(posedge clk) begin
    if (ctl_state == C_WFLUSH) rd_start <= $time;
  end

  initial begin
    int buf0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 4; f++) begin
      frame_no = f;
      for (int i = 0; i < TILES; i++) map_mem[i] = 8'($urandom_range(0, 3));
      for (int i = 0; i < NPIX; i++) begin frame_pix[i] = 24'($urandom); seen[i] = 0; end
      n_wr = 0; n_rd = 0;
      buf0 = dram_buf;
      @(negedge clk);
      frame_start = 1'b1;
      in_valid = 1'b1;       // the source offers pixels early: a stall
      in_pix = frame_pix[0];
      @(negedge clk);
      frame_start = 1'b0;
      checks++;
      if (ctl_state != C_CLS) begin failures++; $display("no classification"); end
      repeat ($urandom_range(2, 6)) @(negedge clk);
      cls_done = 1'b1;
      @(negedge clk);
      cls_done = 1'b0;
      // stream in tile order
      for (int i = 0; i < NPIX; i++) begin
        if ($urandom_range(0, 5) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_pix   = frame_pix[i];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 1'b0;
      while (!frame_done) @(negedge clk);
      n_done++;
      checks++;
      if (dram_buf !== 1'(buf0)) begin failures++; $display("dram_buf flipped early"); end
      @(negedge clk);
      checks++;
      if (dram_buf !== !1'(buf0) || !trained) begin
        failures++; $display("dram_buf %b trained %b after frame", dram_buf, trained);
      end
      for (int i = 0; i < NPIX; i++) begin
        checks++;
        if (seen[i] != 1) begin failures++; $display("pixel %0d sent %0d times", i, seen[i]); end
      end
      checks++;
      if (n_wr != NPIX || n_rd != NPIX) begin
        failures++; $display("%0d writes, %0d reads for %0d pixels", n_wr, n_rd, NPIX);
      end
    end
    // pass timing with a continuous stream: W writes, then W + 3 clocks without
    // input (write flush, W loads, last access, last data)
    begin
      int t0, t1;
      check_data = 1'b0;
      @(negedge clk);
      frame_start = 1'b1;
      @(negedge clk);
      frame_start = 1'b0;
      cls_done = 1'b1;
      @(negedge clk);
      cls_done = 1'b0;
      in_valid = 1'b1;
      while (!in_ready) @(negedge clk);
      t0 = $time;
      while (in_ready) @(negedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != W) begin failures++; $display("write pass took %0d clocks", (t1 - t0) / 10); end
      t0 = $time;
      while (!in_ready) @(negedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != W + 3) begin failures++; $display("read pass took %0d clocks", (t1 - t0) / 10); end
    end
    checks += 2;
    if (n_cls_stall == 0) begin failures++; $display("no classification stall"); end
    if (n_rd_stall == 0)  begin failures++; $display("no read-out stall"); end
    $display("frames %0d, classification stall clocks %0d, read-out stall clocks %0d",
             n_done, n_cls_stall, n_rd_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
