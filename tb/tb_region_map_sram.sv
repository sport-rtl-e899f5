// tb_region_map_sram: self-checking test of the region map memory.
//
// Fills all 2,040 entries with random bytes, then mixes random writes, idle
// cycles with random (disabled) write data, and reads, comparing every read
// with a model array. Checks the one-clock read latency and that a read of
// the address being written returns the old entry.
module tb_region_map_sram;
  localparam int N = 2040;

  logic clk = 1'b0;
  logic we_i = 1'b0;
  logic [10:0] waddr_i = '0, raddr_i = '0;
  logic [7:0] wdata_i = '0, rdata_o;
  logic [7:0] model [N];
  int checks = 0, failures = 0;

  region_map_sram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      we_i = 1'b1; waddr_i = 11'(a); wdata_i = 8'($urandom); model[a] = wdata_i;
    end
    for (int k = 0; k < 20000; k++) begin
      logic [7:0] expv;
      @(negedge clk);
      raddr_i = 11'($urandom_range(0, N - 1));
      waddr_i = ($urandom_range(0, 3) == 0) ? raddr_i : 11'($urandom_range(0, N - 1));
      wdata_i = 8'($urandom);
      we_i    = $urandom_range(0, 1) == 1;
      expv    = model[raddr_i];        // old value on a same-address write
      if (we_i) model[waddr_i] = wdata_i;
      @(posedge clk); #1;
      checks++;
      if (rdata_o !== expv) begin
        failures++;
        $display("read %0d: %h expected %h", raddr_i, rdata_o, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
