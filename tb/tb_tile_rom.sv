// tb_tile_rom: self-checking test of the tile metadata ROM.
//
// Reads every entry of the default 60 x 34-tile ROM and compares each field
// with a reference computed here in real arithmetic: tile-centre latitude
// pi/2 - pi*r/H and longitude 2*pi*c/W - pi (as binary angles), and their
// sine and cosine with $sin/$cos. Also checks the one-clock read latency.
module tb_tile_rom;
  import sport_pkg::*;

  localparam int TR = 34, TC = 60, S = 64, H = 2160, W = 3840;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0;
  logic [10:0] addr_i = '0;
  tile_meta_t data_o;
  int checks = 0, failures = 0;

  tile_rom dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit near(input longint a, input longint b, input longint tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  initial begin
    @(negedge clk);
    for (int i = 0; i < TR; i++) begin
      for (int j = 0; j < TC; j++) begin
        real lat, lon;
        longint e_lat, e_lon, e_s, e_c;
        addr_i = 11'(i * TC + j);
        @(posedge clk); #1;   // one clock of read latency
        lat   = PI / 2.0 - PI * real'(i * S + S / 2) / real'(H);
        lon   = 2.0 * PI * real'(j * S + S / 2) / real'(W) - PI;
        e_lat = longint'(lat / (2.0 * PI) * 4294967296.0);
        e_lon = longint'(lon / (2.0 * PI) * 4294967296.0);
        e_s   = longint'($sin(lat) * 1073741824.0);
        e_c   = longint'($cos(lat) * 1073741824.0);
        checks++;
        if (!near(longint'(signed'(data_o.lat)), e_lat, 2)) begin
          failures++; $display("lat %0d,%0d: %h vs %0d", i, j, data_o.lat, e_lat);
        end
        checks++;
        if (!near(longint'(signed'(data_o.lon)), e_lon, 2)) begin
          failures++; $display("lon %0d,%0d: %h vs %0d", i, j, data_o.lon, e_lon);
        end
        checks++;
        if (!near(longint'(data_o.sin_lat), e_s, 64)) begin
          failures++; $display("sin %0d,%0d: %0d vs %0d", i, j, data_o.sin_lat, e_s);
        end
        checks++;
        if (!near(longint'(data_o.cos_lat), e_c, 64)) begin
          failures++; $display("cos %0d,%0d: %0d vs %0d", i, j, data_o.cos_lat, e_c);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
