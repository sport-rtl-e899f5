// tile_classifier: gaze-predictive tile classification (the paper's
// Algorithm 1).
//
// For every tile p the angular distance to the predicted gaze (theta_g,
// phi_g) follows from the spherical law of cosines,
//   cos d_p = sin(phi_p) sin(phi_g) + cos(phi_p) cos(phi_g) cos(theta_p - theta_g),
// with sin/cos(phi_p) and theta_p read from the tile ROM. A tile is FoV for
// d <= 45 deg, Border for 45 < d <= 60 deg and Background beyond (paper).
// The paper takes one arccos per tile and compares d with the angles; since
// arccos falls monotonically, this design compares cos d with cos 45 and
// cos 60 instead, which gives the same decision without an arccos unit.
//
// Datapath: one shared iterative CORDIC. At start it produces sin/cos(phi_g)
// (once per frame); then, tile by tile in ROM order, it produces
// cos(theta_p - theta_g) while the two latitude products are formed. Each
// tile takes ITER + 3 clocks: 2,040 tiles at ITER = 16 need 38,779 clocks,
// 0.39 ms at 100 MHz, inside the paper's 0.42 ms classification budget
// (which the paper quotes for 1,800 tiles).
//
// Interface: start (one clock) samples theta_g/phi_g; busy stays high until
// done pulses, one clock after the last map write has been made. Each
// tile's region is written to the region map through map_we_o/map_waddr_o/map_wdata_o. The tile ROM is read
// through rom_addr_o with one clock of read latency. n_fov/n_border/n_bg
// count the tiles of each region in the last classification.
module tile_classifier
  import sport_pkg::*;
#(
  parameter int unsigned TILE_ROWS  = 34,
  parameter int unsigned TILE_COLS  = 60,
  parameter int unsigned ITER       = 16,
  parameter int unsigned FOV_DEG    = 45,
  parameter int unsigned BORDER_DEG = 60,
  localparam int unsigned TILES     = TILE_ROWS * TILE_COLS,
  localparam int unsigned AW        = $clog2(TILES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  angle_t        theta_g,
  input  angle_t        phi_g,
  output logic          busy,
  output logic          done,
  output logic [AW-1:0] rom_addr_o,
  input  tile_meta_t    rom_data_i,
  output logic          map_we_o,
  output logic [AW-1:0] map_waddr_o,
  output logic [7:0]    map_wdata_o,
  output logic [AW:0]   n_fov,
  output logic [AW:0]   n_border,
  output logic [AW:0]   n_bg
);

  localparam logic signed [33:0] COS_FOV    = 34'(cos_deg_q30(int'(FOV_DEG)));
  localparam logic signed [33:0] COS_BORDER = 34'(cos_deg_q30(int'(BORDER_DEG)));

  typedef enum logic [2:0] {S_IDLE, S_GAZE, S_LOAD, S_ROT, S_WAIT} state_e;
  state_e state;

  logic [AW-1:0] tile;
  angle_t        theta_lat;
  q30_t          s_g, c_g;
  logic signed [33:0] ss, cc;

  logic   cs_start, cs_busy, cs_done;
  angle_t cs_angle;
  q30_t   cs_sin, cs_cos;

  cordic_sincos #(.ITER(ITER)) u_cordic (
    .clk, .rst_n,
    .start  (cs_start),
    .angle_i(cs_angle),
    .busy   (cs_busy),
    .done   (cs_done),
    .sin_o  (cs_sin),
    .cos_o  (cs_cos)
  );

  logic signed [63:0] p_ss, p_cc, p_cd;
  logic signed [33:0] cos_d;
  region_e            region_c;

  always_comb begin
    cs_start = 1'b0;
    cs_angle = rom_data_i.lon - theta_lat;
    if (state == S_IDLE && start) begin
      cs_start = 1'b1;
      cs_angle = phi_g;
    end else if (state == S_ROT) begin
      cs_start = 1'b1;
    end
    p_ss  = 64'(rom_data_i.sin_lat) * 64'(s_g);
    p_cc  = 64'(rom_data_i.cos_lat) * 64'(c_g);
    p_cd  = 64'(cc) * 64'(cs_cos);
    cos_d = ss + 34'(p_cd >>> 30);
    if (cos_d >= COS_FOV)         region_c = REG_FOV;
    else if (cos_d >= COS_BORDER) region_c = REG_BORDER;
    else                          region_c = REG_BG;
  end

  assign rom_addr_o = tile;
  logic fin;   // last map write issued; done follows once it has landed
  assign busy       = (state != S_IDLE) || fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      tile        <= '0;
      theta_lat   <= '0;
      s_g         <= '0;
      c_g         <= '0;
      ss          <= '0;
      cc          <= '0;
      done        <= 1'b0;
      fin         <= 1'b0;
      map_we_o    <= 1'b0;
      map_waddr_o <= '0;
      map_wdata_o <= '0;
      n_fov       <= '0;
      n_border    <= '0;
      n_bg        <= '0;
    end else begin
      done     <= fin;
      fin      <= 1'b0;
      map_we_o <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          theta_lat <= theta_g;
          tile      <= '0;
          n_fov     <= '0;
          n_border  <= '0;
          n_bg      <= '0;
          state     <= S_GAZE;
        end
        S_GAZE: if (cs_done) begin
          s_g   <= cs_sin;
          c_g   <= cs_cos;
          state <= S_LOAD;
        end
        S_LOAD: state <= S_ROT;       // ROM data for 'tile' arrives
        S_ROT: begin                  // CORDIC started on theta_p - theta_g
          ss    <= 34'(p_ss >>> 30);
          cc    <= 34'(p_cc >>> 30);
          state <= S_WAIT;
        end
        S_WAIT: if (cs_done) begin
          map_we_o    <= 1'b1;
          map_waddr_o <= tile;
          map_wdata_o <= {6'b0, region_c};
          unique case (region_c)
            REG_FOV:    n_fov    <= n_fov + 1'b1;
            REG_BORDER: n_border <= n_border + 1'b1;
            default:    n_bg     <= n_bg + 1'b1;
          endcase
          if (tile == AW'(TILES - 1)) begin
            fin   <= 1'b1;
            state <= S_IDLE;
          end else begin
            tile  <= tile + 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
