// cordic_sincos: iterative rotation-mode CORDIC giving sin and cos of a
// binary angle, one micro-rotation per clock.
//
// The angle is first folded into [-pi/2, pi/2) by a rotation of pi (result
// negated), then ITER micro-rotations by atan(2^-i) drive the residual angle
// to zero starting from (K, 0), K being the CORDIC gain compensation. This
// is the trigonometric unit of the tile classifier; the paper asks only for
// cos(theta_c - theta_g) and sin/cos(phi_g) and does not say how they are
// computed, so the CORDIC is this design's choice.
//
// Interface: a one-cycle start with angle_i launches a computation; done
// pulses exactly ITER clocks later, with sin_o/cos_o (signed Q2.30) valid
// from then until the next start. start while busy restarts.
module cordic_sincos
  import sport_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  angle_t angle_i,
  output logic   busy,
  output logic   done,
  output q30_t   sin_o,
  output q30_t   cos_o
);

  logic signed [33:0] x, y;
  logic signed [32:0] z;
  logic               flip;
  logic [$clog2(ITER+1)-1:0] cnt;

  angle_t             a_fold;
  logic               flip_c;
  logic signed [33:0] xs, ys;

  always_comb begin
    flip_c = (angle_i[31:30] == 2'b01) || (angle_i[31:30] == 2'b10);
    a_fold = flip_c ? angle_i - 32'h8000_0000 : angle_i;
    xs     = x >>> cnt;
    ys     = y >>> cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x    <= '0;
      y    <= '0;
      z    <= '0;
      flip <= 1'b0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        x    <= 34'(CORDIC_K_Q30);
        y    <= '0;
        z    <= 33'(signed'(a_fold));
        flip <= flip_c;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (z >= 0) begin
          x <= x - ys;
          y <= y + xs;
          z <= z - 33'(ATAN_BAM[5'(cnt)]);
        end else begin
          x <= x + ys;
          y <= y - xs;
          z <= z + 33'(ATAN_BAM[5'(cnt)]);
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(ITER+1))'(ITER - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign sin_o = flip ? -q30_t'(y[31:0]) : q30_t'(y[31:0]);
  assign cos_o = flip ? -q30_t'(x[31:0]) : q30_t'(x[31:0]);

endmodule
