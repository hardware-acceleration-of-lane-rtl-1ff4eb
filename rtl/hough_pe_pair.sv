// hough_pe_pair: Hough processing element shared by two angles.
//
// The paper's processing element computes r = x*cos(theta) + y*sin(theta)
// with two multipliers and an adder. Because sin(180-theta) = sin(theta) and
// cos(180-theta) = -cos(theta), the same two products also give
// r' = -x*cos(theta) + y*sin(theta) for the angle 180-theta with one extra
// add/subtract, so 90 of these pairs (180 multipliers) cover 180 angles.
//
// Angles: for THETA = 1..89 the pair serves theta_a = THETA and
// theta_b = 180 - THETA. The pair with THETA = 0 would duplicate angle 180,
// which lies outside 0..179; it serves theta_a = 0 (r = x*cos 0) and
// theta_b = 90 (r = y*sin 90) instead, still with two multipliers. This
// assignment of the two leftover angles is this design's own choice.
//
// Arithmetic: cos and sin are constants rounded to TRIG_FRAC = 14 fractional
// bits; r is rounded to the nearest integer (add half, arithmetic shift).
// The output is the signed rho of each angle.
//
// Timing: two register stages (products, then sums); latency 2 cycles, one
// pixel per cycle.
module hough_pe_pair
  import lane_pkg::*;
#(
  parameter int unsigned THETA = 1,
  parameter int unsigned XW    = 9,
  parameter int unsigned YW    = 9,
  parameter int unsigned RW    = 11
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [XW-1:0]        in_x,
  input  logic [YW-1:0]        in_y,
  output logic                 out_valid,
  output logic signed [RW-1:0] out_rho_a,
  output logic signed [RW-1:0] out_rho_b
);

  localparam int unsigned PW = ((XW > YW) ? XW : YW) + 1 + TRIG_W;
  localparam int unsigned SW = PW + 1;

  // multiplier constants: x * C_X and y * C_Y
  localparam logic signed [TRIG_W-1:0] C_X = TRIG_W'(trig_cos(int'(THETA)));
  localparam logic signed [TRIG_W-1:0] C_Y = (THETA == 0) ? TRIG_W'(trig_sin(90))
                                                         : TRIG_W'(trig_sin(int'(THETA)));
  localparam logic signed [SW-1:0] HALF = SW'(1) <<< (TRIG_FRAC - 1);

  logic                  p_valid;
  logic signed [PW-1:0]  px, py;
  logic signed [SW-1:0]  sum_a, sum_b;

  always_comb begin
    if (THETA == 0) begin
      sum_a = SW'(px) + HALF;               // theta = 0 : r = x
      sum_b = SW'(py) + HALF;               // theta = 90: r = y
    end else begin
      sum_a = SW'(py) + SW'(px) + HALF;     // theta
      sum_b = SW'(py) - SW'(px) + HALF;     // 180 - theta
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid   <= 1'b0;
      px        <= '0;
      py        <= '0;
      out_valid <= 1'b0;
      out_rho_a <= '0;
      out_rho_b <= '0;
    end else begin
      p_valid   <= in_valid;
      px        <= $signed(PW'({1'b0, in_x})) * $signed(PW'(C_X));
      py        <= $signed(PW'({1'b0, in_y})) * $signed(PW'(C_Y));
      out_valid <= p_valid;
      out_rho_a <= RW'(sum_a >>> TRIG_FRAC);
      out_rho_b <= RW'(sum_b >>> TRIG_FRAC);
    end
  end

endmodule
