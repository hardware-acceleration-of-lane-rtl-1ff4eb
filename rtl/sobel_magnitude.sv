// sobel_magnitude: Sobel gradient magnitude of one 3x3 window per cycle.
//
// Follows the paper's adder tree: the kernel weights are only 0, 1 and 2,
// so no multiplier is used; weight 2 is a left shift by one.
//   gx_p = P0 + 2*P3 + P6      gx_n = P2 + 2*P5 + P8      Gx = gx_p - gx_n
//   gy_p = P0 + 2*P1 + P2      gy_n = P6 + 2*P7 + P8      Gy = gy_p - gy_n
//   |G|  = |Gx| + |Gy|   (at most 2 * 1020 = 2040, 11 bits)
// The sign of Gx and Gy does not matter because only their absolute values
// are used. P0..P8 are the window in row-major order (P4 is the centre;
// both Sobel kernels weight it 0, so it is not read).
//
// Interface: in_valid/in_win in, out_valid/out_mag out. SB_W bits of
// sideband (coordinates, frame flags) travel alongside unchanged.
// Timing: one register stage, latency 1 cycle, one window per cycle. The
// single output register is this design's choice.
module sobel_magnitude
  import lane_pkg::*;
#(
  parameter int unsigned SB_W = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [8:0][PIX_W-1:0] in_win,
  input  logic [SB_W-1:0]       in_sb,
  output logic                  out_valid,
  output logic [MAG_W-1:0]      out_mag,
  output logic [SB_W-1:0]       out_sb
);

  localparam int unsigned SUM_W = PIX_W + 2;   // up to 4 * 255

  logic [SUM_W-1:0] gx_p, gx_n, gy_p, gy_n;
  logic [SUM_W-1:0] abs_gx, abs_gy;
  logic [MAG_W-1:0] mag;

  function automatic logic [SUM_W-1:0] ext(input logic [PIX_W-1:0] p);
    return SUM_W'(p);
  endfunction

  always_comb begin
    gx_p   = ext(in_win[0]) + (ext(in_win[3]) << 1) + ext(in_win[6]);
    gx_n   = ext(in_win[2]) + (ext(in_win[5]) << 1) + ext(in_win[8]);
    gy_p   = ext(in_win[0]) + (ext(in_win[1]) << 1) + ext(in_win[2]);
    gy_n   = ext(in_win[6]) + (ext(in_win[7]) << 1) + ext(in_win[8]);
    abs_gx = (gx_p >= gx_n) ? gx_p - gx_n : gx_n - gx_p;
    abs_gy = (gy_p >= gy_n) ? gy_p - gy_n : gy_n - gy_p;
    mag    = MAG_W'(abs_gx) + MAG_W'(abs_gy);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mag   <= '0;
      out_sb    <= '0;
    end else begin
      out_valid <= in_valid;
      out_mag   <= mag;
      out_sb    <= in_sb;
    end
  end

endmodule
