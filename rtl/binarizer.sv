// binarizer: image binarization by an unsigned comparator and a multiplexer.
//
// As in the paper, the comparator tests G > threshold and its result selects
// 255 (edge) or 0 (background); every output pixel is therefore 0 or 255.
// The threshold is a run-time input; the paper gives no value for it.
//
// Interface: in_valid/in_mag (Sobel magnitude) and threshold in,
// out_valid/out_pixel out; SB_W sideband bits pass through unchanged.
// Timing: one register stage (this design's choice), latency 1 cycle.
module binarizer
  import lane_pkg::*;
#(
  parameter int unsigned SB_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [MAG_W-1:0]  in_mag,
  input  logic [SB_W-1:0]   in_sb,
  input  logic [MAG_W-1:0]  threshold,
  output logic              out_valid,
  output logic [PIX_W-1:0]  out_pixel,
  output logic [SB_W-1:0]   out_sb
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pixel <= PIX_OFF;
      out_sb    <= '0;
    end else begin
      out_valid <= in_valid;
      out_pixel <= (in_mag > threshold) ? PIX_ON : PIX_OFF;
      out_sb    <= in_sb;
    end
  end

endmodule
