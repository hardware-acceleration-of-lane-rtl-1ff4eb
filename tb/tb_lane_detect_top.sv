// tb_lane_detect_top: end-to-end test of the lane-detection accelerator on a
// reduced 128 x 96 image (see lane_tb_body.svh for what is checked).
module tb_lane_detect_top;
  localparam int W = 128;
  localparam int H = 96;
`include "lane_tb_body.svh"
  lane_detect_top #(.IMG_W(W), .IMG_H(H)) dut (.*);
endmodule
