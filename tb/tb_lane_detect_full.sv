// tb_lane_detect_full: end-to-end test of the lane-detection accelerator at
// its default size, a 512 x 512 image as in the paper's experiment (see
// lane_tb_body.svh for what is checked).
module tb_lane_detect_full;
  localparam int W = 512;
  localparam int H = 512;
`include "lane_tb_body.svh"
  lane_detect_top dut (.*);
endmodule
