// lane_detect_top: streaming lane-detection accelerator, gray image in,
// Hough matrix out.
//
// The pipeline follows the FPGA column of the paper's overview: Sobel edge
// detection (sobel_window builds zero-padded 3x3 windows, sobel_magnitude
// computes |Gx| + |Gy|), image binarization against a threshold (binarizer)
// and the Hough transform (hough_engine, 180 angles voting in parallel).
// Peak finding and line drawing are done in software on the Hough matrix,
// which is read out through the ro_* port.
//
// Interface:
//   in_valid/in_ready/in_pixel: 8-bit gray pixels in raster order, IMG_H
//     rows of IMG_W; a frame is simply the next IMG_W*IMG_H accepted pixels.
//   threshold: binarization threshold on |G| (edge if |G| > threshold).
//   bin_valid/bin_pixel/bin_x/bin_y: the binarized image (0 or 255).
//   frame_done: pulse when the Hough matrix of a frame is complete.
//   ro_en/ro_theta/ro_rho_addr -> ro_valid/ro_data (2 cycles): read and
//     clear cell (theta, rho) at address rho + IMG_W - 1; only between
//     frames, after frame_done and before the next frame's first pixel.
// Timing: one pixel per clock. in_ready is low for about DEPTH cycles after
// reset (memory clear) and for IMG_W + 1 cycles after each frame's last
// pixel (zero row flush). frame_done rises IMG_W*IMG_H + IMG_W + 8 clock
// edges after the edge that accepts the first pixel: 262,664 cycles, or
// 2.63 ms at 100 MHz, for a 512 x 512 image. The paper reports 2.62 ms for
// its 100 MHz FPGA build, i.e. the same one-pixel-per-clock rate.
//
// Lint note: rst_n is used asynchronously by the flip-flops and
// synchronously by the assertions' disable iff, which lint tools report.
module lane_detect_top
  import lane_pkg::*;
#(
  parameter int unsigned IMG_W = 512,
  parameter int unsigned IMG_H = 512,
  localparam int unsigned XW    = clog2_min1(IMG_W),
  localparam int unsigned YW    = clog2_min1(IMG_H + 2),
  localparam int unsigned DEPTH = rho_bins(IMG_W, IMG_H),
  localparam int unsigned AW    = clog2_min1(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [PIX_W-1:0]   in_pixel,
  input  logic [MAG_W-1:0]   threshold,
  output logic               bin_valid,
  output logic [PIX_W-1:0]   bin_pixel,
  output logic [XW-1:0]      bin_x,
  output logic [YW-1:0]      bin_y,
  output logic               frame_done,
  input  logic               ro_en,
  input  logic [THETA_W-1:0] ro_theta,
  input  logic [AW-1:0]      ro_rho_addr,
  output logic               ro_valid,
  output logic [CNT_W-1:0]   ro_data
);

  typedef struct packed {
    logic [XW-1:0] x;
    logic [YW-1:0] y;
    logic          last;
  } coord_t;

  localparam int unsigned SB_W = $bits(coord_t);

  logic                  eng_ready, win_ready;
  logic                  win_valid, win_last;
  logic [8:0][PIX_W-1:0] win;
  coord_t                win_sb, mag_sb, bin_sb;
  logic                  mag_valid;
  logic [MAG_W-1:0]      mag;

  assign in_ready = win_ready && eng_ready;

  sobel_window #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_window (
    .clk, .rst_n,
    .in_valid (in_valid && eng_ready),
    .in_ready (win_ready),
    .in_pixel,
    .out_valid(win_valid),
    .out_win  (win),
    .out_x    (win_sb.x),
    .out_y    (win_sb.y),
    .out_last (win_last)
  );
  assign win_sb.last = win_last;

  sobel_magnitude #(.SB_W(SB_W)) u_sobel (
    .clk, .rst_n,
    .in_valid (win_valid),
    .in_win   (win),
    .in_sb    (win_sb),
    .out_valid(mag_valid),
    .out_mag  (mag),
    .out_sb   (mag_sb)
  );

  binarizer #(.SB_W(SB_W)) u_binarize (
    .clk, .rst_n,
    .in_valid (mag_valid),
    .in_mag   (mag),
    .in_sb    (mag_sb),
    .threshold,
    .out_valid(bin_valid),
    .out_pixel(bin_pixel),
    .out_sb   (bin_sb)
  );

  assign bin_x = bin_sb.x;
  assign bin_y = bin_sb.y;

  hough_engine #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_hough (
    .clk, .rst_n,
    .ready      (eng_ready),
    .in_valid   (bin_valid),
    .in_pixel   (bin_pixel),
    .in_x       (bin_sb.x),
    .in_y       (bin_sb.y),
    .in_last    (bin_sb.last),
    .frame_done,
    .ro_en,
    .ro_theta,
    .ro_rho_addr,
    .ro_valid,
    .ro_data
  );

endmodule
