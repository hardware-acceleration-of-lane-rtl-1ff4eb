// hough_engine: parallel Hough transform for lines, one pixel per cycle.
//
// For every edge pixel (value 255) the engine votes for all 180 lines through
// it at once, one per angle theta = 0, 1, ..., 179 degrees: each angle has
// its own accumulator memory (hough_accum) addressed by
// rho = round(x*cos(theta) + y*sin(theta)). The rho values come from 90
// hough_pe_pair units, each with two multipliers serving two angles
// (theta and 180-theta, and 0 and 90 for the first), which is the paper's
// halving of 360 multipliers to 180. The 180 memories together hold the
// Hough matrix; cell (theta, rho) is stored at address rho + IMG_W - 1 of
// memory theta, since rho lies in [-(IMG_W-1), ceil(diagonal)].
//
// Interface:
//   in_valid/in_pixel/in_x/in_y/in_last: binarized pixel stream with the
//     pixel's coordinates (origin top left, x = column, y = row); only
//     pixels equal to 255 vote. No back-pressure.
//   ready: low while the memories are being zeroed after reset.
//   frame_done: one-cycle pulse once the vote of the in_last pixel has been
//     written, i.e. the Hough matrix of the frame is complete.
//   ro_en/ro_theta/ro_rho_addr: read one matrix cell (address = rho + IMG_W
//     - 1); ro_valid/ro_data return it two cycles later and the cell is
//     cleared. Only allowed while no votes are in flight.
// Timing: a pixel's votes are written 4 cycles after it enters; frame_done
// follows in the next cycle.
//
// The accumulators' bypass_hit flags are collected in acc_bypass for
// observation in simulation only; nothing in the engine uses them.
module hough_engine
  import lane_pkg::*;
#(
  parameter int unsigned IMG_W = 512,
  parameter int unsigned IMG_H = 512,
  localparam int unsigned XW    = clog2_min1(IMG_W),
  localparam int unsigned YW    = clog2_min1(IMG_H + 2),
  localparam int unsigned DEPTH = rho_bins(IMG_W, IMG_H),
  localparam int unsigned AW    = clog2_min1(DEPTH),
  localparam int unsigned RW    = AW + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               ready,
  input  logic               in_valid,
  input  logic [PIX_W-1:0]   in_pixel,
  input  logic [XW-1:0]      in_x,
  input  logic [YW-1:0]      in_y,
  input  logic               in_last,
  output logic               frame_done,
  input  logic               ro_en,
  input  logic [THETA_W-1:0] ro_theta,
  input  logic [AW-1:0]      ro_rho_addr,
  output logic               ro_valid,
  output logic [CNT_W-1:0]   ro_data
);

  localparam int unsigned RHO_OFFSET = IMG_W - 1;

  logic                  vote_in;
  logic [3:0]            last_sr;
  logic [N_THETA-1:0]    acc_ready, acc_rd_valid, acc_rd, acc_vote;
  logic [AW-1:0]         acc_addr    [N_THETA];
  logic [CNT_W-1:0]      acc_rd_data [N_THETA];
  logic [N_THETA-1:0]    acc_bypass;

  assign vote_in = in_valid && (in_pixel == PIX_ON);

  for (genvar k = 0; k < N_PAIRS; k++) begin : g_pair
    localparam int unsigned TA = k;
    localparam int unsigned TB = (k == 0) ? 90 : 180 - k;

    logic                 pe_valid;
    logic signed [RW-1:0] rho_a, rho_b;

    hough_pe_pair #(.THETA(k), .XW(XW), .YW(YW), .RW(RW)) u_pe (
      .clk, .rst_n,
      .in_valid (vote_in),
      .in_x, .in_y,
      .out_valid(pe_valid),
      .out_rho_a(rho_a),
      .out_rho_b(rho_b)
    );

    always_comb begin
      acc_vote[TA] = pe_valid;
      acc_vote[TB] = pe_valid;
      acc_rd[TA]   = ro_en && (ro_theta == THETA_W'(TA));
      acc_rd[TB]   = ro_en && (ro_theta == THETA_W'(TB));
      acc_addr[TA] = pe_valid ? AW'(rho_a + RW'(RHO_OFFSET)) : ro_rho_addr;
      acc_addr[TB] = pe_valid ? AW'(rho_b + RW'(RHO_OFFSET)) : ro_rho_addr;
    end

    hough_accum #(.DEPTH(DEPTH)) u_acc_a (
      .clk, .rst_n,
      .ready     (acc_ready[TA]),
      .vote      (acc_vote[TA]),
      .rd        (acc_rd[TA]),
      .addr      (acc_addr[TA]),
      .rd_valid  (acc_rd_valid[TA]),
      .rd_data   (acc_rd_data[TA]),
      .bypass_hit(acc_bypass[TA])
    );

    hough_accum #(.DEPTH(DEPTH)) u_acc_b (
      .clk, .rst_n,
      .ready     (acc_ready[TB]),
      .vote      (acc_vote[TB]),
      .rd        (acc_rd[TB]),
      .addr      (acc_addr[TB]),
      .rd_valid  (acc_rd_valid[TB]),
      .rd_data   (acc_rd_data[TB]),
      .bypass_hit(acc_bypass[TB])
    );
  end

  assign ready = &acc_ready;

  // readout: only the addressed memory answers, so OR the answers together
  always_comb begin
    ro_valid = |acc_rd_valid;
    ro_data  = '0;
    for (int t = 0; t < N_THETA; t++)
      if (acc_rd_valid[t]) ro_data = ro_data | acc_rd_data[t];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_sr    <= '0;
      frame_done <= 1'b0;
    end else begin
      last_sr    <= {last_sr[2:0], in_valid && in_last};
      frame_done <= last_sr[3];
    end
  end

  // readout must not collide with votes still in the pipeline
  a_ro_idle: assert property (@(posedge clk) disable iff (!rst_n)
                              ro_en |-> !(vote_in || (|acc_vote)));
  a_ro_theta: assert property (@(posedge clk) disable iff (!rst_n)
                               ro_en |-> (int'(ro_theta) < int'(N_THETA)));

endmodule
