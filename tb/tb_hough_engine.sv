// tb_hough_engine: self-checking test of the 180-angle Hough engine.
//
// Image 16 x 12. Two frames of random binarized pixels (0/255, with random
// bubbles in the stream) are voted; after each frame the whole Hough matrix
// (180 angles x all rho cells) is read out with one request per cycle and
// compared with a matrix computed here: for every 255 pixel and every angle,
// rho = round(x*cos + y*sin) with the constants rounded to 14 fractional
// bits, stored at rho + W - 1. Reading clears the matrix, so frame 2 checks
// that nothing of frame 1 remains. frame_done must follow the last pixel by
// exactly 5 cycles.
module tb_hough_engine;
  import lane_pkg::*;
  localparam int W = 16;
  localparam int H = 12;
  localparam int XW = $clog2(W);
  localparam int YW = $clog2(H + 2);
  localparam int DEPTH = rho_bins(W, H);
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic ready, in_valid, in_last, frame_done, ro_en, ro_valid;
  logic [7:0] in_pixel;
  logic [XW-1:0] in_x;
  logic [YW-1:0] in_y;
  logic [7:0] ro_theta;
  logic [AW-1:0] ro_rho_addr;
  logic [15:0] ro_data;

  int checks = 0, failures = 0;
  int ref_m [180][DEPTH];
  int cq[$];
  int C [180], S [180];
  longint last_cycle, done_cycle, cycle;

  hough_engine #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  always @(posedge clk) if (rst_n && frame_done) done_cycle = cycle;

  always @(posedge clk) if (rst_n && ro_valid) begin
    int e;
    checks++;
    e = (cq.size() != 0) ? cq.pop_front() : -1;
    if (int'(ro_data) != e) begin
      failures++;
      if (failures < 10) $display("FAIL: readout got %0d exp %0d", ro_data, e);
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame();
    foreach (ref_m[t, r]) ref_m[t][r] = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        bit on;
        on = ($urandom_range(0, 2) == 0);
        in_valid = 1; in_x = XW'(x); in_y = YW'(y);
        in_pixel = on ? 8'd255 : 8'd0;
        in_last = (x == W - 1 && y == H - 1);
        if (on)
          for (int t = 0; t < 180; t++) ref_m[t][((x * C[t] + y * S[t] + 8192) >>> 14) + W - 1]++;
        @(negedge clk);
        last_cycle = cycle;
        in_valid = 0; in_last = 0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    repeat (8) @(negedge clk);
    checks++;
    if (done_cycle - last_cycle != 5) begin
      failures++; $display("FAIL: frame_done %0d cycles after last pixel", done_cycle - last_cycle);
    end
    for (int t = 0; t < 180; t++)
      for (int r = 0; r < DEPTH; r++) begin
        ro_en = 1; ro_theta = 8'(t); ro_rho_addr = AW'(r);
        cq.push_back(ref_m[t][r]);
        @(negedge clk);
      end
    ro_en = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (cq.size() != 0) begin failures++; $display("FAIL: %0d readouts missing", cq.size()); end
  endtask

  initial begin
    for (int t = 0; t < 180; t++) begin
      real a;
      a = real'(t) * 3.14159265358979323846 / 180.0;
      C[t] = int'($floor($cos(a) * 16384.0 + 0.5));
      S[t] = int'($floor($sin(a) * 16384.0 + 0.5));
    end
    cycle = 0;
    in_valid = 0; in_last = 0; in_pixel = 0; in_x = 0; in_y = 0;
    ro_en = 0; ro_theta = 0; ro_rho_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    run_frame();
    run_frame();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
