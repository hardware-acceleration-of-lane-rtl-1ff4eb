// lane_tb_body.svh: end-to-end test shared by the lane_detect_top testbenches.
//
// The including module defines localparams W and H and instantiates
// lane_detect_top as `dut` with the signals declared here (.* connection).
//
// Two synthetic road frames are streamed through the accelerator: a dark,
// slightly textured road with two bright lane markings converging towards a
// vanishing point (the second frame moves the markings). Frame 1 is sent with
// random input bubbles, frame 2 back to back. An independent model computes
// the zero-padded Sobel magnitude from the 3x3 kernels, binarizes it
// (|G| > threshold gives 255) and votes every edge pixel into a 180 x DEPTH
// Hough matrix (rho = round(x*cos + y*sin), constants rounded to 14
// fractional bits, cell rho + W - 1). The binarized stream and the whole
// matrix, read out after each frame, are compared with the model. The test
// also checks the frame time of frame 2 (W*H + W + 8 cycles from first pixel
// to frame_done) and counts how often each mechanism happened: zero-padded
// border windows, both binarizer outputs, the accumulator bypass, the input
// stall during the zero-row flush, input bubbles, the memory clear after
// reset and the read-and-clear readout. A mechanism that never happened is
// a failure.
// Finally the strongest cell of each read-out matrix must match one of the
// two drawn markings, which is what the software after the accelerator
// relies on.

  import lane_pkg::*;
  localparam int XW = clog2_min1(W);
  localparam int YW = clog2_min1(H + 2);
  localparam int DEPTH = rho_bins(W, H);
  localparam int AW = clog2_min1(DEPTH);
  localparam int THRESH = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, bin_valid, frame_done, ro_en, ro_valid;
  logic [7:0] in_pixel, bin_pixel;
  logic [10:0] threshold;
  logic [XW-1:0] bin_x;
  logic [YW-1:0] bin_y;
  logic [7:0] ro_theta;
  logic [AW-1:0] ro_rho_addr;
  logic [15:0] ro_data;

  int checks = 0, failures = 0;
  byte unsigned img [H][W];
  int C [180], S [180];
  int ref_m [180][DEPTH];
  int bin_q[$];
  int cq[$];
  int iq[$];
  int hw_m [180][DEPTH];
  longint cycle, first_cycle, done_cycle;
  bit first_seen;

  // mechanism counters
  int n_border = 0, n_on = 0, n_off = 0, n_bypass = 0, n_stall = 0;
  int n_bubble = 0, n_clear = 0, n_readout = 0, n_done = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // binarized image monitor
  always @(posedge clk) if (rst_n && bin_valid) begin
    int e;
    e = (bin_q.size() != 0) ? bin_q.pop_front() : -1;
    check(int'(bin_pixel) == e, $sformatf("bin (%0d,%0d) got %0d exp %0d", bin_x, bin_y, bin_pixel, e));
    if (bin_x == 0 || int'(bin_x) == W - 1 || bin_y == 0 || int'(bin_y) == H - 1) n_border++;
    if (bin_pixel == 8'd255) n_on++; else n_off++;
  end

  // Hough readout monitor
  always @(posedge clk) if (rst_n && ro_valid) begin
    int e;
    int idx;
    e = (cq.size() != 0) ? cq.pop_front() : -1;
    idx = (iq.size() != 0) ? iq.pop_front() : 0;
    check(int'(ro_data) == e, $sformatf("hough cell got %0d exp %0d", ro_data, e));
    hw_m[idx / DEPTH][idx % DEPTH] = int'(ro_data);
    n_readout++;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.u_hough.g_pair[0].u_acc_b.bypass_hit) n_bypass++;   // theta = 90: rho = y
    if (!in_ready && dut.u_hough.ready) n_stall++;
    if (!dut.u_hough.ready) n_clear++;
    if (in_valid && in_ready && !first_seen) begin first_seen = 1; first_cycle = cycle; end
    if (frame_done) begin done_cycle = cycle; n_done++; end
  end

  initial begin
    #(64'd10 * (64'd8 * W * H + 64'd3 * 180 * DEPTH + 64'd100000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // synthetic road image: two markings from the bottom edge to a vanishing point
  task automatic make_image(int shift);
    int vy, lw;
    vy = (H * 2) / 5;
    lw = (W / 128) + 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int v;
        v = 40 + ((x * 7 + y * 13) % 11);
        if (y >= vy) begin
          int xl, xr;
          xl = W / 2 + ((W / 8 + shift - W / 2) * (y - vy)) / (H - 1 - vy);
          xr = W / 2 + ((W - 1 - W / 8 + shift - W / 2) * (y - vy)) / (H - 1 - vy);
          if ((x - xl <= lw && xl - x <= lw) || (x - xr <= lw && xr - x <= lw)) v = 220;
        end
        img[y][x] = 8'(v);
      end
  endtask

  function automatic int px(int x, int y);
    if (x < 0 || x >= W || y < 0 || y >= H) return 0;
    return int'(img[y][x]);
  endfunction

  // reference: Sobel, binarization and Hough voting
  task automatic build_reference();
    foreach (ref_m[t, r]) ref_m[t][r] = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int gx, gy, g;
        gx = (px(x + 1, y - 1) + 2 * px(x + 1, y) + px(x + 1, y + 1))
           - (px(x - 1, y - 1) + 2 * px(x - 1, y) + px(x - 1, y + 1));
        gy = (px(x - 1, y + 1) + 2 * px(x, y + 1) + px(x + 1, y + 1))
           - (px(x - 1, y - 1) + 2 * px(x, y - 1) + px(x + 1, y - 1));
        g = (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
        bin_q.push_back(g > THRESH ? 255 : 0);
        if (g > THRESH)
          for (int t = 0; t < 180; t++) ref_m[t][((x * C[t] + y * S[t] + 8192) >>> 14) + W - 1]++;
      end
  endtask

  // The strongest cell of the matrix read from the hardware must be one of
  // the two lane markings: angle within 5 degrees, rho within the marking's
  // half width plus 4 of the line through the marking's centre. (On small
  // images the pixel staircase of a steep line can pull the peak to 45 or
  // 135 degrees; at 512 x 512 the peak lies within a degree.)
  task automatic check_peak(int shift);
    int bt, br, best, vy, lw;
    bit ok;
    best = -1; bt = 0; br = 0;
    for (int t = 0; t < 180; t++)
      for (int r = 0; r < DEPTH; r++)
        if (hw_m[t][r] > best) begin best = hw_m[t][r]; bt = t; br = r - (W - 1); end
    vy = (H * 2) / 5;
    lw = (W / 128) + 1;
    ok = 0;
    for (int side = 0; side < 2; side++) begin
      real dx, dy, th, rho, pi;
      pi = 3.14159265358979323846;
      dx = real'(((side == 0) ? W / 8 : W - 1 - W / 8) + shift - W / 2);
      dy = real'(H - 1 - vy);
      th = (dx < 0.0) ? $atan2(-dx, dy) : $atan2(dx, -dy);
      rho = real'(W / 2) * $cos(th) + real'(vy) * $sin(th);
      th = th * 180.0 / pi;
      $display("lane %0d: theta %0.1f rho %0.1f", side, th, rho);
      if ((real'(bt) - th) ** 2 <= 25.0 && (real'(br) - rho) ** 2 <= real'((lw + 4) * (lw + 4))) ok = 1;
    end
    $display("Hough peak: theta %0d rho %0d with %0d votes", bt, br, best);
    check(ok, "Hough peak is not on a lane marking");
  endtask

  task automatic run_frame(int shift, bit bubbles);
    make_image(shift);
    build_reference();
    first_seen = 0;
    for (int i = 0; i < W * H; i++) begin
      in_pixel = img[i / W][i % W];
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      if (bubbles && $urandom_range(0, 7) == 0) begin
        in_valid = 0;
        n_bubble++;
        @(negedge clk);
      end
    end
    in_valid = 0;
    while (n_done == 0) @(negedge clk);
    n_done = 0;
    if (!bubbles)
      check(done_cycle - first_cycle == longint'(W * H + W + 8),
            $sformatf("frame time %0d cycles, expected %0d", done_cycle - first_cycle, W * H + W + 8));
    check(bin_q.size() == 0, "binarized pixels missing");
    // read out (and clear) the Hough matrix, one cell per cycle
    for (int t = 0; t < 180; t++)
      for (int r = 0; r < DEPTH; r++) begin
        ro_en = 1; ro_theta = 8'(t); ro_rho_addr = AW'(r);
        cq.push_back(ref_m[t][r]);
        iq.push_back(t * DEPTH + r);
        @(negedge clk);
      end
    ro_en = 0;
    repeat (4) @(negedge clk);
    check(cq.size() == 0, "Hough readouts missing");
    check_peak(shift);
  endtask

  initial begin
    for (int t = 0; t < 180; t++) begin
      real a;
      a = real'(t) * 3.14159265358979323846 / 180.0;
      C[t] = int'($floor($cos(a) * 16384.0 + 0.5));
      S[t] = int'($floor($sin(a) * 16384.0 + 0.5));
    end
    cycle = 0; first_cycle = 0; done_cycle = 0; first_seen = 0;
    in_valid = 0; in_pixel = 0; threshold = 11'(THRESH);
    ro_en = 0; ro_theta = 0; ro_rho_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_frame(0, 1);
    run_frame(W / 16, 0);
    $display("mechanisms: border windows %0d, edge pixels %0d, background pixels %0d, bypass hits %0d,",
             n_border, n_on, n_off, n_bypass);
    $display("            flush stalls %0d, input bubbles %0d, clear cycles %0d, readouts %0d",
             n_stall, n_bubble, n_clear, n_readout);
    check(n_border == 2 * (2 * W + 2 * H - 4), "zero-padded border windows");
    check(n_on > 0, "no edge pixel");
    check(n_off > 0, "no background pixel");
    check(n_bypass > 0, "accumulator bypass never used");
    check(n_stall == 2 * (W + 1), $sformatf("flush stall %0d cycles, expected %0d", n_stall, 2 * (W + 1)));
    check(n_bubble > 0, "no input bubble");
    check(n_clear == DEPTH, $sformatf("memory clear took %0d cycles", n_clear));
    check(n_readout == 2 * 180 * DEPTH, "readout count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
