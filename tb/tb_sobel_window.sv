// tb_sobel_window: self-checking test of the zero-padded 3x3 window builder.
//
// Streams two random 8 x 6 frames (the first with random input bubbles, the
// second back to back) and compares every window, its coordinates and the
// last flag with windows cut from the stored frame with zero padding. Also
// checks the frame length: with no bubbles the block must take
// W*H + W + 1 cycles per frame, i.e. drop in_ready for exactly W + 1 cycles.
module tb_sobel_window;
  localparam int W = 8;
  localparam int H = 6;
  localparam int XW = $clog2(W);
  localparam int YW = $clog2(H + 2);

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_last;
  logic [7:0] in_pixel;
  logic [8:0][7:0] out_win;
  logic [XW-1:0] out_x;
  logic [YW-1:0] out_y;

  int checks = 0, failures = 0;
  int img [2][H][W];
  int frame_out, n_out, exp_x, exp_y, not_ready_cycles;

  sobel_window #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  function automatic int pix(int f, int x, int y);
    if (x < 0 || x >= W || y < 0 || y >= H) return 0;
    return img[f][y][x];
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // output monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    bit ok = 1;
    for (int k = 0; k < 9; k++)
      if (int'(out_win[k]) != pix(frame_out, exp_x + (k % 3) - 1, exp_y + (k / 3) - 1)) ok = 0;
    if (!ok && failures < 3)
      for (int k = 0; k < 9; k++)
        $display("  P%0d got %0d exp %0d", k, out_win[k], pix(frame_out, exp_x + (k % 3) - 1, exp_y + (k / 3) - 1));
    check(ok, $sformatf("window f%0d (%0d,%0d)", frame_out, exp_x, exp_y));
    check(int'(out_x) == exp_x && int'(out_y) == exp_y,
          $sformatf("coords got (%0d,%0d) exp (%0d,%0d)", out_x, out_y, exp_x, exp_y));
    check(out_last == (exp_x == W - 1 && exp_y == H - 1), "last flag");
    n_out++;
    if (exp_x == W - 1) begin
      exp_x = 0;
      if (exp_y == H - 1) begin exp_y = 0; frame_out++; end
      else exp_y++;
    end else exp_x++;
  end

  always @(posedge clk) if (rst_n && !in_ready) not_ready_cycles++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_start, t_end;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = $urandom_range(0, 255);
    frame_out = 0; n_out = 0; exp_x = 0; exp_y = 0; not_ready_cycles = 0;
    in_valid = 0; in_pixel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // frame 0: random bubbles. Inputs change on the falling edge.
    for (int i = 0; i < W * H; i++) begin
      in_pixel = 8'(img[0][i / W][i % W]);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    in_valid = 0;
    while (!in_ready) @(negedge clk);
    repeat (2) @(negedge clk);
    // frame 1: back to back, count cycles from the first accepted pixel to
    // the cycle in which the next frame could start
    not_ready_cycles = 0;
    t_start = $time / 10;
    for (int i = 0; i < W * H; i++) begin
      in_pixel = 8'(img[1][i / W][i % W]);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    while (!in_ready) @(negedge clk);
    t_end = $time / 10;
    repeat (4) @(posedge clk);
    check(not_ready_cycles == W + 1, $sformatf("flush cycles %0d exp %0d", not_ready_cycles, W + 1));
    check(t_end - t_start == W * H + W + 1,
          $sformatf("frame cycles %0d exp %0d", t_end - t_start, W * H + W + 1));
    check(n_out == 2 * W * H, $sformatf("windows %0d exp %0d", n_out, 2 * W * H));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
