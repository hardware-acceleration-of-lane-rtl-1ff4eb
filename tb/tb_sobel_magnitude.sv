// tb_sobel_magnitude: self-checking test of the Sobel adder tree.
//
// Applies corner cases (flat, all-255 steps in x and y, maximum magnitude)
// and random windows, one per cycle, and compares |G| = |Gx| + |Gy| computed
// here from the Sobel kernels as explicit 3x3 multiply-accumulate, with the
// output one cycle later (the block's latency). The sideband must follow.
module tb_sobel_magnitude;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [8:0][7:0] in_win;
  logic [7:0] in_sb, out_sb;
  logic [10:0] out_mag;

  int checks = 0, failures = 0;
  int exp_q[$];
  int sb_q[$];

  // Sobel kernels, row major
  const int SX[9] = '{-1, 0, 1, -2, 0, 2, -1, 0, 1};
  const int SY[9] = '{-1, -2, -1, 0, 0, 0, 1, 2, 1};

  sobel_magnitude #(.SB_W(8)) dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_mag(logic [8:0][7:0] w);
    int gx = 0, gy = 0;
    for (int k = 0; k < 9; k++) begin
      gx += SX[k] * int'(w[k]);
      gy += SY[k] * int'(w[k]);
    end
    return (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, sb;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected output");
    end else begin
      e = exp_q.pop_front();
      sb = sb_q.pop_front();
      if (int'(out_mag) != e || int'(out_sb) != sb) begin
        failures++;
        $display("FAIL: mag %0d exp %0d sb %0d exp %0d", out_mag, e, out_sb, sb);
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [8:0][7:0] w);
    in_win = w; in_valid = 1; in_sb = 8'($urandom);
    exp_q.push_back(ref_mag(w));
    sb_q.push_back(int'(in_sb));
    @(negedge clk);
  endtask

  initial begin
    logic [8:0][7:0] w;
    int n_before;
    in_valid = 0; in_win = '0; in_sb = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    apply('0);
    for (int k = 0; k < 9; k++) w[k] = (k % 3 == 2) ? 8'd255 : 8'd0;   // step in x
    apply(w);
    for (int k = 0; k < 9; k++) w[k] = (k >= 6) ? 8'd255 : 8'd0;       // step in y
    apply(w);
    for (int k = 0; k < 9; k++) w[k] = (k == 2 || k == 5 || k == 8 || k == 6 || k == 7) ? 8'd255 : 8'd0;
    apply(w);                                                          // corner: max 2040
    for (int i = 0; i < 500; i++) begin
      for (int k = 0; k < 9; k++) w[k] = 8'($urandom);
      apply(w);
    end
    // latency: a single window must appear exactly one cycle later
    in_valid = 0;
    repeat (3) @(negedge clk);
    n_before = checks;
    in_win = '1; in_valid = 1; exp_q.push_back(0); sb_q.push_back(int'(in_sb));
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!(out_valid && out_mag == 0)) begin failures++; $display("FAIL: latency"); end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || checks != n_before + 3) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
