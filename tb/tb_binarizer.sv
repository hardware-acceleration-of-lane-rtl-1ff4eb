// tb_binarizer: self-checking test of the comparator/multiplexer binarizer.
//
// Drives magnitudes just below, at and just above the threshold and random
// pairs; expects 255 only when magnitude > threshold, one cycle later.
module tb_binarizer;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [10:0] in_mag, threshold;
  logic [3:0] in_sb, out_sb;
  logic [7:0] out_pixel;

  int checks = 0, failures = 0, n_on = 0, n_off = 0;
  int exp_q[$];

  binarizer #(.SB_W(4)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && out_valid) begin
    int e;
    checks++;
    e = (exp_q.size() != 0) ? exp_q.pop_front() : -1;
    if (int'(out_pixel) != e) begin
      failures++;
      $display("FAIL: pixel %0d exp %0d", out_pixel, e);
    end
    if (out_pixel == 8'd255) n_on++; else n_off++;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int m, int t);
    in_mag = 11'(m); threshold = 11'(t); in_valid = 1; in_sb = 4'($urandom);
    exp_q.push_back(m > t ? 255 : 0);
    @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_mag = '0; threshold = '0; in_sb = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 1; t < 2040; t += 97) begin
      apply(t - 1, t);
      apply(t, t);
      apply(t + 1, t);
    end
    apply(2040, 0);
    apply(0, 2040);
    for (int i = 0; i < 1000; i++) apply($urandom_range(0, 2040), $urandom_range(0, 2040));
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_on == 0 || n_off == 0) begin
      failures++; $display("FAIL: missing outputs or one value never produced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
