// tb_hough_accum: self-checking test of one Hough vote accumulator.
//
// A 40-entry memory is first cleared by the block itself after reset (ready
// must rise after exactly DEPTH cycles). Then 3000 votes, one per cycle with
// random bubbles, are aimed at few addresses so that back-to-back votes to
// the same cell (the bypass path) are frequent; a reference array counts
// them. Reading every cell must return the reference count two cycles after
// the request, and a second pass must read all zeros (read clears).
module tb_hough_accum;
  localparam int DEPTH = 40;

  logic clk = 0, rst_n = 0;
  logic ready, vote, rd, rd_valid, bypass_hit;
  logic [5:0] addr;
  logic [15:0] rd_data;

  int checks = 0, failures = 0, bypass_count = 0;
  int ref_cnt [DEPTH];

  hough_accum #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && bypass_hit) bypass_count++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_all(bit expect_zero);
    for (int a = 0; a < DEPTH; a++) begin
      rd = 1; addr = 6'(a);
      @(negedge clk);
      rd = 0;
      check(!rd_valid, "rd_valid too early");
      @(negedge clk);
      check(rd_valid && int'(rd_data) == (expect_zero ? 0 : ref_cnt[a]),
            $sformatf("cell %0d got %0d exp %0d", a, rd_data, expect_zero ? 0 : ref_cnt[a]));
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    vote = 0; rd = 0; addr = 0;
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    check(cyc == DEPTH, $sformatf("clear took %0d cycles exp %0d", cyc, DEPTH));
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = ($urandom_range(0, 3) == 0) ? $urandom_range(0, DEPTH - 1) : $urandom_range(5, 7);
      vote = 1; addr = 6'(a);
      ref_cnt[a]++;
      @(negedge clk);
      vote = 0;
      if ($urandom_range(0, 4) == 0) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    read_all(0);
    read_all(1);
    check(bypass_count > 100, $sformatf("bypass used only %0d times", bypass_count));
    $display("bypass hits: %0d", bypass_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
