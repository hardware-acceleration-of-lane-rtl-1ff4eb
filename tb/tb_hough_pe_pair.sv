// tb_hough_pe_pair: self-checking test of the shared-multiplier Hough PE.
//
// Instantiates the pair for THETA = 0 (angles 0 and 90), 1, 30, 45 and 89
// (angles THETA and 180-THETA) on a 512 x 512 coordinate range. For random
// and corner (x, y) the expected rho of each angle is computed here directly
// from cos/sin of that angle in degrees (constants rounded to 14 fractional
// bits, sum rounded to nearest), and also checked to lie within 1 of the
// exact real value. The result must appear exactly 2 cycles after the input.
module tb_hough_pe_pair;
  localparam int NPE = 5;
  localparam int TH[NPE] = '{0, 1, 30, 45, 89};

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [8:0] in_x, in_y;
  logic [NPE-1:0] out_valid;
  logic signed [10:0] rho_a [NPE];
  logic signed [10:0] rho_b [NPE];

  int checks = 0, failures = 0;

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    hough_pe_pair #(.THETA(TH[i]), .XW(9), .YW(9), .RW(11)) u_pe (
      .clk, .rst_n, .in_valid, .in_x, .in_y,
      .out_valid(out_valid[i]), .out_rho_a(rho_a[i]), .out_rho_b(rho_b[i]));
  end

  always #5 clk = ~clk;

  function automatic int q14(real v);
    return int'($floor(v * 16384.0 + 0.5));
  endfunction

  function automatic int ref_rho(int deg, int x, int y);
    real a;
    a = real'(deg) * 3.14159265358979323846 / 180.0;
    return (x * q14($cos(a)) + y * q14($sin(a)) + 8192) >>> 14;
  endfunction

  function automatic real real_rho(int deg, int x, int y);
    real a;
    a = real'(deg) * 3.14159265358979323846 / 180.0;
    return real'(x) * $cos(a) + real'(y) * $sin(a);
  endfunction

  task automatic check_one(int x, int y);
    int ta, tb_, ea, eb;
    real d;
    in_x = 9'(x); in_y = 9'(y); in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (out_valid != '0) begin failures++; $display("FAIL: output after 1 cycle"); end
    @(negedge clk);
    for (int i = 0; i < NPE; i++) begin
      ta = TH[i];
      tb_ = (TH[i] == 0) ? 90 : 180 - TH[i];
      ea = ref_rho(ta, x, y);
      eb = ref_rho(tb_, x, y);
      checks++;
      if (!out_valid[i] || int'(rho_a[i]) != ea || int'(rho_b[i]) != eb) begin
        failures++;
        $display("FAIL: theta %0d/%0d (x,y)=(%0d,%0d) got %0d/%0d exp %0d/%0d",
                 ta, tb_, x, y, rho_a[i], rho_b[i], ea, eb);
      end
      d = real'(rho_a[i]) - real_rho(ta, x, y);
      checks++;
      if (d > 1.0 || d < -1.0) begin failures++; $display("FAIL: rho far from exact"); end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_x = 0; in_y = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_one(0, 0);
    check_one(511, 0);
    check_one(0, 511);
    check_one(511, 511);
    for (int i = 0; i < 300; i++) check_one($urandom_range(0, 511), $urandom_range(0, 511));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
