// lane_pkg: constants and helper functions shared by the lane-detection
// pipeline (Sobel window, Sobel magnitude, binarizer, Hough engine).
//
// The image size (512 x 512, 8-bit gray), the 1-degree angle step over
// 0..179 degrees and the one-accumulator-per-angle organisation follow the
// paper. The fixed-point format of the sine/cosine constants (Q2.14), the
// rho offset and the 16-bit vote counters are this design's own choices.
package lane_pkg;

  // Pixel format: 8-bit unsigned gray value, binarized pixels are 0 or 255.
  localparam int unsigned PIX_W   = 8;
  localparam logic [7:0]  PIX_ON  = 8'd255;
  localparam logic [7:0]  PIX_OFF = 8'd0;

  // Sobel magnitude |Gx| + |Gy| of 8-bit pixels fits in 11 bits (max 2040).
  localparam int unsigned MAG_W = 11;

  // Hough transform: 180 angles, 1 degree apart, handled by 90 PE pairs.
  localparam int unsigned N_THETA = 180;
  localparam int unsigned N_PAIRS = N_THETA / 2;
  localparam int unsigned THETA_W = 8;

  // Trigonometric constants: signed, 14 fractional bits.
  localparam int unsigned TRIG_FRAC = 14;
  localparam int unsigned TRIG_W    = 16;

  // Vote counter width of one Hough-matrix cell.
  localparam int unsigned CNT_W = 16;

  // Integer square root rounded up (used for the image diagonal).
  function automatic int unsigned isqrt_ceil(input longint unsigned v);
    longint unsigned r;
    r = 0;
    while (r * r < v) r++;
    return int'(r);
  endfunction

  // Number of rho bins: rho = x cos + y sin ranges over
  // [-(W-1), ceil(diagonal)] for theta in [0, 180); it is stored at
  // address rho + (W-1).
  function automatic int unsigned rho_bins(input int unsigned w, input int unsigned h);
    return (w - 1) + isqrt_ceil((longint'(w) - 1) * (longint'(w) - 1) + (longint'(h) - 1) * (longint'(h) - 1)) + 1;
  endfunction

  // round(cos(deg) * 2^TRIG_FRAC) and round(sin(deg) * 2^TRIG_FRAC).
  function automatic int trig_cos(input int deg);
    real a;
    a = real'(deg) * 3.14159265358979323846 / 180.0;
    return int'($floor($cos(a) * real'(1 << TRIG_FRAC) + 0.5));
  endfunction

  function automatic int trig_sin(input int deg);
    real a;
    a = real'(deg) * 3.14159265358979323846 / 180.0;
    return int'($floor($sin(a) * real'(1 << TRIG_FRAC) + 0.5));
  endfunction

  // Bits needed to hold values 0..n-1 (at least 1).
  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
