// sobel_window: zero-padded 3x3 neighbourhood generator for the Sobel filter.
//
// This is the block drawn as "FIFO" in front of the Sobel adders: gray pixels
// enter one per cycle in raster order and every pixel of the image leaves as
// the centre of a 3x3 window P0..P8 (row major: P0 P1 P2 top row, P3 P4 P5
// middle row with P4 the centre, P6 P7 P8 bottom row). Pixels outside the
// image read as zero, so the output image has the input's size, as the paper
// asks ("zero padding for the original image").
//
// How it works: two line buffers of IMG_W pixels hold the two previous rows;
// at every step the column {row y-2, row y-1, row y} at the current x is
// shifted into a three-column register window. The window centre is then one
// row and one column behind the input. The right-edge centre of a row is
// produced by the first step of the next row with the right column masked.
// After the last pixel the block runs IMG_W+1 internal flush steps (a zero
// row below the image); in_ready is low during them. Edge masking replaces
// an explicit padded frame buffer and is this design's own choice, as are
// the ready/valid handshake and the distributed (asynchronously read) line
// buffers.
//
// Interface: in_valid/in_ready/in_pixel (one pixel per accepted cycle);
// out_valid pulses once per image pixel with out_win, its centre
// coordinates out_x/out_y and out_last on the frame's last pixel. The
// output side has no back-pressure.
//
// Timing: a window leaves one cycle after the step that completes it. With
// in_valid held high a frame takes IMG_W*IMG_H + IMG_W + 1 cycles.
module sobel_window
  import lane_pkg::*;
#(
  parameter int unsigned IMG_W = 512,
  parameter int unsigned IMG_H = 512,
  localparam int unsigned XW = clog2_min1(IMG_W),
  localparam int unsigned YW = clog2_min1(IMG_H + 2)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [PIX_W-1:0]          in_pixel,
  output logic                      out_valid,
  output logic [8:0][PIX_W-1:0]     out_win,
  output logic [XW-1:0]             out_x,
  output logic [YW-1:0]             out_y,
  output logic                      out_last
);

  typedef struct packed {
    logic [PIX_W-1:0] top;
    logic [PIX_W-1:0] mid;
    logic [PIX_W-1:0] bot;
  } column_t;

  logic [PIX_W-1:0] lb_a [IMG_W];   // row y-1
  logic [PIX_W-1:0] lb_b [IMG_W];   // row y-2

  logic [XW-1:0] ix;
  logic [YW-1:0] iy;
  column_t       c0, c1, c2;

  logic             flushing, step;
  logic [PIX_W-1:0] pin;
  column_t          col;

  assign flushing = (iy >= YW'(IMG_H));
  assign in_ready = !flushing;
  assign step     = flushing || in_valid;
  assign pin      = flushing ? '0 : in_pixel;
  assign col      = '{top: lb_b[ix], mid: lb_a[ix], bot: pin};

  always_ff @(posedge clk) begin
    if (step) begin
      lb_b[ix] <= lb_a[ix];
      lb_a[ix] <= pin;
      c0 <= c1;
      c1 <= c2;
      c2 <= col;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ix        <= '0;
      iy        <= '0;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (step) begin
        // which centre does the window hold after this step?
        if (ix != '0) begin
          if (iy >= YW'(1)) begin
            out_valid <= 1'b1;
            out_x     <= ix - XW'(1);
            out_y     <= iy - YW'(1);
          end
        end else if (iy >= YW'(2)) begin
          out_valid <= 1'b1;
          out_x     <= XW'(IMG_W - 1);
          out_y     <= iy - YW'(2);
          out_last  <= (iy == YW'(IMG_H + 1));
        end
        // advance the (padded) raster position
        if (iy == YW'(IMG_H + 1)) begin
          ix <= '0;
          iy <= '0;
        end else if (ix == XW'(IMG_W - 1)) begin
          ix <= '0;
          iy <= iy + YW'(1);
        end else begin
          ix <= ix + XW'(1);
        end
      end
    end
  end

  // zero padding: mask window rows/columns that fall outside the image
  always_comb begin
    column_t l, m, r;
    l = c0;
    m = c1;
    r = c2;
    if (out_x == '0)                  l = '0;
    if (out_x == XW'(IMG_W - 1))      r = '0;
    if (out_y == '0) begin
      l.top = '0; m.top = '0; r.top = '0;
    end
    if (out_y == YW'(IMG_H - 1)) begin
      l.bot = '0; m.bot = '0; r.bot = '0;
    end
    out_win = {r.bot, m.bot, l.bot, r.mid, m.mid, l.mid, r.top, m.top, l.top};
  end

endmodule
