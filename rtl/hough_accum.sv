// hough_accum: vote accumulator of one Hough angle (one column of the Hough
// matrix), the BRAM-plus-incrementer loop of the paper's processing element.
//
// Every vote reads the count stored at address rho, adds 1 and writes it
// back. The memory has one read and one write port and a registered read,
// so a read-modify-write spans two cycles: the read is issued in the vote's
// cycle, the increment and write-back happen in the next. When two votes in
// consecutive cycles hit the same address, the second read returns the
// value from before the first write; a one-entry bypass register holding the
// last write (address and data) supplies the fresh count instead. This keeps
// the rate at one vote per cycle. The bypass is this design's addition: the
// paper's figure shows only the memory, the +1 adder and the write-back.
//
// Readout: a rd request returns the count at addr two cycles later
// (rd_valid/rd_data) and clears that cell, so reading out the matrix also
// prepares it for the next frame. After reset the block zeroes the whole
// memory in DEPTH cycles; ready is low until then. Both the read-and-clear
// readout and the reset sweep are this design's own choices.
//
// Counts are CNT_W bits wide and wrap; with 16 bits no cell of a 512 x 512
// image can overflow (a cell collects at most about 1024 votes).
//
// Lint note: rst_n also disables the assertions, a synchronous use that
// lint tools report next to the asynchronous reset of the flip-flops.
module hough_accum
  import lane_pkg::*;
#(
  parameter int unsigned DEPTH = 1235,
  localparam int unsigned AW   = clog2_min1(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             ready,
  input  logic             vote,
  input  logic             rd,
  input  logic [AW-1:0]    addr,
  output logic             rd_valid,
  output logic [CNT_W-1:0] rd_data,
  output logic             bypass_hit
);

  logic [CNT_W-1:0] mem [DEPTH];

  logic             clearing;
  logic [AW-1:0]    clr_addr;
  logic             s1_vote, s1_rd;
  logic [AW-1:0]    s1_addr;
  logic [CNT_W-1:0] q;
  logic             f_valid;
  logic [AW-1:0]    f_addr;
  logic [CNT_W-1:0] f_data;

  logic             we;
  logic [AW-1:0]    waddr;
  logic [CNT_W-1:0] wdata, cur;

  assign ready      = !clearing;
  assign bypass_hit = (s1_vote || s1_rd) && f_valid && (f_addr == s1_addr);
  assign cur        = bypass_hit ? f_data : q;

  always_comb begin
    we    = 1'b0;
    waddr = s1_addr;
    wdata = '0;
    if (clearing) begin
      we    = 1'b1;
      waddr = clr_addr;
    end else if (s1_vote) begin
      we    = 1'b1;
      wdata = cur + CNT_W'(1);
    end else if (s1_rd) begin
      we    = 1'b1;
    end
  end

  // memory: registered read, one write port
  always_ff @(posedge clk) begin
    if (vote || rd) q <= mem[addr];
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
      s1_vote  <= 1'b0;
      s1_rd    <= 1'b0;
      s1_addr  <= '0;
      f_valid  <= 1'b0;
      f_addr   <= '0;
      f_data   <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      if (clearing) begin
        clr_addr <= clr_addr + AW'(1);
        if (clr_addr == AW'(DEPTH - 1)) clearing <= 1'b0;
      end
      s1_vote  <= vote;
      s1_rd    <= rd;
      s1_addr  <= addr;
      f_valid  <= we;
      f_addr   <= waddr;
      f_data   <= wdata;
      rd_valid <= s1_rd;
      rd_data  <= cur;
    end
  end

  // a cell is either voted or read in one cycle, never while clearing
  a_one_op:   assert property (@(posedge clk) disable iff (!rst_n) !(vote && rd));
  a_no_clear: assert property (@(posedge clk) disable iff (!rst_n) (vote || rd) |-> !clearing);
  a_range:    assert property (@(posedge clk) disable iff (!rst_n) (vote || rd) |-> (int'(addr) < int'(DEPTH)));

endmodule
