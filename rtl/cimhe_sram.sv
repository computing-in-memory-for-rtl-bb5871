// cimhe_sram -- the M x N 6T-SRAM cell array of one CiM-HE array.
//
// Storage is M rows of N columns, the columns grouped into coefficient words
// of WORD_BITS columns. Reading is done the way compute-in-SRAM arrays do it:
// every row whose read word line is high is connected to the bit-line pair of
// each column, so a precharged BL stays high only if all connected cells hold
// 1 (BL = AND of the rows) and BLB stays high only if all hold 0 (BLB = NOR of
// the rows). With a single word line BL is the cell and BLB its complement.
// The bit lines are combinational in the word lines. A write drives one row
// (one-hot write word line) at the rising clock edge, only in the coefficient
// words whose write-enable bit is 1.
// The array size and the dual-word-line sensing follow the design; the
// per-word write enable is this implementation's way of letting the copy and
// move buffers update only some coefficients. Cells have no reset, like SRAM.
module cimhe_sram #(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256,
  parameter int unsigned WORDS     = COLS / WORD_BITS
) (
  input  logic             clk,
  input  logic [ROWS-1:0]  rd_wl,   // read word lines (one or two high)
  output logic [COLS-1:0]  bl,      // AND of the selected rows
  output logic [COLS-1:0]  blb,     // NOR of the selected rows
  input  logic [ROWS-1:0]  wr_wl,   // write word line, one-hot or zero
  input  logic [COLS-1:0]  wdata,
  input  logic [WORDS-1:0] wword    // per-word write enable
);
  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [COLS-1:0] cells [ROWS];
  logic [AW-1:0]   lo_row, hi_row, wr_row;
  logic            any_rd;

  // Rows on the active word lines (the lowest and the highest; the same row
  // when only one is active). At most two are active, see the assertion.
  always_comb begin
    lo_row = '0;
    hi_row = '0;
    wr_row = '0;
    any_rd = |rd_wl;
    for (int r = ROWS - 1; r >= 0; r--)
      if (rd_wl[r]) lo_row = AW'(r);
    for (int r = 0; r < ROWS; r++) begin
      if (rd_wl[r]) hi_row = AW'(r);
      if (wr_wl[r]) wr_row = AW'(r);
    end
  end

  // Precharged bit lines, discharged by any connected cell that holds the
  // opposite value.
  always_comb begin
    if (any_rd) begin
      bl  =   cells[lo_row] &  cells[hi_row];
      blb = ~(cells[lo_row] |  cells[hi_row]);
    end else begin
      bl  = '1;
      blb = '1;
    end
  end

  always_ff @(posedge clk) begin
    if (|wr_wl)
      for (int unsigned w = 0; w < WORDS; w++)
        if (wword[w])
          cells[wr_row][w*WORD_BITS +: WORD_BITS] <= wdata[w*WORD_BITS +: WORD_BITS];
  end

  assert property (@(posedge clk) $countones(rd_wl) <= 2)
    else $error("cimhe_sram: more than two read word lines");
  // At most one row is written per cycle.
  assert property (@(posedge clk) $onehot0(wr_wl))
    else $error("cimhe_sram: more than one write word line");
endmodule
