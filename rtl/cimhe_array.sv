// cimhe_array -- one CiM-HE array: SRAM cells with compute peripherals.
//
// Datapath of one micro-operation per clock, in the order the signal flows:
// row decoders A and B raise one or two word lines; the cells pull the bit
// lines (BL = AND, BLB = NOR of the active rows); the customized sense
// amplifiers form AND/OR/NOR/XOR and the per-word horizontal-OR flags; the
// carry-select adders add word by word; the operation selectors pick R; the
// log shifter shifts R and delivers OUT_bar; the output drivers invert it and
// the result is kept in the output latch at the clock edge. A following COPY
// (IPCB) or MOVE (IPMB) micro-operation writes the latch back into a row, so
// a stored result costs two cycles. Its sequencing circuit drives the
// micro-operations from a command; the host may instead write a row through
// the bit-line drivers while the array is idle.
//
// Interface: cmd/cmd_valid/ready/done as in cimhe_sequencer; host_we,
// host_row, host_data write a row; out_q is the output latch (OUT_1..OUT_N);
// flags are the controller's per-word flags.
//
// Follows the design: the block chain of its array figure and the size
// (8 x 1024 cells, words of 4 x 64 bits). This implementation's choices: the
// micro-operation encoding, one clock per micro-operation, host writes through
// the bit-line drivers, and the read-out of a row through the OR (READ) path
// into the output latch.
module cimhe_array
  import cimhe_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256,
  parameter int unsigned MOVE_F    = WORD_BITS,
  parameter int unsigned WORDS     = COLS / WORD_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  output logic              ready,
  output logic              done,
  input  logic              host_we,
  input  logic [ROW_AW-1:0] host_row,
  input  logic [COLS-1:0]   host_data,
  output logic [COLS-1:0]   out_q,
  output logic [WORDS-1:0]  flags
);
  uop_t             uop;
  logic [WORDS-1:0] word_en;
  logic [ROWS-1:0]  wl_a, wl_b, wl_wr;
  logic [COLS-1:0]  bl, blb;
  logic [COLS-1:0]  and_v, or_v, nor_v, xor_v, sum_v, r_v, out_n;
  logic [WORDS-1:0] hor_flag;
  logic             we;
  logic [COLS-1:0]  wdata;
  logic [WORDS-1:0] wword;
  logic             compute;
  logic [WORDS-1:0] cout_v;   // word carries are not used (arithmetic is mod 2^WORD_BITS)

  cimhe_sequencer #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WORD_BITS)) u_seq (
    .clk, .rst_n, .cmd_valid, .cmd, .ready, .done,
    .uop, .word_en, .hor_flag, .latch_q(out_q), .flags_o(flags)
  );

  assign compute = (uop.kind == U_COMPUTE);

  cimhe_row_decoder #(.ROWS(ROWS), .AW(ROW_AW)) u_dec_a (
    .addr(uop.row_a), .en(compute), .wl(wl_a));
  cimhe_row_decoder #(.ROWS(ROWS), .AW(ROW_AW)) u_dec_b (
    .addr(we && host_we ? host_row : (compute ? uop.row_b : uop.dst)),
    .en(compute ? uop.dual : we), .wl(wl_b));

  // Decoder B also drives the write word line outside compute cycles.
  always_comb begin
    wl_wr = compute ? '0 : wl_b;
  end

  cimhe_sram #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WORD_BITS)) u_sram (
    .clk, .rd_wl(compute ? (wl_a | wl_b) : '0), .bl, .blb,
    .wr_wl(wl_wr), .wdata, .wword);

  cimhe_sense_amp #(.COLS(COLS), .WORD_BITS(WORD_BITS)) u_sa (
    .bl, .blb, .and_o(and_v), .or_o(or_v), .nor_o(nor_v), .xor_o(xor_v),
    .hor_flag);

  for (genvar w = 0; w < WORDS; w++) begin : g_add
    cimhe_csla #(.WIDTH(WORD_BITS)) u_csla (
      .g(and_v[w*WORD_BITS +: WORD_BITS]), .p(xor_v[w*WORD_BITS +: WORD_BITS]),
      .cin(uop.cin), .sum(sum_v[w*WORD_BITS +: WORD_BITS]), .cout(cout_v[w]));
  end

  cimhe_op_selector #(.COLS(COLS)) u_sel (
    .sel(uop.sel), .sum_i(sum_v), .and_i(and_v), .or_i(or_v), .nor_i(nor_v),
    .r(r_v));

  cimhe_log_shifter #(.COLS(COLS), .WORD_BITS(WORD_BITS)) u_shift (
    .r(r_v), .smask(uop.smask), .out_n);

  // Output drivers (inverting) and output latch.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       out_q <= '0;
    else if (compute) out_q <= ~out_n;
  end

  cimhe_copy_move #(.COLS(COLS), .WORD_BITS(WORD_BITS), .MOVE_F(MOVE_F)) u_cm (
    .kind(uop.kind), .kconst(uop.kconst), .pos(uop.pos), .word_en,
    .latch_q(out_q), .host_we(host_we && ready), .host_data,
    .we, .wdata, .wword);

  assert property (@(posedge clk) disable iff (!rst_n) host_we |-> ready)
    else $error("cimhe_array: host write while busy");
endmodule
