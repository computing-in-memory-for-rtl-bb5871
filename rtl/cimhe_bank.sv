// cimhe_bank -- a CiM-HE bank: ARRAYS compute-in-memory arrays in lock step.
//
// A ciphertext (c[0], c[1]) of n coefficients is stored column-aligned:
// arrays 0 .. ARRAYS/2-1 hold c[0] and the rest hold c[1], each array holding
// WORDS coefficients (one per WORD_BITS-bit word) of every ciphertext row, and
// row y of every array belongs to ciphertext y. Rows ROWS-2 and ROWS-1 are
// scratch. Because coefficients of equal degree share columns, one command
// broadcast to all arrays performs a coefficient-wise primitive on whole
// ciphertexts: PolyAdd on rows a and b of every array is a HomAdd.
//
// Interface: cmd/cmd_valid are broadcast; ready is high when every array is
// idle and done pulses when they finish (they always finish together, since
// conditional steps are predicated, not branched). host_we/host_array/
// host_row/host_data write one row of one array while ready. To read, issue a
// P_UOP command with an OR (READ) micro-operation; rd_data then shows the
// output latch of array rd_array. rd_flags gives that array's word flags.
//
// Timing: a command is accepted in the cycle cmd_valid and ready are both
// high; the arrays then step through the same micro-operations, one per
// cycle, and done pulses one cycle after the last one.
//
// Size: the published bank has 4096 arrays (4 MB). The default here is 2048
// arrays (2 MB), the largest power of two whose flattened model the lint and
// elaboration tools handle in 32 GB next to each other (measured 6.7 MB of
// lint memory per array). At 2048 arrays a ciphertext of n = 8192 takes two
// rows instead of one; ARRAYS = 4096 restores the published layout.
//
// Follows the paper: arrays of 8 x 1024 cells, 6 ciphertext rows
// and 2 scratch rows, 4 coefficients of up to 256 bits per array row, c[0]
// in the first half of the arrays and c[1] in the second, a controller among
// the peripherals of every array, all arrays working on the same command at
// once. Own choices: the host port, the broadcast command bus and the
// read-back multiplexer. Arrays exchange no
// data among themselves here; data between arrays goes through the host.
module cimhe_bank
  import cimhe_pkg::*;
#(
  parameter int unsigned ARRAYS    = 2048,
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256,
  parameter int unsigned MOVE_F    = WORD_BITS,
  parameter int unsigned AIDX_W    = (ARRAYS > 1) ? $clog2(ARRAYS) : 1,
  parameter int unsigned WORDS     = COLS / WORD_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  output logic              ready,
  output logic              done,
  input  logic              host_we,
  input  logic [AIDX_W-1:0] host_array,
  input  logic [ROW_AW-1:0] host_row,
  input  logic [COLS-1:0]   host_data,
  input  logic [AIDX_W-1:0] rd_array,
  output logic [COLS-1:0]   rd_data,
  output logic [WORDS-1:0]  rd_flags
);
  logic [ARRAYS-1:0] a_ready, a_done;
  logic [COLS-1:0]   a_out   [ARRAYS];
  logic [WORDS-1:0]  a_flags [ARRAYS];

  for (genvar i = 0; i < ARRAYS; i++) begin : g_arr
    cimhe_array #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WORD_BITS), .MOVE_F(MOVE_F)) u_arr (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && ready), .cmd,
      .ready(a_ready[i]), .done(a_done[i]),
      .host_we(host_we && (host_array == AIDX_W'(i))), .host_row, .host_data,
      .out_q(a_out[i]), .flags(a_flags[i]));
  end

  assign ready    = &a_ready;
  assign done     = &a_done;
  assign rd_data  = a_out[rd_array];
  assign rd_flags = a_flags[rd_array];

  // Lock step: all arrays are idle, and finish, at the same time.
  assert property (@(posedge clk) disable iff (!rst_n) (a_ready == '0) || (a_ready == '1))
    else $error("cimhe_bank: arrays out of lock step");
  assert property (@(posedge clk) disable iff (!rst_n) (a_done == '0) || (a_done == '1))
    else $error("cimhe_bank: arrays finished apart");
endmodule
