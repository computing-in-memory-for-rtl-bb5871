// cimhe_op_selector -- operation selectors of a CiM-HE array.
//
// Chooses, for every column, which result drives the log shifter input R:
// the adder sum (ADD), the bitwise AND whose per-word OR raises the flags
// (horizontal OR), the bitwise OR (a read when one row is active) or the
// bitwise NOR (NOT when one row is active). Combinational.
// The four choices are the design's; passing the AND vector on when the
// horizontal OR is selected is this implementation's choice, so the masked
// value can also be stored.
module cimhe_op_selector
  import cimhe_pkg::*;
#(
  parameter int unsigned COLS = 1024
) (
  input  opsel_e          sel,
  input  logic [COLS-1:0] sum_i,
  input  logic [COLS-1:0] and_i,
  input  logic [COLS-1:0] or_i,
  input  logic [COLS-1:0] nor_i,
  output logic [COLS-1:0] r
);
  always_comb begin
    case (sel)
      SEL_ADD: r = sum_i;
      SEL_HOR: r = and_i;
      SEL_OR:  r = or_i;
      SEL_NOR: r = nor_i;
      default: r = or_i;
    endcase
  end
endmodule
