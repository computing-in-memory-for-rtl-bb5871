// cimhe_sense_amp -- customized sense amplifiers of a CiM-HE array.
//
// One amplifier per column senses the bit-line pair. With two rows active,
// BL carries their AND and BLB their NOR; from these the amplifier gives AND,
// OR (= not NOR) and NOR, and the XOR (OR and not AND) the adders need. The
// "horizontal OR" ORs the AND result over all bits of each coefficient word
// and gives one flag per word; the controller uses it for the conditional
// steps of the modulo-q reduction and of rounding.
// Combinational. The flag over a whole word (not only its k low bits) is this
// implementation's choice: the mask row that is ANDed in keeps the other bits 0.
module cimhe_sense_amp #(
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 256,
  parameter int unsigned WORDS     = COLS / WORD_BITS
) (
  input  logic [COLS-1:0]  bl,
  input  logic [COLS-1:0]  blb,
  output logic [COLS-1:0]  and_o,
  output logic [COLS-1:0]  or_o,
  output logic [COLS-1:0]  nor_o,
  output logic [COLS-1:0]  xor_o,
  output logic [WORDS-1:0] hor_flag
);
  always_comb begin
    and_o = bl;
    nor_o = blb;
    or_o  = ~blb;
    xor_o = ~blb & ~bl;
    for (int unsigned w = 0; w < WORDS; w++)
      hor_flag[w] = |bl[w*WORD_BITS +: WORD_BITS];
  end
endmodule
