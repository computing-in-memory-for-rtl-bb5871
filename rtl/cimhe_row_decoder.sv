// cimhe_row_decoder -- row (word-line) decoder of a CiM-HE array.
//
// Turns a binary row address into a one-hot word-line vector when enabled,
// all zero otherwise. Each array has two of them (decoder A and decoder B) so
// that two rows can be activated together for in-memory logic and addition.
// Purely combinational. The design only names the two decoders; the plain
// binary-to-one-hot function is this implementation's choice.
module cimhe_row_decoder #(
  parameter int unsigned ROWS = 8,
  parameter int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic [AW-1:0]   addr,
  input  logic            en,
  output logic [ROWS-1:0] wl
);
  always_comb begin
    wl = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      wl[r] = en && (addr == AW'(r));
  end
endmodule
