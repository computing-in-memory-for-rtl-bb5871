// cimhe_csla -- in-memory carry-select adder for one coefficient word.
//
// Takes the generate (AND) and propagate (XOR) bits the sense amplifiers
// derive from the two activated rows, plus a carry-in, and returns the sum.
// The word is cut into blocks of BLOCK bits. The lowest block ripples from
// the carry-in; every other block computes its sum twice, for carry-in 0 and
// 1, and the carry from the block below picks one (carry-select). Subtraction
// uses the same adder: the subtrahend is inverted first and cin is 1.
// Combinational. A carry-select adder is what the design uses; the block size
// is this implementation's choice.
module cimhe_csla #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned BLOCK = 64
) (
  input  logic [WIDTH-1:0] g,     // a & b
  input  logic [WIDTH-1:0] p,     // a ^ b
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  localparam int unsigned NB = (WIDTH + BLOCK - 1) / BLOCK;

  logic [NB:0] c;
  assign c[0] = cin;

  for (genvar b = 0; b < NB; b++) begin : g_blk
    localparam int unsigned LO = b * BLOCK;
    localparam int unsigned W  = ((LO + BLOCK) > WIDTH) ? (WIDTH - LO) : BLOCK;
    logic [W-1:0] s0, s1;
    logic         c0, c1;
    // a + b + cin = (a ^ b) + 2(a & b) + cin, for cin = 0 and cin = 1
    assign {c0, s0} = {1'b0, p[LO +: W]} + {g[LO +: W], 1'b0};
    assign {c1, s1} = {1'b0, p[LO +: W]} + {g[LO +: W], 1'b0} + (W+1)'(1);
    assign sum[LO +: W] = c[b] ? s1 : s0;
    assign c[b+1]       = c[b] ? c1 : c0;
  end

  assign cout = c[NB];
endmodule
