// tb_cimhe_csla -- random and corner-case additions and subtractions
// (inverted operand, carry-in 1) through the carry-select adder, compared with
// the + operator.
module tb_cimhe_csla;
  localparam int W = 256;
  int checks = 0, failures = 0;
  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  logic [W:0]   exp;

  cimhe_csla #(.WIDTH(W)) dut (.g(a & b), .p(a ^ b), .cin, .sum, .cout);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < W / 32; i++) begin
        a[i*32 +: 32] = $urandom;
        b[i*32 +: 32] = $urandom;
      end
      case (t % 6)
        0: begin a = '1; b = '0; end
        1: begin a = '1; b = W'(1); end
        2: b = ~a;                      // carry runs through every block with cin
        default: ;
      endcase
      cin = (t % 2 == 1);
      #1;
      exp = {1'b0, a} + {1'b0, b} + (W+1)'(cin);
      checks++;
      if ({cout, sum} !== exp) begin
        failures++;
        $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
