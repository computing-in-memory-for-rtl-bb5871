// tb_cimhe_op_selector -- applies distinct random vectors on the four inputs
// and checks that each selector setting routes the right one.
module tb_cimhe_op_selector;
  import cimhe_pkg::*;
  localparam int COLS = 128;
  int checks = 0, failures = 0;
  opsel_e sel;
  logic [COLS-1:0] s, a, o, n, r, e;

  cimhe_op_selector #(.COLS(COLS)) dut (.sel, .sum_i(s), .and_i(a), .or_i(o), .nor_i(n), .r);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < COLS / 32; i++) begin
        s[i*32 +: 32] = $urandom; a[i*32 +: 32] = $urandom;
        o[i*32 +: 32] = $urandom; n[i*32 +: 32] = $urandom;
      end
      for (int k = 0; k < 4; k++) begin
        sel = opsel_e'(k);
        #1;
        e = (k == 0) ? s : (k == 1) ? a : (k == 2) ? o : n;
        checks++;
        if (r !== e) begin
          failures++;
          $display("FAIL sel=%0d", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
