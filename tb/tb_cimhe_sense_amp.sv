// tb_cimhe_sense_amp -- drives bit-line pairs as two cell rows would and
// checks AND, OR, NOR, XOR and the per-word horizontal-OR flags.
module tb_cimhe_sense_amp;
  localparam int COLS = 256, WB = 64, WORDS = COLS / WB;
  int checks = 0, failures = 0;
  logic [COLS-1:0]  a, b, bl, blb, and_o, or_o, nor_o, xor_o;
  logic [WORDS-1:0] hor_flag, exp_flag;

  cimhe_sense_amp #(.COLS(COLS), .WORD_BITS(WB)) dut (.bl, .blb, .and_o, .or_o, .nor_o, .xor_o, .hor_flag);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < COLS / 32; i++) begin
        a[i*32 +: 32] = $urandom;
        b[i*32 +: 32] = (t % 3 == 0) ? 32'h0 : $urandom;
      end
      if (t % 5 == 0) b = a;              // a single active row
      if (t % 7 == 0) a[WB +: WB] = '0;   // a word with no 1 in the AND
      bl  = a & b;
      blb = ~a & ~b;
      #1;
      for (int w = 0; w < WORDS; w++) begin
        exp_flag[w] = 1'b0;
        for (int i = 0; i < WB; i++) exp_flag[w] |= a[w*WB+i] & b[w*WB+i];
      end
      checks++;
      if (and_o !== (a & b) || or_o !== (a | b) || nor_o !== ~(a | b) ||
          xor_o !== (a ^ b) || hor_flag !== exp_flag) begin
        failures++;
        $display("FAIL t=%0d flags=%b exp=%b", t, hor_flag, exp_flag);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
