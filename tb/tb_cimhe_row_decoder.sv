// tb_cimhe_row_decoder -- checks every address of the row decoder, enabled and
// disabled, against a one-hot vector built independently.
module tb_cimhe_row_decoder;
  int checks = 0, failures = 0;
  logic [2:0] addr;
  logic       en;
  logic [7:0] wl;

  cimhe_row_decoder #(.ROWS(8)) dut (.addr, .en, .wl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 8; a++) begin
        addr = 3'(a);
        en   = e[0];
        #1;
        checks++;
        if (wl !== (e[0] ? (8'b1 << a) : 8'b0)) begin
          failures++;
          $display("FAIL addr=%0d en=%0d wl=%b", a, e, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
