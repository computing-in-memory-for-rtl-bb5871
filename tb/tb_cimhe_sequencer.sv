// tb_cimhe_sequencer -- drives the controller alone, with the flags and the
// output latch supplied by the testbench, and checks the micro-operation
// stream: the PolyAdd and reduction step list, the shift masks of the three
// rounds of a division by 2^127 (117 + 5 + 5), predication by the captured
// flags, predication by the multiplier bits b'(i), the number of Shift-Add
// iterations, and a host micro-operation passed through unchanged.
module tb_cimhe_sequencer;
  import cimhe_pkg::*;
  localparam int ROWS = 8, COLS = 1024, WB = 256, WORDS = COLS / WB;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cmd_valid = 0, ready, done;
  cmd_t cmd;
  uop_t uop;
  logic [WORDS-1:0] word_en, hor_flag = '0, flags_o;
  logic [COLS-1:0]  latch_q = '0;

  cimhe_sequencer #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WB)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .ready, .done, .uop, .word_en, .hor_flag, .latch_q, .flags_o);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (uop kind=%s sel=%s a=%0d b=%0d dst=%0d smask=%b)", what,
               uop.kind.name(), uop.sel.name(), uop.row_a, uop.row_b, uop.dst, uop.smask);
    end
  endtask

  function automatic cmd_t mk(prim_e p, int a, int b, int d, int k, int kp);
    cmd_t c;
    c = '0;
    c.prim = p; c.src_a = ROW_AW'(a); c.src_b = ROW_AW'(b); c.dst = ROW_AW'(d);
    c.qbits = POS_W'(k); c.kprime = POS_W'(kp);
    c.uop = uop_nop();
    return c;
  endfunction

  task automatic issue(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // checks the 12 reduction steps, with the flag vector fl raised on R_FLG
  task automatic check_red(int dst, int k, logic [WORDS-1:0] fl);
    chk("red lowmask", uop.kind == U_CONST && uop.kconst == K_LOWMASK && uop.pos == POS_W'(k) && uop.dst == 7); @(negedge clk);
    chk("red and", uop.kind == U_COMPUTE && uop.sel == SEL_HOR && uop.dual && uop.row_a == 6 && uop.row_b == 7); @(negedge clk);
    chk("red copy", uop.kind == U_COPY && uop.dst == 6); @(negedge clk);
    chk("red msb", uop.kind == U_CONST && uop.kconst == K_BIT && uop.pos == POS_W'(k - 1)); @(negedge clk);
    chk("red flag", uop.kind == U_COMPUTE && uop.sel == SEL_HOR && uop.flag_we);
    hor_flag = fl; @(negedge clk); hor_flag = ~fl;
    chk("red flags kept", flags_o == fl);
    chk("red read", uop.kind == U_COMPUTE && uop.sel == SEL_OR && uop.row_a == 6); @(negedge clk);
    chk("red write", uop.kind == U_COPY && uop.dst == ROW_AW'(dst) && word_en == '1); @(negedge clk);
    chk("red q", uop.kind == U_CONST && uop.kconst == K_BIT && uop.pos == POS_W'(k)); @(negedge clk);
    chk("red not", uop.kind == U_COMPUTE && uop.sel == SEL_NOR && !uop.dual && uop.row_a == 7); @(negedge clk);
    chk("red copy not", uop.kind == U_COPY && uop.dst == 7); @(negedge clk);
    chk("red sub", uop.kind == U_COMPUTE && uop.sel == SEL_ADD && uop.cin && uop.row_a == 6 && uop.row_b == 7); @(negedge clk);
    chk("red write flagged", uop.kind == U_COPY && uop.dst == ROW_AW'(dst) && word_en == fl); @(negedge clk);
    chk("idle", ready && done);
  endtask

  initial begin
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // PolyAdd
    issue(mk(P_ADD, 0, 1, 2, 218, 0));
    chk("add", uop.kind == U_COMPUTE && uop.sel == SEL_ADD && uop.dual && !uop.cin && uop.row_a == 0 && uop.row_b == 1); @(negedge clk);
    chk("add copy", uop.kind == U_COPY && uop.dst == 6); @(negedge clk);
    check_red(2, 218, 4'b1010);

    // PolyScale by 2^127: flag step, then rounds 117, 5, 5
    issue(mk(P_SCALE, 3, 0, 4, 218, 127));
    chk("scale mask", uop.kind == U_CONST && uop.kconst == K_BIT && uop.pos == 126); @(negedge clk);
    chk("scale flag", uop.kind == U_COMPUTE && uop.sel == SEL_HOR && uop.flag_we && uop.row_a == 3);
    hor_flag = 4'b0110; @(negedge clk);
    chk("round 1 = 117", uop.kind == U_COMPUTE && uop.row_a == 3 && uop.smask == 15'b001_001_001_001_001); @(negedge clk);
    chk("round 1 copy", uop.kind == U_COPY && uop.dst == 6); @(negedge clk);
    chk("round 2 = 5", uop.row_a == 6 && uop.smask == 15'b100_100_100_001_001); @(negedge clk);
    @(negedge clk);
    chk("round 3 = 5", uop.smask == 15'b100_100_100_001_001); @(negedge clk);
    @(negedge clk);
    chk("scale one", uop.kind == U_CONST && uop.kconst == K_BIT && uop.pos == 0); @(negedge clk);
    chk("scale inc", uop.kind == U_COMPUTE && uop.sel == SEL_ADD && !uop.cin); @(negedge clk);
    chk("scale round up", uop.kind == U_COPY && word_en == 4'b0110); @(negedge clk);
    check_red(4, 218, 4'b0001);

    // Shift-Add with k = 8: b' bits steer the adds
    issue(mk(P_MULT, 0, 1, 5, 8, 0));
    chk("mult read b", uop.kind == U_COMPUTE && uop.sel == SEL_OR && uop.row_a == 1);
    @(negedge clk);
    for (int w = 0; w < WORDS; w++) latch_q[w*WB +: WB] = WB'(8'h5A ^ (w * 8'h33));
    chk("mult load b", uop.kind == U_LOADB); @(negedge clk);
    chk("mult clear", uop.kind == U_CONST && uop.kconst == K_ZERO && uop.dst == 5); @(negedge clk);
    chk("mult read a", uop.kind == U_COMPUTE && uop.row_a == 0); @(negedge clk);
    chk("mult copy a", uop.kind == U_COPY && uop.dst == 6); @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      logic [WORDS-1:0] eb;
      for (int w = 0; w < WORDS; w++) eb[w] = ((8'h5A ^ (w * 8'h33)) >> i) & 1;
      chk("mult add", uop.kind == U_COMPUTE && uop.sel == SEL_ADD && uop.row_a == 5 && uop.row_b == 6); @(negedge clk);
      chk($sformatf("mult bit %0d predication", i), uop.kind == U_COPY && uop.dst == 5 && word_en == eb); @(negedge clk);
      chk("mult shift", uop.kind == U_COMPUTE && uop.smask == SMASK_SHL1 && uop.row_a == 6); @(negedge clk);
      chk("mult copy shift", uop.kind == U_COPY && uop.dst == 6); @(negedge clk);
    end
    chk("mult read out", uop.kind == U_COMPUTE && uop.row_a == 5); @(negedge clk);
    chk("mult copy out", uop.kind == U_COPY && uop.dst == 6); @(negedge clk);
    check_red(5, 8, 4'b1111);

    // host micro-operation
    begin
      cmd_t c;
      c = mk(P_UOP, 0, 0, 0, 218, 0);
      c.uop.kind = U_MOVE; c.uop.dst = 3; c.uop.pred = PRED_NFLAG;
      issue(c);
      chk("uop pass", uop.kind == U_MOVE && uop.dst == 3 && word_en == 4'b0000); @(negedge clk);
      chk("uop done", ready && done);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
