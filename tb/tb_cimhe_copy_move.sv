// tb_cimhe_copy_move -- checks the write data and word enables produced for
// IPCB copies, IPMB moves by F columns, constants from the bit-line drivers
// and host writes, with random predication.
module tb_cimhe_copy_move;
  import cimhe_pkg::*;
  localparam int COLS = 1024, WB = 256, WORDS = COLS / WB, F = WB;
  int checks = 0, failures = 0;
  uop_kind_e        kind;
  const_e           kconst;
  logic [POS_W-1:0] pos;
  logic [WORDS-1:0] word_en, wword;
  logic [COLS-1:0]  latch_q, host_data, wdata;
  logic             host_we, we;

  cimhe_copy_move #(.COLS(COLS), .WORD_BITS(WB), .MOVE_F(F)) dut (
    .kind, .kconst, .pos, .word_en, .latch_q, .host_we, .host_data, .we, .wdata, .wword);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_w(string what, logic e_we, logic [COLS-1:0] e_data, logic [WORDS-1:0] e_wword);
    #1;
    checks++;
    // data only matters in the words written
    for (int w = 0; w < WORDS; w++)
      if (e_wword[w] && wdata[w*WB +: WB] !== e_data[w*WB +: WB]) begin
        failures++;
        $display("FAIL %s data word %0d", what, w);
        return;
      end
    if (we !== e_we || wword !== e_wword) begin
      failures++;
      $display("FAIL %s we=%b wword=%b exp %b %b", what, we, wword, e_we, e_wword);
    end
  endtask

  initial begin
    host_we = 0;
    for (int t = 0; t < 50; t++) begin
      logic [WB-1:0] kw;
      for (int i = 0; i < COLS / 32; i++) begin
        latch_q[i*32 +: 32] = $urandom;
        host_data[i*32 +: 32] = $urandom;
      end
      word_en = WORDS'($urandom);
      pos = POS_W'($urandom_range(WB - 1));
      host_we = 0;
      kind = U_COPY;  expect_w("copy", 1, latch_q, word_en);
      kind = U_MOVE;  expect_w("move", 1, latch_q << F, word_en & ~WORDS'(1));
      kind = U_CONST; kconst = K_BIT;
      kw = WB'(1) << pos; expect_w("const bit", 1, {WORDS{kw}}, word_en);
      kconst = K_LOWMASK;
      kw = (WB'(1) << pos) - 1; expect_w("const lowmask", 1, {WORDS{kw}}, word_en);
      kconst = K_ZERO; expect_w("const zero", 1, '0, word_en);
      kind = U_COMPUTE; expect_w("compute", 0, '0, '0);
      host_we = 1; expect_w("host", 1, host_data, '1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
