// tb_cimhe_log_shifter -- random rows and random legal shift masks through
// the five-level shifter; the expected value applies each level's shift
// (1, 4, 16, 32, 64) to every word with the >> and << operators. Includes the
// 117-bit and 69-bit right shifts and a one-bit left shift. The output is
// inverted (OUT_bar).
module tb_cimhe_log_shifter;
  import cimhe_pkg::*;
  localparam int COLS = 1024, WB = 256, WORDS = COLS / WB;
  int checks = 0, failures = 0;
  logic [COLS-1:0]    r, out_n, e;
  logic [SMASK_W-1:0] smask;

  cimhe_log_shifter #(.COLS(COLS), .WORD_BITS(WB)) dut (.r, .smask, .out_n);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] model(logic [COLS-1:0] x, logic [SMASK_W-1:0] m);
    int d [5] = '{1, 4, 16, 32, 64};
    logic [WB-1:0] v;
    for (int w = 0; w < WORDS; w++) begin
      v = x[w*WB +: WB];
      for (int l = 0; l < 5; l++) begin
        if (m[3*l])        v = v >> d[l];
        else if (m[3*l+1]) v = v << d[l];
      end
      x[w*WB +: WB] = v;
    end
    return ~x;
  endfunction

  task automatic try(logic [SMASK_W-1:0] m);
    for (int i = 0; i < COLS / 32; i++) r[i*32 +: 32] = $urandom;
    smask = m;
    #1;
    e = model(r, m);
    checks++;
    if (out_n !== e) begin
      failures++;
      $display("FAIL mask=%b", m);
    end
  endtask

  initial begin
    try(15'b001_001_001_001_001);          // 64+32+16+4+1 = 117 right
    try(15'b001_100_100_001_001);          // 64+4+1 = 69 right
    try(SMASK_SHL1);                       // 1 left
    try(SMASK_PASS);                       // no shift
    for (int t = 0; t < 200; t++) begin
      logic [SMASK_W-1:0] m;
      for (int l = 0; l < 5; l++) m[3*l +: 3] = 3'b001 << $urandom_range(2);
      try(m);
    end
    // the shift amount of an all-right mask
    r = '0; r[200] = 1'b1; smask = 15'b001_001_001_001_001; #1;
    checks++;
    if (~out_n !== (COLS'(1) << (200 - 117))) begin
      failures++;
      $display("FAIL 117-bit shift");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
