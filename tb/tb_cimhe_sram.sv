// tb_cimhe_sram -- writes random rows with random per-word enables into the
// cell array and checks single-row reads (BL = cell, BLB = not cell) and
// dual-row reads (BL = AND, BLB = NOR) against a shadow copy.
module tb_cimhe_sram;
  localparam int ROWS = 8, COLS = 128, WB = 32, WORDS = COLS / WB;
  int checks = 0, failures = 0;
  logic             clk = 0;
  logic [ROWS-1:0]  rd_wl, wr_wl;
  logic [COLS-1:0]  bl, blb, wdata;
  logic [WORDS-1:0] wword;
  logic [COLS-1:0]  shadow [ROWS];

  cimhe_sram #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WB)) dut (.clk, .rd_wl, .bl, .blb, .wr_wl, .wdata, .wword);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_read(int a, int b);
    logic [COLS-1:0] ea, eb;
    rd_wl = '0;
    rd_wl[a] = 1'b1;
    rd_wl[b] = 1'b1;
    #1;
    ea = shadow[a] & shadow[b];
    eb = ~(shadow[a] | shadow[b]);
    checks++;
    if (bl !== ea || blb !== eb) begin
      failures++;
      $display("FAIL read rows %0d,%0d", a, b);
    end
  endtask

  initial begin
    rd_wl = '0; wr_wl = '0; wdata = '0; wword = '0;
    // fill every row completely
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_wl = '0; wr_wl[r] = 1'b1; wdata = rnd(); wword = '1;
      shadow[r] = wdata;
    end
    @(negedge clk); wr_wl = '0;
    // partial writes
    for (int t = 0; t < 40; t++) begin
      int r;
      r = $urandom_range(ROWS - 1);
      @(negedge clk);
      wr_wl = '0; wr_wl[r] = 1'b1; wdata = rnd(); wword = WORDS'($urandom);
      for (int w = 0; w < WORDS; w++)
        if (wword[w]) shadow[r][w*WB +: WB] = wdata[w*WB +: WB];
      @(negedge clk); wr_wl = '0;
      check_read(r, r);
      check_read($urandom_range(ROWS - 1), $urandom_range(ROWS - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
