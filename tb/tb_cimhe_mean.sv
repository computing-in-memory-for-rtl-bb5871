// tb_cimhe_mean -- the "arithmetic mean" workload on a small CiM-HE bank.
//
// The encrypted mean of a file of ciphertexts is their homomorphic sum; the
// division by the count is done after decryption (or as a plaintext scale).
// Six random ciphertexts fill the six data rows of a 4-array bank (c[0] in
// arrays 0-1, c[1] in arrays 2-3), and five broadcast HomAdd commands fold
// them into row 0: row0 = [row0 + row y]_q for y = 1..5. Every coefficient of
// every array is compared with the same sum done with SystemVerilog
// arithmetic and reduced into [-q/2, q/2), q = 2^218. The number of cycles
// per HomAdd (14 micro-operations) is checked as well.
module tb_cimhe_mean;
  import cimhe_pkg::*;
  localparam int ARRAYS = 4, ROWS = 8, COLS = 1024, WB = 256, WORDS = COLS / WB;
  localparam int AW = 2, K = 218, FILE = 6;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cmd_valid = 0, ready, done, host_we = 0;
  cmd_t cmd;
  logic [AW-1:0]     host_array = '0, rd_array = '0;
  logic [ROW_AW-1:0] host_row = '0;
  logic [COLS-1:0]   host_data = '0, rd_data;
  logic [WORDS-1:0]  rd_flags;

  cimhe_bank #(.ARRAYS(ARRAYS), .ROWS(ROWS), .COLS(COLS), .WORD_BITS(WB)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .ready, .done, .host_we, .host_array, .host_row, .host_data,
    .rd_array, .rd_data, .rd_flags);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WB-1:0] red(logic [WB-1:0] x);
    logic [WB-1:0] y;
    y = x & ((WB'(1) << K) - 1);
    if (y[K-1]) y = y - (WB'(1) << K);
    return y;
  endfunction

  function automatic cmd_t mk(prim_e p, int a, int b, int d);
    cmd_t c;
    c = '0;
    c.prim = p; c.src_a = ROW_AW'(a); c.src_b = ROW_AW'(b); c.dst = ROW_AW'(d);
    c.qbits = POS_W'(K);
    c.uop = uop_nop();
    return c;
  endfunction

  task automatic run(cmd_t c, output int cycles);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  logic [WB-1:0] acc [ARRAYS][WORDS];

  initial begin
    int cy;
    cmd_t rd;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < FILE; y++)
      for (int a = 0; a < ARRAYS; a++) begin
        logic [COLS-1:0] d;
        for (int w = 0; w < WORDS; w++) begin
          logic [WB-1:0] v;
          for (int i = 0; i < WB / 32; i++) v[i*32 +: 32] = $urandom;
          v = red(v);
          d[w*WB +: WB] = v;
          acc[a][w] = (y == 0) ? v : red(acc[a][w] + v);
        end
        @(negedge clk);
        host_we = 1; host_array = AW'(a); host_row = ROW_AW'(y); host_data = d;
        @(negedge clk);
        host_we = 0;
      end

    for (int y = 1; y < FILE; y++) begin
      run(mk(P_ADD, 0, y, 0), cy);
      checks++;
      if (cy != 15) begin
        failures++;
        $display("FAIL HomAdd %0d took %0d cycles, expected 15", y, cy);
      end
    end

    rd = mk(P_UOP, 0, 0, 0);
    rd.uop.kind = U_COMPUTE; rd.uop.sel = SEL_OR; rd.uop.row_a = '0;
    run(rd, cy);
    for (int a = 0; a < ARRAYS; a++) begin
      rd_array = AW'(a);
      #1;
      for (int w = 0; w < WORDS; w++) begin
        checks++;
        if (rd_data[w*WB +: WB] !== acc[a][w]) begin
          failures++;
          $display("FAIL sum array %0d coefficient %0d: got %h exp %h", a, w, rd_data[w*WB +: WB], acc[a][w]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
