// tb_cimhe_array -- runs every primitive of one CiM-HE array on random
// coefficients and compares with a reference written with SystemVerilog
// arithmetic:
//   red(x)   = x mod 2^k, minus 2^k when bit k-1 is set (range [-q/2, q/2))
//   add      = red(a + b),  sub = red(a - b),  mult = red(a * b)
//   scale    = red(floor(a / 2^k') + bit k'-1 of a)   (a taken as unsigned)
// It also checks the cycle count of each primitive, a host-driven IPMB move,
// and that predicated steps really were taken both ways (flag set and clear).
module tb_cimhe_array;
  import cimhe_pkg::*;
  localparam int ROWS = 8, COLS = 1024, WB = 256, WORDS = COLS / WB;
  localparam int K = 218;

  int checks = 0, failures = 0;
  int n_flag1 = 0, n_flag0 = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_t cmd;
  logic ready, done, host_we = 0;
  logic [ROW_AW-1:0] host_row = '0;
  logic [COLS-1:0]   host_data = '0, out_q;
  logic [WORDS-1:0]  flags;

  cimhe_array #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WB)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .ready, .done, .host_we, .host_row, .host_data, .out_q, .flags);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference ----------------
  function automatic logic [WB-1:0] red(logic [WB-1:0] x, int k);
    logic [WB-1:0] y;
    y = x & ((WB'(1) << k) - 1);
    if (y[k-1]) y = y - (WB'(1) << k);
    return y;
  endfunction

  function automatic logic [WB-1:0] rnd_coef(int k);
    logic [WB-1:0] v;
    for (int i = 0; i < WB / 32; i++) v[i*32 +: 32] = $urandom;
    return red(v, k);
  endfunction

  // ---------------- host tasks ----------------
  task automatic write_row(int row, logic [COLS-1:0] d);
    @(negedge clk);
    host_we = 1; host_row = ROW_AW'(row); host_data = d;
    @(negedge clk);
    host_we = 0;
  endtask

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

  function automatic cmd_t mk(prim_e p, int a, int b, int d, int k, int kp);
    cmd_t c;
    c = '0;
    c.prim = p; c.src_a = ROW_AW'(a); c.src_b = ROW_AW'(b); c.dst = ROW_AW'(d);
    c.qbits = POS_W'(k); c.kprime = POS_W'(kp);
    c.uop = uop_nop();
    return c;
  endfunction

  task automatic read_row(int row, output logic [COLS-1:0] d);
    cmd_t c;
    int cy;
    c = mk(P_UOP, 0, 0, 0, K, 0);
    c.uop.kind = U_COMPUTE; c.uop.sel = SEL_OR; c.uop.row_a = ROW_AW'(row);
    run(c, cy);
    d = out_q;
  endtask

  task automatic check_row(string what, int row, logic [COLS-1:0] e);
    logic [COLS-1:0] d;
    read_row(row, d);
    checks++;
    if (d !== e) begin
      failures++;
      for (int w = 0; w < WORDS; w++)
        if (d[w*WB +: WB] !== e[w*WB +: WB])
          $display("FAIL %s word %0d: got %h exp %h", what, w, d[w*WB +: WB], e[w*WB +: WB]);
    end
  endtask

  // exp = number of micro-operations; done follows the last one by a cycle
  task automatic check_cycles(string what, int got, int exp);
    checks++;
    if (got != exp + 1) begin
      failures++;
      $display("FAIL %s took %0d cycles, expected %0d", what, got, exp + 1);
    end
  endtask

  function automatic int scale_rounds(int kp);
    int rem, n, sum;
    int amt [5] = '{1, 4, 16, 32, 64};
    rem = kp; n = 0;
    do begin
      sum = 117;
      for (int l = 4; l >= 0; l--) if (sum > rem) sum -= amt[l];
      rem -= sum; n++;
    end while (rem > 0);
    return n;
  endfunction

  function automatic void count_flags(logic [COLS-1:0] v, int k);
    for (int w = 0; w < WORDS; w++)
      if (v[w*WB + k - 1]) n_flag1++; else n_flag0++;
  endfunction

  // ---------------- test ----------------
  logic [COLS-1:0] A, B, E, T;
  int cy;

  initial begin
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 6; it++) begin
      int k;
      k = (it < 4) ? K : 60 + 10 * it;          // also other moduli (settings A/C style)
      for (int w = 0; w < WORDS; w++) begin
        A[w*WB +: WB] = rnd_coef(k);
        B[w*WB +: WB] = rnd_coef(k);
      end
      write_row(0, A);
      write_row(1, B);

      // PolyAdd
      for (int w = 0; w < WORDS; w++) begin
        T[w*WB +: WB] = A[w*WB +: WB] + B[w*WB +: WB];
        E[w*WB +: WB] = red(T[w*WB +: WB], k);
      end
      count_flags(T, k);
      run(mk(P_ADD, 0, 1, 2, k, 0), cy);
      check_cycles("add", cy, 14);
      check_row("add", 2, E);

      // PolySub
      for (int w = 0; w < WORDS; w++) begin
        T[w*WB +: WB] = A[w*WB +: WB] - B[w*WB +: WB];
        E[w*WB +: WB] = red(T[w*WB +: WB], k);
      end
      count_flags(T, k);
      run(mk(P_SUB, 0, 1, 3, k, 0), cy);
      check_cycles("sub", cy, 16);
      check_row("sub", 3, E);

      // coefficient multiplication (Shift-Add)
      for (int w = 0; w < WORDS; w++)
        E[w*WB +: WB] = red(A[w*WB +: WB] * B[w*WB +: WB], k);
      run(mk(P_MULT, 0, 1, 4, k, 0), cy);
      check_cycles("mult", cy, 19 + 4 * k);
      check_row("mult", 4, E);

      // PolyScale by 2^k' (k' = 127 is the three-round example)
      begin
        int kp;
        kp = (it == 0) ? 127 : (it == 1) ? 208 : (it == 2) ? 1 : $urandom_range(1, 200);
        for (int w = 0; w < WORDS; w++) begin
          logic [WB-1:0] a, q;
          a = A[w*WB +: WB];
          q = (a >> kp) + WB'(a[kp-1]);
          E[w*WB +: WB] = red(q, k);
        end
        run(mk(P_SCALE, 0, 1, 5, k, kp), cy);
        check_cycles($sformatf("scale k'=%0d", kp), cy, 2 + 2 * scale_rounds(kp) + 3 + 12);
        check_row("scale", 5, E);
      end

      // reduction of an arbitrary row
      for (int i = 0; i < COLS / 32; i++) T[i*32 +: 32] = $urandom;
      write_row(1, T);
      for (int w = 0; w < WORDS; w++) E[w*WB +: WB] = red(T[w*WB +: WB], k);
      count_flags(T, k);
      run(mk(P_REDUCE, 1, 0, 3, k, 0), cy);
      check_cycles("reduce", cy, 14);
      check_row("reduce", 3, E);
    end

    // PolyScale with k' = 0 leaves the value (then reduces it)
    for (int w = 0; w < WORDS; w++) E[w*WB +: WB] = red(A[w*WB +: WB], 100);
    run(mk(P_SCALE, 0, 0, 5, 100, 0), cy);
    check_row("scale k'=0", 5, E);

    // host-scheduled IPMB move: read row 0, move by one coefficient slot
    begin
      cmd_t c;
      logic [COLS-1:0] old;
      read_row(2, old);
      read_row(0, A);
      c = mk(P_UOP, 0, 0, 0, K, 0);
      c.uop.kind = U_MOVE; c.uop.dst = ROW_AW'(2); c.uop.pred = PRED_ALL;
      run(c, cy);
      E = A << WB;
      E[WB-1:0] = old[WB-1:0];
      check_row("move", 2, E);
    end

    checks++;
    if (n_flag1 == 0 || n_flag0 == 0) begin
      failures++;
      $display("FAIL reduction flag never %0d", n_flag1 == 0);
    end
    $display("reduction flags: set %0d, clear %0d", n_flag1, n_flag0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
