// tb_cimhe_bank -- end-to-end test of a small CiM-HE bank (4 arrays of
// 8 x 1024 cells, 256-bit coefficient slots, q = 2^218).
//
// Two random ciphertexts are written over the arrays: c[0] in arrays 0-1 and
// c[1] in arrays 2-3, ciphertext y in row y. Broadcast commands then perform
// HomAdd, HomSub, PolyScale by 2^127 and the coefficient-wise Shift-Add
// product on whole ciphertexts, each checked against SystemVerilog arithmetic
// for every coefficient of every array. Finally the toy Karatsuba product
// 11 x 6 = 66 (2-bit halves) is run step by step from host-issued commands:
// IPMB moves to align high and low halves, in-memory additions, two
// Shift-Add products at once (R2 and R3 in different coefficient slots),
// two subtractions, log-shifter left shifts by nk and 2nk, and the final
// additions. The other arrays run the same steps on random 4-bit operands.
//
// Mechanisms counted (each must occur): reduction flag set (conditional
// subtraction of q taken), flag clear (skipped), PolyScale rounding up,
// PolyScale rounding down, a scale of more than one shifter round, IPMB
// moves, multiplier bits 1 and 0, commands that every array finished in the
// same cycle.
module tb_cimhe_bank;
  import cimhe_pkg::*;
  localparam int ARRAYS = 4, ROWS = 8, COLS = 1024, WB = 256, WORDS = COLS / WB;
  localparam int AW = 2, K = 218;

  int checks = 0, failures = 0;
  int n_flag1 = 0, n_flag0 = 0, n_rnd_up = 0, n_rnd_dn = 0, n_multi_round = 0;
  int n_move = 0, n_bit1 = 0, n_bit0 = 0, n_lockstep = 0;

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // every array's controller must be idle, and finish, in the same cycle
  always @(posedge clk)
    if (rst_n && done) begin
      if (dut.a_done == '1 && dut.a_ready == '1) n_lockstep++;
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

  // ---------------- host side ----------------
  typedef logic [COLS-1:0] row_t;
  row_t mem [ARRAYS][ROWS];     // what the testbench expects in each row

  task automatic write_row(int a, int row, row_t d);
    @(negedge clk);
    host_we = 1; host_array = AW'(a); host_row = ROW_AW'(row); host_data = d;
    @(negedge clk);
    host_we = 0;
    mem[a][row] = d;
  endtask

  task automatic run(cmd_t c);
    @(negedge clk);
    while (!ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  function automatic cmd_t mk(prim_e p, int a, int b, int d, int k, int kp);
    cmd_t c;
    c = '0;
    c.prim = p; c.src_a = ROW_AW'(a); c.src_b = ROW_AW'(b); c.dst = ROW_AW'(d);
    c.qbits = POS_W'(k); c.kprime = POS_W'(kp);
    c.uop = uop_nop();
    return c;
  endfunction

  function automatic cmd_t mk_uop(uop_kind_e kind, int ra, int dst, logic [SMASK_W-1:0] sm);
    cmd_t c;
    c = mk(P_UOP, 0, 0, 0, K, 0);
    c.uop.kind = kind; c.uop.sel = SEL_OR; c.uop.row_a = ROW_AW'(ra); c.uop.dst = ROW_AW'(dst);
    c.uop.smask = sm; c.uop.pred = PRED_ALL;
    return c;
  endfunction

  // read row of every array (one OR read, then each array's latch)
  task automatic read_all(int row, output row_t d [ARRAYS]);
    run(mk_uop(U_COMPUTE, row, 0, SMASK_PASS));
    for (int a = 0; a < ARRAYS; a++) begin
      rd_array = AW'(a);
      #1 d[a] = rd_data;
    end
  endtask

  // compares the first nw coefficient slots of a row in every array
  task automatic check_all(string what, int row, row_t e [ARRAYS], int nw = WORDS);
    row_t d [ARRAYS];
    row_t m;
    m = '0;
    for (int w = 0; w < nw; w++) m[w*WB +: WB] = '1;
    read_all(row, d);
    for (int a = 0; a < ARRAYS; a++) begin
      checks++;
      if ((d[a] & m) !== (e[a] & m)) begin
        failures++;
        for (int w = 0; w < nw; w++)
          if (d[a][w*WB +: WB] !== e[a][w*WB +: WB])
            $display("FAIL %s array %0d word %0d: got %h exp %h", what, a, w,
                     d[a][w*WB +: WB], e[a][w*WB +: WB]);
      end
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

  // shifter masks: left by 2 (two 1-steps are not one level), left by 4
  localparam logic [SMASK_W-1:0] SM_SHL4 = 15'b100_100_100_010_100;

  row_t E [ARRAYS];
  row_t T;

  initial begin
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // two ciphertexts (rows 0 and 1) spread over all arrays
    for (int a = 0; a < ARRAYS; a++)
      for (int r = 0; r < 2; r++) begin
        for (int w = 0; w < WORDS; w++) T[w*WB +: WB] = rnd_coef(K);
        write_row(a, r, T);
      end
    check_all("host write", 0, '{mem[0][0], mem[1][0], mem[2][0], mem[3][0]});

    // HomAdd = PolyAdd on c[0] and c[1] at once
    for (int a = 0; a < ARRAYS; a++)
      for (int w = 0; w < WORDS; w++) begin
        logic [WB-1:0] s;
        s = mem[a][0][w*WB +: WB] + mem[a][1][w*WB +: WB];
        if (s[K-1]) n_flag1++; else n_flag0++;
        E[a][w*WB +: WB] = red(s, K);
      end
    run(mk(P_ADD, 0, 1, 2, K, 0));
    check_all("HomAdd", 2, E);

    // HomSub
    for (int a = 0; a < ARRAYS; a++)
      for (int w = 0; w < WORDS; w++) begin
        logic [WB-1:0] s;
        s = mem[a][0][w*WB +: WB] - mem[a][1][w*WB +: WB];
        if (s[K-1]) n_flag1++; else n_flag0++;
        E[a][w*WB +: WB] = red(s, K);
      end
    run(mk(P_SUB, 0, 1, 3, K, 0));
    check_all("HomSub", 3, E);

    // PolyScale by 2^127 (three shifter rounds) on the HomAdd result
    begin
      row_t S [ARRAYS];
      read_all(2, S);
      for (int a = 0; a < ARRAYS; a++)
        for (int w = 0; w < WORDS; w++) begin
          logic [WB-1:0] x;
          x = S[a][w*WB +: WB];
          if (x[126]) n_rnd_up++; else n_rnd_dn++;
          E[a][w*WB +: WB] = red((x >> 127) + WB'(x[126]), K);
        end
      if (scale_rounds(127) > 1) n_multi_round++;
      run(mk(P_SCALE, 2, 0, 4, K, 127));
      check_all("PolyScale", 4, E);
    end

    // coefficient-wise Shift-Add product c0 x c1 rows
    for (int a = 0; a < ARRAYS; a++)
      for (int w = 0; w < WORDS; w++) begin
        for (int i = 0; i < K; i++) if (mem[a][1][w*WB + i]) n_bit1++; else n_bit0++;
        E[a][w*WB +: WB] = red(mem[a][0][w*WB +: WB] * mem[a][1][w*WB +: WB], K);
      end
    run(mk(P_MULT, 0, 1, 5, K, 0));
    check_all("PolyMult base case", 5, E);

    // ---------------- toy Karatsuba: A x B with 2-bit halves ----------------
    // slot 0 holds the high half, slot 1 the low half (IPMB moves slot i to
    // i+1); only slots 0 and 1 are checked, as the moves also fill slot 2
    begin
      int av [ARRAYS], bv [ARRAYS];
      row_t z;
      for (int a = 0; a < ARRAYS; a++) begin
        av[a] = (a == 0) ? 11 : $urandom_range(0, 15);
        bv[a] = (a == 0) ? 6 : $urandom_range(0, 15);
        z = '0;
        z[0*WB +: WB] = WB'(av[a]) >> 2; z[1*WB +: WB] = WB'(av[a]) & 3;
        write_row(a, 0, z);
        z = '0;
        z[0*WB +: WB] = WB'(bv[a]) >> 2; z[1*WB +: WB] = WB'(bv[a]) & 3;
        write_row(a, 1, z);
      end
      // (a) align high halves with low halves: read, IPMB into cleared rows 2, 3
      run(mk_uop(U_CONST, 0, 2, SMASK_PASS));
      run(mk_uop(U_CONST, 0, 3, SMASK_PASS));
      run(mk_uop(U_COMPUTE, 0, 0, SMASK_PASS));
      run(mk_uop(U_MOVE, 0, 2, SMASK_PASS)); n_move++;
      run(mk_uop(U_COMPUTE, 1, 0, SMASK_PASS));
      run(mk_uop(U_MOVE, 0, 3, SMASK_PASS)); n_move++;
      for (int a = 0; a < ARRAYS; a++) begin
        E[a] = '0; E[a][1*WB +: WB] = WB'(av[a]) >> 2;
      end
      check_all("Karatsuba (a) move HighA", 2, E, 2);
      // (b) LowA + HighA -> row 2, LowB + HighB -> row 3
      run(mk(P_ADD, 0, 2, 2, K, 0));
      run(mk(P_ADD, 1, 3, 3, K, 0));
      // (c) R1 = (LowA+HighA)(LowB+HighB) in slot 1 of row 4
      run(mk(P_MULT, 2, 3, 4, K, 0));
      // (d) R2 (slot 0) and R3 (slot 1) at once in row 5
      run(mk(P_MULT, 0, 1, 5, K, 0));
      for (int a = 0; a < ARRAYS; a++) begin
        E[a] = '0;
        E[a][0*WB +: WB] = WB'((av[a] >> 2) * (bv[a] >> 2));
        E[a][1*WB +: WB] = WB'((av[a] & 3) * (bv[a] & 3));
      end
      check_all("Karatsuba (d) R2 R3", 5, E, 2);
      // (e) R1 - R3, and move R2 under it
      run(mk(P_SUB, 4, 5, 4, K, 0));
      run(mk_uop(U_CONST, 0, 3, SMASK_PASS));
      run(mk_uop(U_COMPUTE, 5, 0, SMASK_PASS));
      run(mk_uop(U_MOVE, 0, 3, SMASK_PASS)); n_move++;
      // (f) R1 = R1 - R3 - R2
      run(mk(P_SUB, 4, 3, 4, K, 0));
      for (int a = 0; a < ARRAYS; a++) begin
        int hi, lo, r1;
        hi = (av[a] >> 2) * (bv[a] >> 2); lo = (av[a] & 3) * (bv[a] & 3);
        r1 = ((av[a] >> 2) + (av[a] & 3)) * ((bv[a] >> 2) + (bv[a] & 3)) - hi - lo;
        E[a] = '0; E[a][1*WB +: WB] = WB'(r1);
      end
      check_all("Karatsuba (f) R1-R2-R3", 4, E, 2);
      // (g) R1 << nk (2 bits, two 1-bit shifter passes), R2 << 2nk (4 bits, one pass)
      run(mk_uop(U_COMPUTE, 4, 0, SMASK_SHL1));
      run(mk_uop(U_COPY, 0, 4, SMASK_PASS));
      run(mk_uop(U_COMPUTE, 4, 0, SMASK_SHL1));
      run(mk_uop(U_COPY, 0, 4, SMASK_PASS));
      run(mk_uop(U_COMPUTE, 3, 0, SM_SHL4));
      run(mk_uop(U_COPY, 0, 3, SMASK_PASS));
      // (h) R1 x 2^nk + R2 x 2^2nk, (i) + R3 (R3 is in slot 1 of row 5)
      run(mk(P_ADD, 4, 3, 2, K, 0));
      run(mk(P_ADD, 2, 5, 2, K, 0));
      for (int a = 0; a < ARRAYS; a++) begin
        E[a] = '0;
        E[a][0*WB +: WB] = WB'((av[a] >> 2) * (bv[a] >> 2));   // slot 0 keeps R2
        E[a][1*WB +: WB] = WB'(av[a] * bv[a]);
      end
      check_all("Karatsuba (i) A x B", 2, E, 2);
      begin
        row_t d [ARRAYS];
        read_all(2, d);
        $display("toy Karatsuba: 11 x 6 = %0d (0b%b)", d[0][1*WB +: WB], d[0][1*WB +: 8]);
      end
    end

    begin
      string names [9];
      int cnt [9];
      names = '{"flag set", "flag clear", "round up", "round down", "multi-round scale",
                "IPMB move", "multiplier bit 1", "multiplier bit 0", "lock-step finish"};
      cnt = '{n_flag1, n_flag0, n_rnd_up, n_rnd_dn, n_multi_round, n_move, n_bit1, n_bit0, n_lockstep};
      for (int i = 0; i < 9; i++) begin
        checks++;
        $display("mechanism %-18s %0d", names[i], cnt[i]);
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", names[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
