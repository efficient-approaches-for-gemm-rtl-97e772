// nx_gemm_accel_tb: end-to-end test of the tensor-block GEMM accelerator.
//
// The accelerator is built with a small layout (ARRAY_LEN=4, KP=2, NP=2,
// MP=2, native size 12 x 120 x 32, one address and two data pipeline
// stages) so that every mechanism is reached in a
// short run. Two matrix products with random int8 data are checked word for
// word against a product computed here:
//   1. 12 x 120 x 32 from buffer half 0 into C half 0: two M tiles and two K
//      tiles (accumulation over K in C), four phases with ping-pong operand
//      banks, A loads hidden behind computation. While it runs, the operands
//      of product 2 are loaded into buffer half 1.
//   2. 12 x 60 x 4 from half 1 into C half 1, with jn = 2 columns per group,
//      so the next A load cannot be hidden and the controller stalls. While
//      it runs, the store unit reads product 1 out of C half 0.
//   3. 6 x 60 x 32 from half 0 (one phase): the cycle count of products 1
//      and 3 minus phases*jn must be the same fixed overhead, i.e. one column
//      per cycle with every load after the first hidden.
// Mechanism counters: hidden loads, load stalls, bank-1 commits, K
// accumulation writes, concurrent load/compute and store/compute.
module nx_gemm_accel_tb;
  import nx_pkg::*;

  localparam int L = 4, KP = 2, NP = 2, MP = 2;
  localparam int AP = 1, DP = 2, PS = AP + DP;  // address / data pipeline stages
  localparam int M_NAT = 12, K_NAT = 120, N_NAT = 32;
  localparam int NT = L - 1, DM = 3 * MP, DK = NT * KP * 10, LDW = 3 * NT;
  localparam int A_PART = MP * KP, B_PART = NT * KP * NP, C_PART = MP * NP * 3;
  localparam int A_HALF = (M_NAT / DM) * (K_NAT / DK) * LDW;
  localparam int B_HALF = (K_NAT / DK) * (N_NAT / NP);
  localparam int A_AW = $clog2(2 * A_HALF), B_AW = $clog2(2 * B_HALF);
  localparam int C_AW = $clog2((M_NAT / DM) * (N_NAT / NP));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, ab_half = 0, c_half = 0;
  logic [15:0] m_tiles = 0, k_tiles = 0, jn = 0;
  logic busy, done;
  logic [31:0] stall_cycles, hidden_loads, bank1_commits, k_accums;
  logic a_ld_start = 0, b_ld_start = 0, c_st_start = 0;
  logic [A_AW-1:0] a_ld_base = 0;
  logic [B_AW-1:0] b_ld_base = 0;
  logic [C_AW-1:0] c_st_base = 0;
  logic [23:0] a_ld_count = 0, b_ld_count = 0, c_st_count = 0;
  logic a_ld_busy, b_ld_busy, c_st_busy;
  logic a_in_valid = 0, b_in_valid = 0, c_out_ready = 0;
  logic a_in_ready, b_in_ready, c_out_valid;
  op_word_t a_in_data = '0, b_in_data = '0;
  acc_t c_out_data;

  nx_gemm_accel #(.ARRAY_LEN(L), .KP(KP), .NP(NP), .MP(MP),
                  .M_NAT(M_NAT), .K_NAT(K_NAT), .N_NAT(N_NAT),
                  .ADDR_PIPE(AP), .DATA_PIPE(DP)) dut (.*);

  // operand sets: set s has matrices A[s] (M x K) and B[s] (K x N)
  byte  amat [3][M_NAT][K_NAT];
  byte  bmat [3][K_NAT][N_NAT];
  int   sm [3], sk [3], sn [3];
  int   checks = 0, failures = 0;
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_bank1_commit = 0, n_kacc = 0, n_overlap_load = 0, n_overlap_store = 0;
  always @(posedge clk) begin
    if (busy && (a_in_valid && a_in_ready || b_in_valid && b_in_ready)) n_overlap_load++;
    if (busy && c_out_valid && c_out_ready) n_overlap_store++;
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  // ---- stream contents ----
  function automatic op_word_t a_word(int s, int part, int addr);
    int mp = part / KP, kp = part % KP;
    int ph = addr / LDW, w = addr % LDW, t = w / 3 + 1, r = w % 3;
    int kt_n = sk[s] / DK;
    int mt = ph / kt_n, kt = ph % kt_n;
    op_word_t v;
    for (int e = 0; e < 10; e++)
      v[8*e +: 8] = amat[s][mt*DM + 3*mp + r][kt*DK + (kp*NT + t - 1)*10 + e];
    return v;
  endfunction

  function automatic op_word_t b_word(int s, int part, int addr);
    int np = part / (KP * NT), kp = (part / NT) % KP, t = part % NT + 1;
    int j_n = sn[s] / NP;
    int kt = addr / j_n, j = addr % j_n;
    op_word_t v;
    for (int e = 0; e < 10; e++)
      v[8*e +: 8] = bmat[s][kt*DK + (kp*NT + t - 1)*10 + e][j*NP + np];
    return v;
  endfunction

  function automatic int c_ref(int s, int row, int col);
    int acc = 0;
    for (int k = 0; k < sk[s]; k++) acc += int'(amat[s][row][k]) * int'(bmat[s][k][col]);
    return acc;
  endfunction

  // ---- stream drivers ----
  task automatic load_a(int s, int half);
    int words = (sm[s] / DM) * (sk[s] / DK) * LDW;
    @(negedge clk);
    a_ld_base = A_AW'(half * A_HALF); a_ld_count = 24'(words * A_PART); a_ld_start = 1;
    @(negedge clk); a_ld_start = 0;
    for (int i = 0; i < words * A_PART; i++) begin
      a_in_valid = ($urandom_range(0, 3) != 0);
      while (!a_in_valid) begin @(negedge clk); a_in_valid = ($urandom_range(0, 3) != 0); end
      a_in_data = a_word(s, i % A_PART, i / A_PART);
      @(posedge clk); while (!a_in_ready) @(posedge clk);
      @(negedge clk); a_in_valid = 0;
    end
    while (a_ld_busy) @(negedge clk);
  endtask

  task automatic load_b(int s, int half);
    int words = (sk[s] / DK) * (sn[s] / NP);
    @(negedge clk);
    b_ld_base = B_AW'(half * B_HALF); b_ld_count = 24'(words * B_PART); b_ld_start = 1;
    @(negedge clk); b_ld_start = 0;
    for (int i = 0; i < words * B_PART; i++) begin
      b_in_valid = 1;
      b_in_data = b_word(s, i % B_PART, i / B_PART);
      @(posedge clk); while (!b_in_ready) @(posedge clk);
      @(negedge clk); b_in_valid = 0;
    end
    while (b_ld_busy) @(negedge clk);
  endtask

  task automatic store_check(int s);
    int words = (sm[s] / DM) * (sn[s] / NP) * C_PART;
    int j_n = sn[s] / NP;
    @(negedge clk);
    c_st_base = '0; c_st_count = 24'(words); c_st_start = 1;
    @(negedge clk); c_st_start = 0;
    for (int i = 0; i < words; i++) begin
      int part = i % C_PART, addr = i / C_PART;
      int mp = part / (NP * 3), np = (part / 3) % NP, r = part % 3;
      int row = (addr / j_n) * DM + 3*mp + r, col = (addr % j_n) * NP + np;
      c_out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      while (!(c_out_valid && c_out_ready)) begin
        @(negedge clk); c_out_ready = ($urandom_range(0, 2) != 0); @(posedge clk);
      end
      check(c_out_data == c_ref(s, row, col),
            $sformatf("set %0d C[%0d][%0d] = %0d, expected %0d", s, row, col,
                      c_out_data, c_ref(s, row, col)));
      @(negedge clk); c_out_ready = 0;
    end
  endtask

  task automatic run(int s, int half, int ch, output int cycles, output int stalls);
    int t0;
    @(negedge clk);
    m_tiles = 16'(sm[s] / DM); k_tiles = 16'(sk[s] / DK); jn = 16'(sn[s] / NP);
    ab_half = half[0]; c_half = ch[0]; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0; stalls = int'(stall_cycles);
    n_bank1_commit += int'(bank1_commits);
    n_kacc += int'(k_accums);
  endtask

  initial begin
    int cyc1, cyc2, cyc3, st1, st2, st3, ovh1, ovh3;
    sm = '{12, 12, 6}; sk = '{120, 60, 60}; sn = '{32, 4, 32};
    for (int s = 0; s < 3; s++)
      for (int i = 0; i < M_NAT; i++)
        for (int k = 0; k < K_NAT; k++) begin
          amat[s][i][k] = byte'($urandom_range(0, 255));
        end
    for (int s = 0; s < 3; s++)
      for (int k = 0; k < K_NAT; k++)
        for (int j = 0; j < N_NAT; j++) bmat[s][k][j] = byte'($urandom_range(0, 255));
    // extreme values in set 0
    amat[0][0][0] = -128; bmat[0][0][0] = -128;
    amat[0][0][1] = 127;  bmat[0][1][0] = 127;

    repeat (3) @(negedge clk);
    rst_n = 1;
    load_a(0, 0); load_b(0, 0);

    // product 1, while product 2's operands are loaded into half 1
    fork
      run(0, 0, 0, cyc1, st1);
      begin load_a(1, 1); load_b(1, 1); end
    join
    $display("product 1: %0d cycles, %0d stall cycles, %0d hidden loads", cyc1, st1, hidden_loads);
    check(st1 == 0, "product 1 must not stall");
    check(hidden_loads == 3, "product 1 hides three A loads");

    // product 2 (stalling) while product 1 is stored from C half 0
    fork
      run(1, 1, 1, cyc2, st2);
      store_check(0);
    join
    $display("product 2: %0d cycles, %0d stall cycles", cyc2, st2);
    // load of a phase: 3*(L-1) reads + 3 cycles to commit; a phase of jn=2
    // columns leaves LDW+3+PS-2 cycles of the next load exposed
    check(st2 == LDW + 3 + PS - 2, $sformatf("product 2 stall cycles %0d", st2));

    @(negedge clk); c_half = 0;
    store_check(1);

    // product 3: a single phase, for the fixed overhead
    load_a(2, 0); load_b(2, 0);
    run(2, 0, 0, cyc3, st3);
    ovh1 = cyc1 - 4 * (sn[0] / NP);
    ovh3 = cyc3 - 1 * (sn[2] / NP);
    $display("overhead: product 1 %0d, product 3 %0d cycles", ovh1, ovh3);
    check(ovh1 == ovh3, "one column per cycle: same overhead for 4 phases and 1 phase");
    // first A load (LDW reads + 2 cycles to commit), array + adder tree
    // pipeline (2*L), start, issue and drain/done handshakes (4), and the
    // pipeline stages, once on the load and once on the B path (2*PS)
    check(ovh3 == LDW + 2 + 2 * L + 4 + 2 * PS, $sformatf("overhead %0d cycles", ovh3));
    @(negedge clk); c_half = 1;
    store_check(2);

    $display("mechanisms: bank1 commits %0d, K accumulations %0d, hidden loads %0d, stall cycles %0d, loads during compute %0d, stores during compute %0d",
             n_bank1_commit, n_kacc, hidden_loads, st2, n_overlap_load, n_overlap_store);
    check(n_bank1_commit > 0, "bank 1 used");
    check(n_kacc > 0, "accumulation over K tiles");
    check(st2 > 0, "load stall");
    check(n_overlap_load > 0, "operand load during compute");
    check(n_overlap_store > 0, "store during compute");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
