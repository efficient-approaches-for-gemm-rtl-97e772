// gemm_controller_tb: checks the schedule produced by the GEMM controller.
//
// With ARRAY_LEN = 4 (9 A words per load) the controller runs a 2 x 2 tile
// product with jn = 16, a 1 x 3 tile product with jn = 2 and a 1 x 3 tile
// product with jn = 3*ARRAY_LEN, the smallest that hides a load. The test
// records every A read, commit, B read, bank select and C access and checks
// them against the schedule: reversed A addresses per phase, commit 2
// cycles after the last A read into bank phase%2, B addresses kt*jn + j plus
// the half base, a two-cycle skew per block, C reads and writes 2*ARRAY_LEN
// cycles after the B read with address mt*jn + j and first = (kt == 0), no
// stall in the first and third runs, no phase issued before its commit, and
// an exposed load of LDW+3-jn cycles per phase in the second.
module gemm_controller_tb;
  localparam int L = 4, NT = L - 1, LDW = 3 * NT;
  localparam int A_AW = 8, B_AW = 7, C_AW = 7, TW = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [TW-1:0] m_tiles = 0, k_tiles = 0, jn = 0;
  logic [A_AW-1:0] a_half_base = 0;
  logic [B_AW-1:0] b_half_base = 0;
  logic busy, done, a_rd_en, a_commit, a_commit_bank, c_rd_en, c_acc_valid, c_acc_first;
  logic [31:0] stall_cycles, hidden_loads;
  logic [A_AW-1:0] a_rd_addr;
  logic b_rd_en [NT];
  logic [B_AW-1:0] b_rd_addr [NT];
  logic comp_bank [NT];
  logic [C_AW-1:0] c_rd_addr, c_acc_addr;

  gemm_controller #(.ARRAY_LEN(L), .A_AW(A_AW), .B_AW(B_AW), .C_AW(C_AW), .TILE_W(TW)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // history of block-1 B reads and banks
  logic            h_en   [4096];
  logic [B_AW-1:0] h_addr [4096];
  logic            h_bank [4096];
  int n_bank_checked = 0;
  int n_a, n_commit, n_b, n_c, first_a_cyc, last_a_cyc;
  int exp_mt, exp_kt, exp_j, run_jn, run_kt_n, run_a_base, run_b_base;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    h_en[cyc] = b_rd_en[0]; h_addr[cyc] = b_rd_addr[0];
    h_bank[cyc] = 1'((n_b / run_jn) % 2);
    // bank select of block 1 is one cycle behind its B read
    if (cyc > 0 && h_en[cyc-1]) begin
      check(comp_bank[0] == h_bank[cyc-1], "bank select");
      n_bank_checked++;
    end
    // A reads: LDW per load, reversed
    if (a_rd_en) begin
      int q, w;
      q = n_a / LDW; w = n_a % LDW;
      if (w == 0) first_a_cyc = cyc;
      last_a_cyc = cyc;
      check(a_rd_addr == A_AW'(run_a_base + q * LDW + LDW - 1 - w), "A read address");
      n_a++;
    end
    if (a_commit) begin
      check(cyc == last_a_cyc + 3, "commit two cycles after the last A read's data");
      check(a_commit_bank == 1'(n_commit % 2), "commit bank alternates");
      n_commit++;
    end
    // block t read = block 1 read 2(t-1) cycles earlier
    for (int t = 1; t < NT; t++)
      if (cyc >= 2 * t) begin
        check(b_rd_en[t] == h_en[cyc - 2*t], "B enable skew");
        if (b_rd_en[t]) check(b_rd_addr[t] == h_addr[cyc - 2*t], "B address skew");
      end
    if (b_rd_en[0]) begin
      check(b_rd_addr[0] == B_AW'(run_b_base + exp_kt * run_jn + exp_j), "B address");
      if (n_b % run_jn == 0) check(n_commit > n_b / run_jn, "phase issued after its commit");
      n_b++;
    end
    if (c_acc_valid) begin
      int jj, ph, kt, mt;
      jj = n_c % run_jn; ph = n_c / run_jn; kt = ph % run_kt_n; mt = ph / run_kt_n;
      check(h_en[cyc - 2*L], "C write 2*ARRAY_LEN cycles after the B read");
      check(c_acc_addr == C_AW'(mt * run_jn + jj), "C address");
      check(c_acc_first == (kt == 0), "first K tile flag");
      n_c++;
    end
    if (c_rd_en) check(h_en[cyc - (2*L - 1)], "C read one cycle before the write");
  end

  // expected block-1 read order
  always @(posedge clk) if (rst_n && b_rd_en[0]) begin
    if (exp_j == run_jn - 1) begin
      exp_j <= 0;
      if (exp_kt == run_kt_n - 1) begin exp_kt <= 0; exp_mt <= exp_mt + 1; end
      else exp_kt <= exp_kt + 1;
    end else exp_j <= exp_j + 1;
  end


  task automatic run(int m, int k, int j, int ab, int bb, output int stalls, output int hid);
    @(negedge clk);
    run_jn = j; run_kt_n = k; run_a_base = ab; run_b_base = bb;
    exp_mt = 0; exp_kt = 0; exp_j = 0; n_a = 0; n_b = 0; n_c = 0; n_commit = 0;
    m_tiles = TW'(m); k_tiles = TW'(k); jn = TW'(j);
    a_half_base = A_AW'(ab); b_half_base = B_AW'(bb);
    start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    stalls = int'(stall_cycles); hid = int'(hidden_loads);
    check(n_a == m * k * LDW, "number of A reads");
    check(n_commit == m * k, "number of commits");
    check(n_b == m * k * j, "number of B reads");
    check(n_c == m * k * j, "number of C writes");
  endtask

  initial begin
    int st, hd;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(2, 2, 16, 5, 3, st, hd);
    check(st == 0, "no stall with jn = 16");
    check(hd == 3, "three hidden loads");
    run(1, 3, 2, 40, 64, st, hd);
    check(st == 2 * (LDW + 3 - 2), $sformatf("stall cycles %0d", st));
    run(1, 3, LDW + 3, 100, 70, st, hd);
    check(st == 0, $sformatf("no stall with jn = 3*ARRAY_LEN (%0d stall cycles)", st));
    check(hd == 2, "two hidden loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
