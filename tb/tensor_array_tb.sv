// tensor_array_tb: checks a five-block tensor array in cascade mode.
//
// Two A sets (4 compute blocks x 3 rows x 10 values) are loaded through the
// first block and committed into bank 0 and bank 1; the second load runs
// while the first set is in use. For each set, 16 columns of B words are fed
// with a skew of two cycles per block, and each data_out row must equal the
// 40-term dot product of that A row with the column, 2*(ARRAY_LEN-1) cycles
// after block 1 got the column.
module tensor_array_tb;
  import nx_pkg::*;

  localparam int L = 5, NT = L - 1, LDW = 3 * NT, JN = 16;
  localparam int LD0 = 0, CM0 = LD0 + LDW + 1;        // load/commit of set 0
  localparam int LD1 = CM0 + 1, CM1 = LD1 + LDW + 1;  // load/commit of set 1
  localparam int ST0 = CM0 + 1, ST1 = ST0 + JN;        // first B column per set
  localparam int NCYC = ST1 + JN + 2 * L + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  op_word_t a_in = '0;
  op_word_t b_in [NT];
  logic comp_bank [NT];
  logic load_commit = 0, load_bank = 0;
  out_t data_out [N_DOT];

  tensor_array #(.ARRAY_LEN(L)) dut (.*);

  op_word_t ablk [2][1:NT][N_DOT];
  op_word_t bcol [2][JN][1:NT];
  int checks = 0, failures = 0, n_out = 0;

  function automatic op_word_t rnd_word();
    op_word_t v;
    for (int e = 0; e < 10; e++) v[8*e +: 8] = 8'($urandom);
    return v;
  endfunction

  function automatic int ref_dot(op_word_t a, op_word_t b);
    int s = 0;
    for (int e = 0; e < 10; e++) s += int'($signed(a[8*e +: 8])) * int'($signed(b[8*e +: 8]));
    return s;
  endfunction

  initial begin
    for (int s = 0; s < 2; s++) begin
      for (int t = 1; t <= NT; t++) for (int r = 0; r < N_DOT; r++) ablk[s][t][r] = rnd_word();
      for (int j = 0; j < JN; j++) for (int t = 1; t <= NT; t++) bcol[s][j][t] = rnd_word();
    end
    for (int t = 0; t < NT; t++) begin b_in[t] = '0; comp_bank[t] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cc = 0; cc < NCYC; cc++) begin
      // A loading
      a_in = rnd_word();
      if (cc >= LD0 && cc < LD0 + LDW) a_in = ablk[0][L-1-(cc-LD0)/3][2-(cc-LD0)%3];
      if (cc >= LD1 && cc < LD1 + LDW) a_in = ablk[1][L-1-(cc-LD1)/3][2-(cc-LD1)%3];
      load_commit = (cc == CM0) || (cc == CM1);
      load_bank   = (cc == CM1);
      // skewed B columns
      for (int t = 1; t <= NT; t++) begin
        int j;
        j = cc - 2 * (t - 1) - ST0;
        b_in[t-1] = rnd_word();
        comp_bank[t-1] = 1'($urandom);
        if (j >= 0 && j < 2 * JN) begin
          b_in[t-1] = bcol[j / JN][j % JN][t];
          comp_bank[t-1] = 1'(j / JN);
        end
      end
      @(posedge clk); #1;
      // column j entered block 1 in cycle ST0+j; result during ST0+j+2(L-1),
      // visible after the edge of cycle ST0+j+2L-3
      begin
        int j;
        j = cc - (ST0 + 2 * L - 3);
        if (j >= 0 && j < 2 * JN) begin
          n_out++;
          for (int r = 0; r < N_DOT; r++) begin
            int ev;
            ev = 0;
            for (int t = 1; t <= NT; t++) ev += ref_dot(ablk[j / JN][t][r], bcol[j / JN][j % JN][t]);
            checks++;
            if (data_out[r] != out_t'(ev)) begin
              failures++;
              if (failures < 10) $display("FAIL: column %0d row %0d: %0d != %0d", j, r, data_out[r], ev);
            end
          end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_out != 2 * JN) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
