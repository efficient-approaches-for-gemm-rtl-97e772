// tensor_block_tb: checks one tensor block in int8 cascade mode.
//
// A compute block gets two sets of three operand words through the cascade
// load path and commits them into bank 0 and bank 1. Then random B words,
// bank selects and cascade inputs are driven every cycle; casc_accum_out two
// cycles later must be the ten-element dot product of the selected operand
// register with the B word plus the cascade input, and data_out its low 24
// bits. The load path delay (three cycles) and the loading-port variant
// (one register, zero sums) are checked too.
module tensor_block_tb;
  import nx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  op_word_t data_in = '0, casc_data_in = '0, casc_data_out, p_cdo;
  acc_t cai [N_DOT], cao [N_DOT], p_cao [N_DOT];
  out_t dout [N_DOT], p_dout [N_DOT];
  logic comp_bank = 0, load_commit = 0, load_bank = 0;

  tensor_block #(.LOAD_PORT(1'b0)) dut (
    .clk, .rst_n, .data_in, .casc_data_in, .casc_data_out,
    .casc_accum_in(cai), .casc_accum_out(cao), .data_out(dout),
    .comp_bank, .load_commit, .load_bank);

  tensor_block #(.LOAD_PORT(1'b1)) dut_port (
    .clk, .rst_n, .data_in, .casc_data_in, .casc_data_out(p_cdo),
    .casc_accum_in(cai), .casc_accum_out(p_cao), .data_out(p_dout),
    .comp_bank, .load_commit, .load_bank);

  int checks = 0, failures = 0;
  op_word_t banks [2][N_DOT];

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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // history of driven values, index = cycle
  op_word_t h_b [64], h_cdi [64];
  logic     h_bank [64];
  int       h_cai [64][N_DOT];

  initial begin
    for (int i = 0; i < N_DOT; i++) cai[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load two sets: words w0,w1,w2 end in registers 2,1,0
    for (int b = 0; b < 2; b++) begin
      for (int w = 0; w < 3; w++) begin
        banks[b][2-w] = rnd_word();
        casc_data_in = banks[b][2-w];
        @(negedge clk);
      end
      load_commit = 1; load_bank = b[0];
      @(negedge clk);
      load_commit = 0;
    end
    // compute, with loads still shifting through (must not disturb the banks)
    for (int c = 0; c < 40; c++) begin
      h_b[c] = rnd_word(); h_cdi[c] = rnd_word(); h_bank[c] = 1'($urandom);
      for (int i = 0; i < N_DOT; i++) h_cai[c][i] = int'($urandom) >>> 4;
      data_in = h_b[c]; casc_data_in = h_cdi[c]; comp_bank = h_bank[c];
      for (int i = 0; i < N_DOT; i++) cai[i] = h_cai[c][i];
      @(posedge clk); #1;
      if (c >= 2) begin
        for (int i = 0; i < N_DOT; i++) begin
          int exp_v;
          exp_v = ref_dot(banks[h_bank[c-1]][i], h_b[c-1]) + h_cai[c-1][i];
          // values driven in cycle c-1 appear after the second edge
          check(cao[i] == exp_v, $sformatf("cycle %0d sum %0d: %0d != %0d", c, i, cao[i], exp_v));
          check(dout[i] == out_t'(exp_v), "data_out low 24 bits");
          check(p_cao[i] == 0, "loading port has no sums");
        end
      end
      if (c >= 3) check(casc_data_out == h_cdi[c-2], "three-cycle load path");
      check(p_cdo == h_b[c], "loading port registers data_in once");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
