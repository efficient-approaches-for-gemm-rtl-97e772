// tensor_array: a TB array, ARRAY_LEN tensor blocks chained in cascade mode.
//
// Block 0 is only the loading port: A operand words enter on a_in and walk
// through the cascade data chain, three cycles per block, into the load
// registers of blocks 1..ARRAY_LEN-1. One load therefore takes
// 3*(ARRAY_LEN-1) words. The word presented at a_in in cycle w of a load that
// lasts N = 3*(ARRAY_LEN-1) cycles ends in block t = ARRAY_LEN-1-w/3, operand
// register 2-w%3; load_commit must be raised in cycle N+1 after the first
// word (word w is in load register position N-1-w at that time). Feeding the
// words in reverse storage order (position p = 3*(t-1)+row read first last)
// makes the storage order natural, see gemm_controller.
//
// Blocks 1..ARRAY_LEN-1 each take their own 80-bit B word (b_in[t-1]) and
// bank select (comp_bank[t-1]); block t must receive them 2*(t-1) cycles
// after block 1, because partial sums move down the cascade two cycles per
// block. The array result, the sum over the (ARRAY_LEN-1)*10 products per
// row, appears on data_out (three 24-bit values, one per operand register)
// 2*(ARRAY_LEN-1) cycles after block 1 received its B word.
// The chain structure, the wasted first block and the three-cycles-per-block
// load follow the tensor block's cascade mode; an array must lie within one
// 36-block chain, so ARRAY_LEN is checked to be 2..36. The skew is left to
// the caller.
module tensor_array
  import nx_pkg::*;
#(
  parameter int unsigned ARRAY_LEN = 18
) (
  input  logic     clk,
  input  logic     rst_n,
  input  op_word_t a_in,
  input  op_word_t b_in      [ARRAY_LEN-1],
  input  logic     comp_bank [ARRAY_LEN-1],
  input  logic     load_commit,
  input  logic     load_bank,
  output out_t     data_out  [N_DOT]
);

  op_word_t cdata [ARRAY_LEN];
  acc_t     cacc  [ARRAY_LEN][N_DOT];
  out_t     dout  [ARRAY_LEN][N_DOT];
  acc_t     zero_acc [N_DOT];
  always_comb for (int i = 0; i < N_DOT; i++) zero_acc[i] = '0;

  tensor_block #(.LOAD_PORT(1'b1)) u_tb0 (
    .clk, .rst_n,
    .data_in       (a_in),
    .casc_data_in  ('0),
    .casc_data_out (cdata[0]),
    .casc_accum_in (zero_acc),
    .casc_accum_out(cacc[0]),
    .data_out      (dout[0]),
    .comp_bank     (1'b0),
    .load_commit   (1'b0),
    .load_bank     (1'b0)
  );

  for (genvar t = 1; t < ARRAY_LEN; t++) begin : g_tb
    tensor_block #(.LOAD_PORT(1'b0)) u_tb (
      .clk, .rst_n,
      .data_in       (b_in[t-1]),
      .casc_data_in  (cdata[t-1]),
      .casc_data_out (cdata[t]),
      .casc_accum_in (cacc[t-1]),
      .casc_accum_out(cacc[t]),
      .data_out      (dout[t]),
      .comp_bank     (comp_bank[t-1]),
      .load_commit   (load_commit),
      .load_bank     (load_bank)
    );
  end

  assign data_out = dout[ARRAY_LEN-1];

  initial begin
    assert (ARRAY_LEN >= 2 && ARRAY_LEN <= 36)
      else $error("an array has 2 to 36 tensor blocks (one cascade chain)");
  end

endmodule
