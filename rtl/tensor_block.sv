// tensor_block: one AI Tensor Block in int8 tensor mode with cascade loading.
//
// The block holds two banks (0 and 1) of three 80-bit operand registers. Each
// register holds ten int8 values and feeds one of three ten-element dot
// product engines (Dot10). The second operand of all three engines is the
// 80-bit data_in word, broadcast to the three engines. Three 32-bit adders add
// the dot products to casc_accum_in, the partial sums of the previous block,
// and drive casc_accum_out and data_out (the low 24 bits).
//
// Cascade loading: operand words enter on casc_data_in and pass through three
// 80-bit load registers (load_q[0] -> load_q[1] -> load_q[2]) before leaving
// on casc_data_out, so a word needs three cycles to cross a block. When a whole
// array's worth of words sits in the load registers, load_commit copies
// load_q[k] into operand register k of bank load_bank, while the other bank
// keeps feeding the dot engines (ping-pong).
// With LOAD_PORT = 1 the block is the first block of an array (TB0): it does
// no arithmetic, registers data_in once and drives it on casc_data_out, and
// its casc_accum_out is zero.
//
// Timing: data_in and comp_bank in cycle T give the dot products in a
// register in T+1; casc_accum_in is registered too, and casc_accum_out in
// cycle T+2 holds dot(data_in(T)) + casc_accum_in(T). The data path is thus
// two cycles per block: the next block of an array gets its data_in two
// cycles later, together with this block's sum. The two-cycle latency and the port names and widths follow the
// tensor block description; the exact register placement (input register on
// the cascade sum, three load registers in series) is this design's choice.
module tensor_block
  import nx_pkg::*;
#(
  parameter bit LOAD_PORT = 1'b0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  op_word_t data_in,          // B operand (or A words when LOAD_PORT)
  input  op_word_t casc_data_in,     // A words from the previous block
  output op_word_t casc_data_out,    // A words to the next block
  input  acc_t     casc_accum_in  [N_DOT],
  output acc_t     casc_accum_out [N_DOT],
  output out_t     data_out       [N_DOT],
  input  logic     comp_bank,        // bank used by the dot engines
  input  logic     load_commit,      // copy load registers into a bank
  input  logic     load_bank         // bank written by load_commit
);

  if (LOAD_PORT) begin : g_port
    op_word_t pass_q;
    always_ff @(posedge clk) pass_q <= data_in;
    assign casc_data_out = pass_q;
    for (genvar i = 0; i < N_DOT; i++) begin : g_zero
      assign casc_accum_out[i] = '0;
      assign data_out[i]       = '0;
    end
  end else begin : g_compute
    op_word_t load_q [N_DOT];
    op_word_t bank0  [N_DOT];
    op_word_t bank1  [N_DOT];
    acc_t     dot_q  [N_DOT];
    acc_t     cin_q  [N_DOT];
    acc_t     acc_q  [N_DOT];

    // three-cycle cascade load path
    always_ff @(posedge clk) begin
      load_q[0] <= casc_data_in;
      load_q[1] <= load_q[0];
      load_q[2] <= load_q[1];
    end
    assign casc_data_out = load_q[2];

    // ping-pong operand banks
    always_ff @(posedge clk) begin
      if (load_commit) begin
        for (int i = 0; i < N_DOT; i++) begin
          if (load_bank) bank1[i] <= load_q[i];
          else           bank0[i] <= load_q[i];
        end
      end
    end

    // dot products, then cascade accumulation
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < N_DOT; i++) begin
          dot_q[i] <= '0;
          cin_q[i] <= '0;
          acc_q[i] <= '0;
        end
      end else begin
        for (int i = 0; i < N_DOT; i++) begin
          dot_q[i] <= dot10(comp_bank ? bank1[i] : bank0[i], data_in);
          cin_q[i] <= casc_accum_in[i];
          acc_q[i] <= dot_q[i] + cin_q[i];
        end
      end
    end

    for (genvar i = 0; i < N_DOT; i++) begin : g_out
      assign casc_accum_out[i] = acc_q[i];
      assign data_out[i]       = acc_q[i][OUTW-1:0];
    end
  end

endmodule
