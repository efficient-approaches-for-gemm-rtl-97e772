// reduction_adder_tree: soft-logic adder tree of one reduction group.
//
// A reduction group is KP tensor arrays that work on different slices of the
// reduction (K) dimension for the same three rows of A and the same column of
// B. Each array delivers three 24-bit partial sums per cycle; this block
// sign-extends them to 32 bits and adds the KP values of each of the three
// rows, giving three 32-bit sums per cycle that the C buffer accumulates.
// The sum of KP terms is written as a balanced tree by the synthesis tool;
// one output register gives a latency of one cycle at a throughput of one
// set of sums per cycle. That the outputs of all arrays of a group are added
// in soft logic before accumulation in C follows the design; the single
// pipeline register is this design's choice.
module reduction_adder_tree
  import nx_pkg::*;
#(
  parameter int unsigned KP = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  out_t in_data [KP][N_DOT],
  output acc_t sum     [N_DOT]
);

  acc_t sum_d [N_DOT];

  always_comb begin
    for (int r = 0; r < N_DOT; r++) begin
      sum_d[r] = '0;
      for (int k = 0; k < KP; k++) sum_d[r] += acc_t'(in_data[k][r]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int r = 0; r < N_DOT; r++) sum[r] <= '0;
    else        for (int r = 0; r < N_DOT; r++) sum[r] <= sum_d[r];
  end

endmodule
