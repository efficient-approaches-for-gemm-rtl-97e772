// reduction_adder_tree_tb: random 24-bit inputs from KP = 16 arrays,
// including the most negative and most positive values; each of the three
// 32-bit sums must equal the signed sum of its inputs one cycle later.
module reduction_adder_tree_tb;
  import nx_pkg::*;
  localparam int KP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  out_t in_data [KP][N_DOT];
  acc_t sum [N_DOT];
  reduction_adder_tree #(.KP(KP)) dut (.*);

  int checks = 0, failures = 0;
  int expv [N_DOT];

  initial begin
    for (int k = 0; k < KP; k++) for (int r = 0; r < N_DOT; r++) in_data[k][r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      for (int r = 0; r < N_DOT; r++) begin
        expv[r] = 0;
        for (int k = 0; k < KP; k++) begin
          case (it % 3)
            0: in_data[k][r] = out_t'($urandom);
            1: in_data[k][r] = (r == 0) ? 24'h800000 : 24'h7fffff;
            default: in_data[k][r] = out_t'($urandom_range(0, 15)) - 8;
          endcase
          expv[r] += int'(in_data[k][r]);
        end
      end
      @(posedge clk); #1;
      for (int r = 0; r < N_DOT; r++) begin
        checks++;
        if (sum[r] != expv[r]) begin
          failures++;
          if (failures < 10) $display("FAIL: row %0d: %0d != %0d", r, sum[r], expv[r]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
