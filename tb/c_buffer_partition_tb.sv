// c_buffer_partition_tb: accumulation and double buffering of one C
// partition (depth 16 per half). For each half in turn: a first pass writes
// sums with acc_first, two more passes accumulate (read one cycle ahead,
// write the next cycle, one word per cycle), while the store port reads the
// other half, which must still hold the result of the previous round.
module c_buffer_partition_tb;
  import nx_pkg::*;
  localparam int D = 16, AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic comp_half = 0, acc_rd_en = 0, acc_valid = 0, acc_first = 0, st_rd_en = 0;
  logic [AW-1:0] acc_rd_addr = 0, acc_addr = 0, st_rd_addr = 0;
  acc_t acc_data = 0, st_rd_data;
  c_buffer_partition #(.DEPTH(D)) dut (.*);

  int model [2][D];
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int round = 0; round < 4; round++) begin
      int h, exp_st;
      h = round % 2;
      @(negedge clk); comp_half = h[0];
      // three passes over the D addresses, back to back; pass p accumulates
      for (int c = 0; c <= 3 * D; c++) begin
        int p, a, pr, ar;
        // read for word c, write for word c-1
        p = c / D; a = c % D; pr = (c - 1) / D; ar = (c - 1) % D;
        acc_rd_en = (c < 3 * D); acc_rd_addr = AW'(a);
        acc_valid = (c > 0); acc_addr = AW'(ar); acc_first = (c > 0) && (pr == 0);
        acc_data = acc_t'($urandom) >>> 3;
        if (c > 0) model[h][ar] = (pr == 0) ? int'(acc_data) : model[h][ar] + int'(acc_data);
        // store side reads the other half
        st_rd_en = (c < D); st_rd_addr = AW'(a);
        exp_st = model[1-h][a];
        @(posedge clk); #1;
        if (c < D && round > 0) check(st_rd_data == exp_st, $sformatf("store read round %0d addr %0d", round, a));
        @(negedge clk);
      end
      acc_valid = 0; acc_rd_en = 0; st_rd_en = 0;
    end
    // final readout of both halves
    for (int h = 0; h < 2; h++) begin
      @(negedge clk); comp_half = !h[0];
      for (int a = 0; a < D; a++) begin
        st_rd_en = 1; st_rd_addr = AW'(a);
        @(posedge clk); #1;
        check(st_rd_data == model[h][a], $sformatf("final half %0d addr %0d", h, a));
        @(negedge clk);
      end
      st_rd_en = 0;
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
