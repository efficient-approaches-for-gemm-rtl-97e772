// buffer_load_unit_tb: a load of 5 x 7 + 3 words into 5 partitions from a
// stream with random gaps, starting at address 10. Every write must go to
// partition i % 5, address 10 + i / 5, carry word i, and come one cycle
// after the word was accepted; busy must drop after the last word and no
// word may be taken while idle.
module buffer_load_unit_tb;
  localparam int W = 80, P = 5, AW = 6, CW = 12, N = 38, BASE = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, in_valid = 0, in_ready;
  logic [AW-1:0] base = 0, wr_addr;
  logic [CW-1:0] count = 0;
  logic [W-1:0] in_data = 0, wr_data;
  logic wr_en [P];
  buffer_load_unit #(.WIDTH(W), .PARTS(P), .AW(AW), .CW(CW)) dut (.*);

  logic [W-1:0] words [N];
  int checks = 0, failures = 0, n_wr = 0, n_acc = 0, acc_cyc [N], cyc = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < P; p++) if (rst_n && wr_en[p]) begin
      check(p == n_wr % P, "partition");
      check(wr_addr == AW'(BASE + n_wr / P), "address");
      check(wr_data == words[n_wr], "data");
      check(cyc == acc_cyc[n_wr] + 1, "write one cycle after accept");
      n_wr++;
    end
    if (rst_n && in_valid && in_ready) begin acc_cyc[n_acc] = cyc; n_acc++; end
  end

  initial begin
    for (int i = 0; i < N; i++) words[i] = {$urandom, $urandom, 16'($urandom)};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a word offered while idle is not taken
    in_valid = 1; in_data = '1;
    @(negedge clk);
    check(!in_ready, "idle unit is not ready");
    in_valid = 0;
    base = AW'(BASE); count = CW'(N); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < N; i++) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1; in_data = words[i];
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
    end
    @(negedge clk);
    check(!busy, "busy drops after the last word");
    check(n_wr == N, "all words written");
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
