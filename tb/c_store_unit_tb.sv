// c_store_unit_tb: a store of 4 x 6 + 2 words from 4 partitions modelled as
// arrays with one-cycle read latency, starting at address 3, with a
// consumer that drops ready at random. The stream must carry word i =
// partition i % 4, address 3 + i / 4 in order, hold its data while not
// accepted, and drop busy after the last word.
module c_store_unit_tb;
  localparam int W = 32, P = 4, AW = 5, CW = 10, N = 26, BASE = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, rd_en, out_valid, out_ready = 0;
  logic [AW-1:0] base = 0, rd_addr;
  logic [CW-1:0] count = 0;
  logic [W-1:0] rd_data [P], out_data;
  c_store_unit #(.WIDTH(W), .PARTS(P), .AW(AW), .CW(CW)) dut (.*);

  logic [W-1:0] mem [P][32];
  always @(posedge clk) if (rd_en) for (int p = 0; p < P; p++) rd_data[p] <= mem[p][rd_addr];

  int checks = 0, failures = 0, n_out = 0;
  initial begin
    for (int p = 0; p < P; p++) for (int a = 0; a < 32; a++) mem[p][a] = $urandom;
    for (int p = 0; p < P; p++) rd_data[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    base = AW'(BASE); count = CW'(N); start = 1;
    @(negedge clk); start = 0;
    while (n_out < N) begin
      out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != mem[n_out % P][BASE + n_out / P]) begin
          failures++;
          $display("FAIL: word %0d", n_out);
        end
        n_out++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    @(negedge clk);
    checks++;
    if (busy || out_valid) failures++;
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
