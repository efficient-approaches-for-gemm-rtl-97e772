// sdp_ram_tb: random writes and reads on a 80 x 200 simple dual-port RAM,
// checked against a model array: read data one cycle after the read, held
// while no read is issued, old data on a same-address read and write.
module sdp_ram_tb;
  localparam int W = 80, D = 200, AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] model [D];
  logic [W-1:0] expq;
  int checks = 0, failures = 0;

  initial begin
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom, 16'($urandom)};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = AW'($urandom_range(0, D - 1));
      wdata = {$urandom, $urandom, 16'($urandom)};
      re = (it == 0) ? 1'b1 : 1'($urandom); raddr = (it % 7 == 0) ? waddr : AW'($urandom_range(0, D - 1));
      if (re) expq = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != expq) begin
        failures++;
        if (failures < 10) $display("FAIL: it %0d addr %0d", it, raddr);
      end
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
