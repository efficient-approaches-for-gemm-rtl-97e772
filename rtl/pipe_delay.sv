// pipe_delay: a chain of DEPTH registers that delays a WIDTH-bit bus.
//
// Used for the optional pipeline stages on the address and data paths
// between the buffers and the tensor arrays, which shorten the long
// broadcast wires at the cost of latency. DEPTH = 0 is a plain wire.
// Registers reset to zero (asynchronous, active-low rst_n), so a delayed
// enable is low after reset. Latency: exactly DEPTH cycles. How many stages
// to use is a build choice; the stages themselves are this design's.
module pipe_delay #(
  parameter int unsigned WIDTH = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] r [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(DEPTH); i++) r[i] <= '0;
      end else begin
        r[0] <= d;
        for (int i = 1; i < int'(DEPTH); i++) r[i] <= r[i-1];
      end
    end
    assign q = r[DEPTH-1];
  end

endmodule
