// sdp_ram: simple dual-port RAM, one write port and one read port.
//
// This models a buffer partition built from M20K blocks in simple dual-port
// mode: a write port (we, waddr, wdata) and a read port (re, raddr) whose data
// appears on rdata one cycle after re, and holds until the next read. A read
// and a write of the same address in the same cycle return the old data. The
// memory is a plain array that synthesis maps to block RAM; its content is
// not reset. The width and depth are set by the instantiating buffer.
module sdp_ram #(
  parameter int unsigned WIDTH = 80,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
