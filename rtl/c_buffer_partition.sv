// c_buffer_partition: one double-buffered partition of the C buffer, with
// its soft accumulate adder.
//
// A partition holds one output row (of the three rows a reduction group
// produces) for one reduction group, for every column that group handles. It
// is split into two equal halves: while the compute side accumulates into
// half comp_half, the store unit reads results out of the other half.
//
// Compute side, per partial sum: the address is read one cycle ahead
// (acc_rd_en/acc_rd_addr in cycle S-1); in cycle S the sum arrives on
// acc_data with acc_valid and acc_addr, and the partition writes
// acc_first ? acc_data : old + acc_data. acc_first marks the first K tile of
// an output tile, so a new product needs no clearing pass. Reading and
// writing the same half in the same cycle uses the two ports of a simple
// dual-port RAM, which gives one accumulation per cycle without stalls. A
// later read of the same address must come at least two cycles after the
// write.
//
// Store side: st_rd_en/st_rd_addr read the half not used by compute; data is
// on st_rd_data one cycle later. comp_half must not change while either side
// has a read in flight.
// The split into two halves, the read-only store side and the simple
// dual-port organisation follow the design; the read-ahead timing is this
// design's choice.
module c_buffer_partition
  import nx_pkg::*;
#(
  parameter int unsigned DEPTH = 17892,   // words per half
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          comp_half,
  input  logic          acc_rd_en,
  input  logic [AW-1:0] acc_rd_addr,
  input  logic          acc_valid,
  input  logic          acc_first,
  input  logic [AW-1:0] acc_addr,
  input  acc_t          acc_data,
  input  logic          st_rd_en,
  input  logic [AW-1:0] st_rd_addr,
  output acc_t          st_rd_data
);

  logic [ACCW-1:0] rdata [2];
  logic            half_q;
  acc_t            old_val;
  acc_t            new_val;

  always_ff @(posedge clk) half_q <= comp_half;

  assign old_val    = acc_t'(rdata[half_q]);
  assign st_rd_data = acc_t'(rdata[!half_q]);
  assign new_val    = acc_first ? acc_data : old_val + acc_data;

  for (genvar h = 0; h < 2; h++) begin : g_half
    logic is_comp;
    assign is_comp = (comp_half == 1'(h));
    sdp_ram #(.WIDTH(ACCW), .DEPTH(DEPTH)) u_ram (
      .clk,
      .we    (is_comp && acc_valid),
      .waddr (acc_addr),
      .wdata (new_val),
      .re    (is_comp ? acc_rd_en : st_rd_en),
      .raddr (is_comp ? acc_rd_addr : st_rd_addr),
      .rdata (rdata[h])
    );
  end

endmodule
