// buffer_load_unit: load unit that fills a partitioned A or B buffer.
//
// The unit takes a stream of WIDTH-bit words (valid/ready, one word per
// cycle) from off-chip memory and writes them into the PARTS partitions of a
// buffer, write-only, round robin: stream word i goes to partition i % PARTS
// at address base + i / PARTS. A load is started with start, base and count
// (number of words); busy stays high until the last word is written. The
// writes are registered: wr_en/wr_addr/wr_data are valid the cycle after the
// word is accepted. The write-only role of the load unit and the separate
// write port per partition follow the design; the round-robin order and the
// stream handshake are this design's choice.
module buffer_load_unit #(
  parameter int unsigned WIDTH = 80,
  parameter int unsigned PARTS = 48,
  parameter int unsigned AW    = 13,
  parameter int unsigned CW    = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW-1:0]    base,
  input  logic [CW-1:0]    count,
  output logic             busy,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             wr_en [PARTS],
  output logic [AW-1:0]    wr_addr,
  output logic [WIDTH-1:0] wr_data
);

  localparam int unsigned PW = (PARTS > 1) ? $clog2(PARTS) : 1;

  logic [CW-1:0] left;
  logic [PW-1:0] part;
  logic [AW-1:0] addr;
  logic          accept;

  assign in_ready = busy;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      left <= '0;
      part <= '0;
      addr <= '0;
    end else if (!busy) begin
      if (start && count != '0) begin
        busy <= 1'b1;
        left <= count;
        part <= '0;
        addr <= base;
      end
    end else if (accept) begin
      left <= left - 1'b1;
      if (left == CW'(1)) busy <= 1'b0;
      if (part == PW'(PARTS - 1)) begin
        part <= '0;
        addr <= addr + 1'b1;
      end else begin
        part <= part + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(PARTS); p++) wr_en[p] <= 1'b0;
    end else begin
      for (int p = 0; p < int'(PARTS); p++) wr_en[p] <= accept && (part == PW'(p));
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      wr_addr <= addr;
      wr_data <= in_data;
    end
  end

  // a word is never taken while idle
  assert property (@(posedge clk) disable iff (!rst_n) !busy |-> !accept);

endmodule
