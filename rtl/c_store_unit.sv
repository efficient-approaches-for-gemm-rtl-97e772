// c_store_unit: store unit that streams results out of the C buffer.
//
// The unit reads the PARTS partitions of the C buffer (read-only) in round
// robin, word i from partition i % PARTS at address base + i / PARTS, and
// sends the words out as a valid/ready stream towards off-chip memory. A
// store is started with start, base and count; busy stays high until the
// last word has been handed over. The partitions share one read address;
// rd_data[p] is partition p's read data, one cycle after rd_en. The unit
// keeps one read in flight and one word in its output register, so it
// moves one word every two cycles when the stream is never stalled. The
// read-only role follows the design; the order, handshake and rate are this
// design's choice.
module c_store_unit #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned PARTS = 36,
  parameter int unsigned AW    = 15,
  parameter int unsigned CW    = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW-1:0]    base,
  input  logic [CW-1:0]    count,
  output logic             busy,
  output logic             rd_en,
  output logic [AW-1:0]    rd_addr,
  input  logic [WIDTH-1:0] rd_data [PARTS],
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned PW = (PARTS > 1) ? $clog2(PARTS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WAIT, S_SEND} state_t;
  state_t        state;
  logic [CW-1:0] left;
  logic [PW-1:0] part;
  logic [AW-1:0] addr;

  assign busy    = (state != S_IDLE);
  assign rd_en   = (state == S_READ);
  assign rd_addr = addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      left      <= '0;
      part      <= '0;
      addr      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start && count != '0) begin
          state <= S_READ;
          left  <= count;
          part  <= '0;
          addr  <= base;
        end
        S_READ: state <= S_WAIT;
        S_WAIT: begin
          out_valid <= 1'b1;
          out_data  <= rd_data[part];
          state     <= S_SEND;
        end
        S_SEND: if (out_ready) begin
          out_valid <= 1'b0;
          left      <= left - 1'b1;
          if (part == PW'(PARTS - 1)) begin
            part <= '0;
            addr <= addr + 1'b1;
          end else begin
            part <= part + 1'b1;
          end
          state <= (left == CW'(1)) ? S_IDLE : S_READ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // output data holds while the consumer is not ready
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
