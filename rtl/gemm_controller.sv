// gemm_controller: control logic of the tensor-block GEMM accelerator.
//
// The controller runs one matrix product out of the A, B and C buffers. The
// work is split into phases, one per (M tile, K tile) pair in the order
// p = mt*k_tiles + kt (K tiles innermost). In a phase every tensor block
// keeps one 3x10 block of A in an operand bank and multiplies it with a new
// 10x1 block of B every cycle, for jn = N/Np columns.
//
// A loading and computing overlap (ping-pong). The A words of phase q are
// read from the A buffer over 3*(ARRAY_LEN-1) cycles, walk down the cascade
// chains, and are committed into bank q%2 of every block LD_COMMIT cycles
// after the first read. The load of phase q starts as soon as phase q-1 has
// started computing, and phase q may issue in the commit cycle, so with
// jn >= 3*ARRAY_LEN (the paper's N' >= 3*TB_len*Np) the load is hidden. When
// jn is smaller, phase q waits for its commit and the controller stalls;
// stall_cycles counts those cycles.
//
// Per column j of phase p the controller issues one B buffer read at address
// b_half_base + kt*jn + j. Block t of every array needs that word 2*(t-1)
// cycles after block 1, so the read enable, address and bank select are
// delayed per block (b_rd_*[t-1], comp_bank[t-1]); comp_bank is one more
// cycle late, aligned with the RAM data. The sums reach the C buffer
// C_LAT = 2*ARRAY_LEN cycles after the B read of block 1: the C read is
// issued one cycle earlier (c_rd_*) and the write (c_acc_*) carries address
// mt*jn + j and first = (kt == 0).
//
// PIPE_STAGES is the number of register stages the top inserts on the A and
// B paths (address stages before the buffers plus data stages after them).
// The commit, the bank selects and C_LAT move PIPE_STAGES cycles later, and
// a load is then hidden for jn >= 3*ARRAY_LEN + PIPE_STAGES.
//
// A buffer addressing: phase q uses words a_half_base + q*LD_WORDS + s,
// s = 3*(t-1) + row; they are read in reverse order s = LD_WORDS-1 .. 0 so
// that the first word ends in the last block.
//
// Interface: start (one cycle, while idle) with m_tiles, k_tiles, jn,
// a/b_half_base (word offset of the buffer half in use); busy until done
// (one cycle). The schedule (phase order, when a load may start, the
// delays) is this design's own; the paper gives the dataflow it implements:
// A stays in the blocks while a set of N/Np B blocks streams past, loading
// is three cycles per block and hidden behind computation, and partial sums
// move down an array two cycles per block.
module gemm_controller
  import nx_pkg::*;
#(
  parameter int unsigned ARRAY_LEN = 18,
  parameter int unsigned A_AW      = 13,
  parameter int unsigned B_AW      = 9,
  parameter int unsigned C_AW      = 15,
  parameter int unsigned TILE_W    = 16,
  parameter int unsigned PIPE_STAGES = 0,
  localparam int unsigned NT       = ARRAY_LEN - 1,
  localparam int unsigned LD_WORDS = 3 * (ARRAY_LEN - 1),
  localparam int unsigned C_LAT    = 2 * ARRAY_LEN + PIPE_STAGES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [TILE_W-1:0] m_tiles,
  input  logic [TILE_W-1:0] k_tiles,
  input  logic [TILE_W-1:0] jn,
  input  logic [A_AW-1:0]   a_half_base,
  input  logic [B_AW-1:0]   b_half_base,
  output logic              busy,
  output logic              done,
  output logic [31:0]       stall_cycles,
  output logic [31:0]       hidden_loads,
  // A buffer read and array load commit
  output logic              a_rd_en,
  output logic [A_AW-1:0]   a_rd_addr,
  output logic              a_commit,
  output logic              a_commit_bank,
  // B buffer reads and bank selects, one per compute block of an array
  output logic              b_rd_en   [NT],
  output logic [B_AW-1:0]   b_rd_addr [NT],
  output logic              comp_bank [NT],
  // C buffer accumulation
  output logic              c_rd_en,
  output logic [C_AW-1:0]   c_rd_addr,
  output logic              c_acc_valid,
  output logic              c_acc_first,
  output logic [C_AW-1:0]   c_acc_addr
);

  typedef struct packed {
    logic            valid;
    logic            bank;
    logic            first;
    logic [B_AW-1:0] b_addr;
    logic [C_AW-1:0] c_addr;
  } issue_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t state;

  localparam int unsigned LD_COMMIT = LD_WORDS + 2 + PIPE_STAGES;
  localparam int unsigned LDC_W     = $clog2(LD_COMMIT + 1);
  localparam int unsigned PIPE      = C_LAT;

  logic [2*TILE_W-1:0] n_phases, ld_phase, comp_phase, loaded;
  logic [TILE_W-1:0]   jcnt, kt;
  logic                ld_busy;
  logic [LDC_W-1:0]    ld_cnt;
  logic [A_AW-1:0]     ld_base;
  logic                comp_started;
  logic [B_AW-1:0]     b_base;
  logic [C_AW-1:0]     c_base;
  logic [$clog2(PIPE+2)-1:0] drain_cnt;

  issue_t cur;
  issue_t pipe [PIPE];

  logic can_issue, ld_start, ld_done, last_col, last_phase;
  logic [2*TILE_W-1:0] ld_next;

  // a phase may issue in the cycle its load commits: block 1 first uses the
  // bank one cycle later, when the B word arrives. The next load may start
  // in that cycle too, since its words reach the chains after the commit.
  assign ld_done    = ld_busy && (ld_cnt == LDC_W'(LD_COMMIT));
  assign ld_next    = ld_done ? ld_phase + 1'b1 : ld_phase;
  assign can_issue  = (state == S_RUN) &&
                      ((loaded > comp_phase) || (ld_done && (ld_phase == comp_phase)));
  assign last_col   = (jcnt == jn - 1'b1);
  assign last_phase = (comp_phase == n_phases - 1'b1);
  assign ld_start   = (state == S_RUN) && (!ld_busy || ld_done) && (ld_next < n_phases) &&
                      ((ld_next == '0) ||
                       ((ld_next == comp_phase + 1'b1) && (comp_started || can_issue)));

  always_comb begin
    cur.valid  = can_issue;
    cur.bank   = comp_phase[0];
    cur.first  = (kt == '0);
    cur.b_addr = b_half_base + b_base + B_AW'(jcnt);
    cur.c_addr = c_base + C_AW'(jcnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      done         <= 1'b0;
      n_phases     <= '0;
      ld_phase     <= '0;
      comp_phase   <= '0;
      loaded       <= '0;
      jcnt         <= '0;
      kt           <= '0;
      ld_busy      <= 1'b0;
      ld_cnt       <= '0;
      ld_base      <= '0;
      comp_started <= 1'b0;
      b_base       <= '0;
      c_base       <= '0;
      drain_cnt    <= '0;
      stall_cycles <= '0;
      hidden_loads <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state        <= S_RUN;
          n_phases     <= m_tiles * k_tiles;
          ld_phase     <= '0;
          comp_phase   <= '0;
          loaded       <= '0;
          jcnt         <= '0;
          kt           <= '0;
          ld_busy      <= 1'b0;
          ld_base      <= a_half_base;
          comp_started <= 1'b0;
          b_base       <= '0;
          c_base       <= '0;
          stall_cycles <= '0;
          hidden_loads <= '0;
        end
        S_RUN: begin
          // load engine
          if (ld_done) begin
            ld_busy  <= 1'b0;
            loaded   <= loaded + 1'b1;
            ld_phase <= ld_phase + 1'b1;
            ld_base  <= ld_base + A_AW'(LD_WORDS);
            if (ld_phase != '0) hidden_loads <= hidden_loads + 1'b1;
          end else if (ld_busy) begin
            ld_cnt <= ld_cnt + 1'b1;
          end
          if (ld_start) begin
            ld_busy <= 1'b1;
            ld_cnt  <= '0;
          end
          // compute engine
          if (can_issue) begin
            comp_started <= 1'b1;
            if (last_col) begin
              jcnt         <= '0;
              comp_started <= 1'b0;
              comp_phase   <= comp_phase + 1'b1;
              if (kt == k_tiles - 1'b1) begin
                kt     <= '0;
                b_base <= '0;
                c_base <= c_base + C_AW'(jn);
              end else begin
                kt     <= kt + 1'b1;
                b_base <= b_base + B_AW'(jn);
              end
              if (last_phase) begin
                state     <= S_DRAIN;
                drain_cnt <= '0;
              end
            end else begin
              jcnt <= jcnt + 1'b1;
            end
          end else if (comp_phase != '0) begin
            stall_cycles <= stall_cycles + 1'b1;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == $bits(drain_cnt)'(PIPE + 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // issue pipeline: pipe[d] holds the issue made d+1 cycles ago
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < PIPE; d++) pipe[d] <= '0;
    end else begin
      pipe[0] <= cur;
      for (int d = 1; d < PIPE; d++) pipe[d] <= pipe[d-1];
    end
  end

  function automatic issue_t tap(input int unsigned d);
    return (d == 0) ? cur : pipe[d-1];
  endfunction

  always_comb begin
    for (int t = 1; t <= int'(NT); t++) begin
      b_rd_en[t-1]   = tap(2*(t-1)).valid;
      b_rd_addr[t-1] = tap(2*(t-1)).b_addr;
      comp_bank[t-1] = tap(2*(t-1) + 1 + PIPE_STAGES).bank;
    end
    c_rd_en     = tap(C_LAT - 1).valid;
    c_rd_addr   = tap(C_LAT - 1).c_addr;
    c_acc_valid = pipe[C_LAT-1].valid;
    c_acc_first = pipe[C_LAT-1].first;
    c_acc_addr  = pipe[C_LAT-1].c_addr;
  end

  assign busy          = (state != S_IDLE);
  assign a_rd_en       = ld_busy && (ld_cnt < LDC_W'(LD_WORDS));
  assign a_rd_addr     = ld_base + A_AW'(LD_WORDS - 1) - A_AW'(ld_cnt);
  assign a_commit      = ld_done;
  assign a_commit_bank = ld_phase[0];

endmodule
