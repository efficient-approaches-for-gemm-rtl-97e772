// nx_gemm_accel: int8 GEMM accelerator built from AI Tensor Blocks.
//
// The accelerator computes C = A x B (int8 inputs, 32-bit results) for
// matrices up to the native buffer size M_NAT x K_NAT x N_NAT, entirely out
// of on-chip A, B and C buffers. The compute part is a 2D layout of tensor
// arrays described by four parameters:
//   ARRAY_LEN  blocks per array (the first is only a loading port),
//   KP         arrays per reduction group, each on a different K slice,
//   NP         reduction groups per Np block, same A, different B columns,
//   MP         Np blocks, different A rows, same B columns.
// One pass over the layout (the compute GEMM size) is
// (3*MP) x ((ARRAY_LEN-1)*KP*10) x NP; M, K and N must be multiples of it.
//
// Buffers (all simple dual-port RAMs, double-buffered):
//   A: MP*KP partitions of 80-bit words; partition mp*KP+kp feeds array kp
//      of every reduction group of Np block mp (broadcast over NP).
//      Word address h*A_HALF + (mt*k_tiles + kt)*3*(ARRAY_LEN-1) + 3*(t-1) + r
//      holds A[mt*3*MP + 3*mp + r][kt*DK + (kp*(ARRAY_LEN-1)+t-1)*10 + e],
//      e = 0..9 in bits [8e+7:8e].
//   B: (ARRAY_LEN-1)*KP*NP partitions; partition (np*KP+kp)*(ARRAY_LEN-1)+t-1
//      feeds block t of array kp of reduction group np in every Np block
//      (broadcast over MP). Address h*B_HALF + kt*jn + j holds
//      B[kt*DK + (kp*(ARRAY_LEN-1)+t-1)*10 + e][j*NP + np].
//   C: MP*NP*3 partitions, each with two halves of C_HALF 32-bit words;
//      partition (mp*NP+np)*3 + r, address mt*jn + j holds
//      C[mt*3*MP + 3*mp + r][j*NP + np].
// The load units write A and B (write-only) from valid/ready streams, round
// robin over the partitions; the store unit reads C (read-only) from the half
// the compute side is not using. Compute reads A and B from the half given
// by ab_half and accumulates into C half c_half, so the next matrices can be
// loaded and the last results stored while a product runs.
//
// Operation: load A and B, then pulse start with m_tiles = M/(3*MP),
// k_tiles = K/DK and jn = N/NP (jn >= 2); busy drops and done pulses when all
// results are in C. stall_cycles counts cycles in which an A load could not
// be hidden (jn < 3*ARRAY_LEN); hidden_loads counts loads overlapped with
// computation; bank1_commits counts A commits into operand bank 1 and
// k_accums counts C updates that add to an earlier K tile's sum. All four
// clear at start.
// ADDR_PIPE register stages can be put on the A and B read addresses and
// DATA_PIPE stages on the read data, to shorten the broadcast paths; the
// controller shifts its timing by their sum, and a load is then hidden for
// jn >= 3*ARRAY_LEN + ADDR_PIPE + DATA_PIPE. The stage counts are not given
// for the published builds, so both default to 0.
// The layout, the broadcast pattern, the partition counts and depths follow
// the design's equations (A_part = MP*KP, B_part = (ARRAY_LEN-1)*KP*NP,
// C_part = 2*MP*NP*3); the defaults are the 18 x 16 x 4 x 3 layout with a
// 639 x 2720 x 1008 native size. Word orders and handshakes are this
// design's choice.
module nx_gemm_accel
  import nx_pkg::*;
#(
  parameter int unsigned ARRAY_LEN = 18,
  parameter int unsigned KP        = 16,
  parameter int unsigned NP        = 4,
  parameter int unsigned MP        = 3,
  parameter int unsigned M_NAT     = 639,
  parameter int unsigned K_NAT     = 2720,
  parameter int unsigned N_NAT     = 1008,
  parameter int unsigned ADDR_PIPE = 0,
  parameter int unsigned DATA_PIPE = 0,
  localparam int unsigned NT       = ARRAY_LEN - 1,
  localparam int unsigned DM       = 3 * MP,
  localparam int unsigned DK       = NT * KP * DOT_LEN,
  localparam int unsigned LD_WORDS = 3 * NT,
  localparam int unsigned A_PART   = MP * KP,
  localparam int unsigned B_PART   = NT * KP * NP,
  localparam int unsigned C_PART   = MP * NP * N_DOT,       // per half
  localparam int unsigned A_HALF   = (M_NAT / DM) * (K_NAT / DK) * LD_WORDS,
  localparam int unsigned B_HALF   = (K_NAT / DK) * (N_NAT / NP),
  localparam int unsigned C_HALF   = (M_NAT / DM) * (N_NAT / NP),
  localparam int unsigned A_AW     = $clog2(2 * A_HALF),
  localparam int unsigned B_AW     = $clog2(2 * B_HALF),
  localparam int unsigned C_AW     = $clog2(C_HALF),
  localparam int unsigned TILE_W   = 16,
  localparam int unsigned CW       = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // compute control
  input  logic              start,
  input  logic [TILE_W-1:0] m_tiles,
  input  logic [TILE_W-1:0] k_tiles,
  input  logic [TILE_W-1:0] jn,
  input  logic              ab_half,
  input  logic              c_half,
  output logic              busy,
  output logic              done,
  output logic [31:0]       stall_cycles,
  output logic [31:0]       hidden_loads,
  output logic [31:0]       bank1_commits,
  output logic [31:0]       k_accums,
  // A load stream
  input  logic              a_ld_start,
  input  logic [A_AW-1:0]   a_ld_base,
  input  logic [CW-1:0]     a_ld_count,
  output logic              a_ld_busy,
  input  logic              a_in_valid,
  output logic              a_in_ready,
  input  op_word_t          a_in_data,
  // B load stream
  input  logic              b_ld_start,
  input  logic [B_AW-1:0]   b_ld_base,
  input  logic [CW-1:0]     b_ld_count,
  output logic              b_ld_busy,
  input  logic              b_in_valid,
  output logic              b_in_ready,
  input  op_word_t          b_in_data,
  // C store stream
  input  logic              c_st_start,
  input  logic [C_AW-1:0]   c_st_base,
  input  logic [CW-1:0]     c_st_count,
  output logic              c_st_busy,
  output logic              c_out_valid,
  input  logic              c_out_ready,
  output acc_t              c_out_data
);

  // ---------------- controller ----------------
  logic              a_rd_en, a_commit, a_commit_bank;
  logic [A_AW-1:0]   a_rd_addr;
  logic              b_rd_en   [NT];
  logic [B_AW-1:0]   b_rd_addr [NT];
  logic              comp_bank [NT];
  logic              c_rd_en, c_acc_valid, c_acc_first;
  logic [C_AW-1:0]   c_rd_addr, c_acc_addr;

  gemm_controller #(
    .ARRAY_LEN(ARRAY_LEN), .A_AW(A_AW), .B_AW(B_AW), .C_AW(C_AW), .TILE_W(TILE_W),
    .PIPE_STAGES(ADDR_PIPE + DATA_PIPE)
  ) u_ctrl (
    .clk, .rst_n, .start, .m_tiles, .k_tiles, .jn,
    .a_half_base (ab_half ? A_AW'(A_HALF) : '0),
    .b_half_base (ab_half ? B_AW'(B_HALF) : '0),
    .busy, .done, .stall_cycles, .hidden_loads,
    .a_rd_en, .a_rd_addr, .a_commit, .a_commit_bank,
    .b_rd_en, .b_rd_addr, .comp_bank,
    .c_rd_en, .c_rd_addr, .c_acc_valid, .c_acc_first, .c_acc_addr
  );

  // activity counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank1_commits <= '0;
      k_accums      <= '0;
    end else if (start && !busy) begin
      bank1_commits <= '0;
      k_accums      <= '0;
    end else begin
      if (a_commit && a_commit_bank) bank1_commits <= bank1_commits + 1'b1;
      if (c_acc_valid && !c_acc_first) k_accums <= k_accums + 1'b1;
    end
  end

  // ---------------- A buffer ----------------
  logic            a_wr_en [A_PART];
  logic [A_AW-1:0] a_wr_addr;
  op_word_t        a_wr_data;
  op_word_t        a_rdata [A_PART];
  op_word_t        a_ram_q [A_PART];
  logic            a_rd_en_p;
  logic [A_AW-1:0] a_rd_addr_p;

  pipe_delay #(.WIDTH(1 + A_AW), .DEPTH(ADDR_PIPE)) u_a_apipe (
    .clk, .rst_n, .d({a_rd_en, a_rd_addr}), .q({a_rd_en_p, a_rd_addr_p})
  );

  buffer_load_unit #(.WIDTH(OPW), .PARTS(A_PART), .AW(A_AW), .CW(CW)) u_a_load (
    .clk, .rst_n, .start(a_ld_start), .base(a_ld_base), .count(a_ld_count),
    .busy(a_ld_busy), .in_valid(a_in_valid), .in_ready(a_in_ready),
    .in_data(a_in_data), .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data)
  );

  for (genvar p = 0; p < A_PART; p++) begin : g_abuf
    sdp_ram #(.WIDTH(OPW), .DEPTH(2 * A_HALF)) u_ram (
      .clk, .we(a_wr_en[p]), .waddr(a_wr_addr), .wdata(a_wr_data),
      .re(a_rd_en_p), .raddr(a_rd_addr_p), .rdata(a_ram_q[p])
    );
    pipe_delay #(.WIDTH(OPW), .DEPTH(DATA_PIPE)) u_dpipe (
      .clk, .rst_n, .d(a_ram_q[p]), .q(a_rdata[p])
    );
  end

  // ---------------- B buffer ----------------
  logic            b_wr_en [B_PART];
  logic [B_AW-1:0] b_wr_addr;
  op_word_t        b_wr_data;
  op_word_t        b_rdata [B_PART];
  op_word_t        b_ram_q [B_PART];
  logic            b_rd_en_p   [NT];
  logic [B_AW-1:0] b_rd_addr_p [NT];

  for (genvar t = 0; t < NT; t++) begin : g_b_apipe
    pipe_delay #(.WIDTH(1 + B_AW), .DEPTH(ADDR_PIPE)) u_apipe (
      .clk, .rst_n, .d({b_rd_en[t], b_rd_addr[t]}), .q({b_rd_en_p[t], b_rd_addr_p[t]})
    );
  end

  buffer_load_unit #(.WIDTH(OPW), .PARTS(B_PART), .AW(B_AW), .CW(CW)) u_b_load (
    .clk, .rst_n, .start(b_ld_start), .base(b_ld_base), .count(b_ld_count),
    .busy(b_ld_busy), .in_valid(b_in_valid), .in_ready(b_in_ready),
    .in_data(b_in_data), .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data)
  );

  for (genvar p = 0; p < B_PART; p++) begin : g_bbuf
    sdp_ram #(.WIDTH(OPW), .DEPTH(2 * B_HALF)) u_ram (
      .clk, .we(b_wr_en[p]), .waddr(b_wr_addr), .wdata(b_wr_data),
      .re(b_rd_en_p[p % NT]), .raddr(b_rd_addr_p[p % NT]), .rdata(b_ram_q[p])
    );
    pipe_delay #(.WIDTH(OPW), .DEPTH(DATA_PIPE)) u_dpipe (
      .clk, .rst_n, .d(b_ram_q[p]), .q(b_rdata[p])
    );
  end

  // ---------------- TB layout, adder trees, C buffer ----------------
  logic            c_st_rd_en;
  logic [C_AW-1:0] c_st_rd_addr;
  logic [ACCW-1:0] c_st_rdata [C_PART];

  for (genvar mp = 0; mp < MP; mp++) begin : g_mp
    for (genvar np = 0; np < NP; np++) begin : g_np
      out_t arr_out [KP][N_DOT];
      acc_t grp_sum [N_DOT];

      for (genvar kp = 0; kp < KP; kp++) begin : g_kp
        op_word_t b_in [NT];
        for (genvar t = 0; t < NT; t++) begin : g_b
          assign b_in[t] = b_rdata[(np * KP + kp) * NT + t];
        end
        tensor_array #(.ARRAY_LEN(ARRAY_LEN)) u_array (
          .clk, .rst_n,
          .a_in        (a_rdata[mp * KP + kp]),
          .b_in        (b_in),
          .comp_bank   (comp_bank),
          .load_commit (a_commit),
          .load_bank   (a_commit_bank),
          .data_out    (arr_out[kp])
        );
      end

      reduction_adder_tree #(.KP(KP)) u_tree (
        .clk, .rst_n, .in_data(arr_out), .sum(grp_sum)
      );

      for (genvar r = 0; r < N_DOT; r++) begin : g_c
        c_buffer_partition #(.DEPTH(C_HALF)) u_cpart (
          .clk,
          .comp_half   (c_half),
          .acc_rd_en   (c_rd_en),
          .acc_rd_addr (c_rd_addr),
          .acc_valid   (c_acc_valid),
          .acc_first   (c_acc_first),
          .acc_addr    (c_acc_addr),
          .acc_data    (grp_sum[r]),
          .st_rd_en    (c_st_rd_en),
          .st_rd_addr  (c_st_rd_addr),
          .st_rd_data  (c_st_rdata[(mp * NP + np) * N_DOT + r])
        );
      end
    end
  end

  // ---------------- C store unit ----------------
  logic [ACCW-1:0] c_out_bits;

  c_store_unit #(.WIDTH(ACCW), .PARTS(C_PART), .AW(C_AW), .CW(CW)) u_c_store (
    .clk, .rst_n, .start(c_st_start), .base(c_st_base), .count(c_st_count),
    .busy(c_st_busy), .rd_en(c_st_rd_en), .rd_addr(c_st_rd_addr),
    .rd_data(c_st_rdata), .out_valid(c_out_valid), .out_ready(c_out_ready),
    .out_data(c_out_bits)
  );
  assign c_out_data = acc_t'(c_out_bits);

  // the native size must be a whole number of compute tiles
  initial begin
    assert (M_NAT % DM == 0 && K_NAT % DK == 0 && N_NAT % NP == 0)
      else $error("native size is not a multiple of the compute GEMM size");
  end

endmodule
