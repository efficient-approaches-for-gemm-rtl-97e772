// nx_pkg: constants and types shared by the tensor-block GEMM accelerator.
//
// The accelerator multiplies int8 matrices on a 2D layout of AI Tensor Blocks
// (TBs) working in int8 tensor cascade mode. Every TB holds three 10-element
// operand vectors, so one operand word is ten int8 values packed into 80 bits
// (element e in bits [8e+7:8e]). Partial sums are 32-bit two's complement;
// the last TB of an array exposes them as 24-bit values.
//
// The widths below (80-bit operand port, ten-element dot products, three dot
// engines, 32-bit accumulation, 24-bit array output) are the tensor block's
// own numbers. The default layout is TB_len x Kp x Np x Mp = 18 x 16 x 4 x 3
// with a native buffer size of 639 x 2720 x 1008, the highest-throughput
// configuration of the evaluated design space.
package nx_pkg;

  localparam int unsigned DOT_LEN   = 10;   // elements per dot-product engine
  localparam int unsigned N_DOT     = 3;    // dot engines (and outputs) per TB
  localparam int unsigned OPW       = 8 * DOT_LEN;  // 80-bit operand word
  localparam int unsigned ACCW      = 32;   // accumulation width
  localparam int unsigned OUTW      = 24;   // data_out width of a TB array

  typedef logic [OPW-1:0]          op_word_t;   // ten packed int8 values
  typedef logic signed [ACCW-1:0]  acc_t;
  typedef logic signed [OUTW-1:0]  out_t;

  // Signed 10-element int8 dot product of two packed operand words.
  function automatic acc_t dot10(input op_word_t a, input op_word_t b);
    acc_t s;
    s = '0;
    for (int e = 0; e < DOT_LEN; e++) begin
      s += acc_t'($signed(a[8*e +: 8])) * acc_t'($signed(b[8*e +: 8]));
    end
    return s;
  endfunction

endpackage
