// fq_pkg: shared types and constants of the fully quantized BERT accelerator.
//
// The accelerator computes one BERT encoder layer with 8-bit activations and
// 4-bit weights. Matrix products run on an array of processing units (PUs),
// each holding N processing elements (PEs) built around a bit-split inner
// product module (BIM) of M multipliers. The BIM runs either as M 8x4-bit
// products (activation x weight) or, with the 8-bit operand split into two
// nibbles, as M/2 8x8-bit products (Q.K^T and Att.V).
//
// Default sizes follow the ZCU102 configuration of the published design:
// 12 PUs, N = 8 PEs per PU, M = 16 multipliers per BIM, BERT-base shapes
// (sequence 128, hidden 768, 12 heads, FFN 3072). Stage command encoding,
// buffer layouts and the host load port are this design's own choices.
package fq_pkg;

  // BIM operating mode: 8-bit x 4-bit or 8-bit x 8-bit
  typedef enum logic {MODE_8X4 = 1'b0, MODE_8X8 = 1'b1} bim_mode_e;

  // Stage operations sequenced by the controller (dataflow of one encoder layer)
  typedef enum logic [2:0] {
    OP_LINEAR  = 3'd0,   // X.W  (8x4), activations from the I/O buffer
    OP_QK      = 3'd1,   // Q.K^T (8x8), one head per PU, scores to Attn buffer
    OP_SOFTMAX = 3'd2,   // softmax over each score row, in place
    OP_AV      = 3'd3,   // Att.V (8x8), result to the I/O buffer
    OP_ADDLN   = 3'd4    // residual add + layer normalization
  } op_e;

  // Destination of a linear stage
  typedef enum logic [1:0] {DST_Q = 2'd0, DST_K = 2'd1, DST_V = 2'd2, DST_IO = 2'd3} dst_e;

  // Host load port targets
  typedef enum logic [2:0] {
    LD_IO = 3'd0, LD_WEIGHT = 3'd1, LD_BIAS = 3'd2, LD_SCALE = 3'd3,
    LD_LNPARAM = 3'd4, LD_SMLUT = 3'd5
  } ld_sel_e;

  // One stage command. Sizes are in the units noted; base addresses are
  // word addresses of the I/O buffer (one word = M bytes).
  typedef struct packed {
    op_e         op;
    dst_e        dst;        // linear: where the result goes
    logic [15:0] rows;       // tokens processed (<= SEQ)
    logic [15:0] kwords;     // linear: input words per row (Din / M)
    logic [15:0] groups;     // linear: output groups per PU (Dout / (H*N))
    logic [15:0] src_base;   // I/O buffer base of the input (ADDLN: vector a)
    logic [15:0] srcb_base;  // ADDLN: base of vector b
    logic [15:0] dst_base;   // I/O buffer base of the output
    logic [7:0]  scale_idx;  // entry of the scale buffer used by this stage
    logic [15:0] bias_base;  // bias buffer word of group 0 (linear)
    logic        bias_en;    // add bias (linear stages)
  } cmd_t;

  // Scale buffer entry: s_f (32-bit integer multiplier) and right shift of
  // the requantizer; LN stage uses s1/s2 for its two input vectors.
  typedef struct packed {
    logic [31:0] sf;
    logic [5:0]  shift;
    logic [7:0]  s1;
    logic [7:0]  s2;
    logic [5:0]  ln_shift;
    logic [3:0]  pad;
  } scale_t;  // 64 bits

  // Saturate a signed value to int8
  function automatic logic signed [7:0] sat8(input logic signed [63:0] v);
    if (v > 64'sd127) return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else return v[7:0];
  endfunction

endpackage
