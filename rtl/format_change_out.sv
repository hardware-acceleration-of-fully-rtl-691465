// format_change_out: output-side format change of a PU.
//
// Takes the N int8 results that the N PEs of a PU produce together and
// computes byte enables, word address and data for the PU-local buffer they
// go to, so that each buffer is laid out the way its reader consumes it:
//   Q    (N banks, bank = row mod N): a PE reads Q row (ig*N + n) in Q.K^T;
//        result (row, col+n) -> addr (row/N)*(DH/M) + col/M,
//        byte (row mod N)*M + col mod M + n
//   K    (row-major M-byte words, broadcast to all PEs in Q.K^T):
//        (row, col+n) -> addr row*(DH/M) + col/M, byte col mod M + n
//   V    stored transposed (bank n holds V^T row col+n) for Att.V:
//        (row, col+n) -> addr (col/N)*(SEQ/M) + row/M, byte n*M + row mod M
//   ATT  scores of Q.K^T, PE n gives row (row+n), column col:
//        -> addr (row/N)*(SEQ/M) + col/M, byte n*M + col mod M
// Combinational. Requires N <= M, N dividing M, and col a multiple of N.
// The paper shows format-change blocks at the PU output feeding the Q, K,
// V and Attn buffers; these layouts are this design's choice.
module format_change_out #(
  parameter int unsigned M   = 16,
  parameter int unsigned N   = 8,
  parameter int unsigned SEQ = 128,
  parameter int unsigned DH  = 64,
  localparam int unsigned QD = (SEQ / N) * (DH / M),
  localparam int unsigned KD = SEQ * (DH / M),
  localparam int unsigned VD = (DH / N) * (SEQ / M),
  localparam int unsigned AD = (SEQ / N) * (SEQ / M)
) (
  input  logic                    valid,
  input  fq_pkg::dst_e            dst,
  input  logic                    to_att,
  input  logic [15:0]             row,
  input  logic [15:0]             col,
  input  logic [N-1:0][7:0]       y,
  output logic [N*M-1:0]          q_be,
  output logic [$clog2(QD)-1:0]   q_addr,
  output logic [N*M-1:0][7:0]     q_data,
  output logic [M-1:0]            k_be,
  output logic [$clog2(KD)-1:0]   k_addr,
  output logic [M-1:0][7:0]       k_data,
  output logic [N*M-1:0]          v_be,
  output logic [$clog2(VD)-1:0]   v_addr,
  output logic [N*M-1:0][7:0]     v_data,
  output logic [N*M-1:0]          a_be,
  output logic [$clog2(AD)-1:0]   a_addr,
  output logic [N*M-1:0][7:0]     a_data
);
  always_comb begin
    q_be = '0; k_be = '0; v_be = '0; a_be = '0;
    q_data = '0; k_data = '0; v_data = '0; a_data = '0;
    q_addr = $clog2(QD)'((row / N) * (DH / M) + col / M);
    k_addr = $clog2(KD)'(row * (DH / M) + col / M);
    v_addr = $clog2(VD)'((col / N) * (SEQ / M) + row / M);
    a_addr = $clog2(AD)'((row / N) * (SEQ / M) + col / M);
    for (int n = 0; n < N; n++) begin
      int qb, kb, vb, ab;
      qb = int'(row % N) * M + int'(col % M) + n;
      kb = int'(col % M) + n;
      vb = n * M + int'(row % M);
      ab = n * M + int'(col % M);
      q_data[qb] = y[n];
      k_data[kb] = y[n];
      v_data[vb] = y[n];
      a_data[ab] = y[n];
      if (valid && to_att)                          a_be[ab] = 1'b1;
      else if (valid && dst == fq_pkg::DST_Q)       q_be[qb] = 1'b1;
      else if (valid && dst == fq_pkg::DST_K)       k_be[kb] = 1'b1;
      else if (valid && dst == fq_pkg::DST_V)       v_be[vb] = 1'b1;
    end
  end
endmodule
