// format_change_in: input-side format change of a PE's operands.
//
// Maps one activation word (M bytes) and one weight-side value (M nibbles,
// i.e. M*4 bits) onto the M multipliers of the BIM.
//   8x4 mode: multiplier i gets activation byte i and weight nibble i, all
//             4-bit operands signed.
//   8x8 mode: the weight side holds m = M/2 bytes. Multiplier i < m gets the
//             high nibble of byte i (signed), multiplier m+i the low nibble of
//             byte i (unsigned); both get activation byte half*m + i, so that
//             one M-byte activation word is consumed in two cycles (half 0, 1).
// Combinational. The paper says the Type A BIM needs its inputs rearranged;
// this particular lane order is this design's choice.
module format_change_in #(
  parameter int unsigned M = 16
) (
  input  fq_pkg::bim_mode_e     mode,
  input  logic                  half,
  input  logic [M-1:0][7:0]     act_word,
  input  logic [M*4-1:0]        wt,
  output logic [M-1:0][7:0]     a,
  output logic [M-1:0][3:0]     w,
  output logic [M-1:0]          s
);
  localparam int unsigned HM = M / 2;
  always_comb begin
    for (int i = 0; i < M; i++) begin
      if (mode == fq_pkg::MODE_8X4) begin
        a[i] = act_word[i];
        w[i] = wt[i*4 +: 4];
        s[i] = 1'b1;
      end else if (i < HM) begin
        a[i] = act_word[(half ? HM : 0) + i];
        w[i] = wt[i*8 + 4 +: 4];
        s[i] = 1'b1;
      end else begin
        a[i] = act_word[(half ? HM : 0) + i - HM];
        w[i] = wt[(i-HM)*8 +: 4];
        s[i] = 1'b0;
      end
    end
  end
endmodule
