// quant: requantizer of a finished dot product.
//
// y = sat8( round( (acc + bias) * s_f / 2^shift ) )
// where s_f = s_y / (s_a * s_w) is held as a 32-bit integer with `shift`
// fractional bits. Three pipeline stages: bias add, multiply, round/shift/
// saturate; latency 3 cycles, one result per cycle.
// The paper gives the formula y_I = (sum a_I*w_I + b_I) * s_f with a 32-bit
// s_f and says requantization takes more than one cycle; the explicit shift
// (fixed-point s_f) and round-half-up are this design's choices.
module quant (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] acc,
  input  logic signed [31:0] bias,
  input  logic [31:0]        sf,
  input  logic [5:0]         shift,
  output logic               out_valid,
  output logic signed [7:0]  y
);
  logic               v1, v2;
  logic signed [32:0] x1;
  logic signed [63:0] p2;
  logic [5:0]         sh1, sh2;
  logic [31:0]        sf1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      x1 <= '0; p2 <= '0; sh1 <= '0; sf1 <= '0; sh2 <= '0; y <= '0;
    end else begin
      v1  <= in_valid;
      x1  <= 33'(acc) + 33'(bias);
      sh1 <= shift;
      sf1 <= sf;
      v2  <= v1;
      p2  <= 64'(x1) * $signed({1'b0, sf1});
      sh2 <= sh1;
      out_valid <= v2;
      y <= fq_pkg::sat8((p2 + ((sh2 == 0) ? 64'sd0 : (64'sd1 <<< (sh2 - 1)))) >>> sh2);
    end
  end
endmodule
