// pe: processing element, one output element of a matrix-vector product.
//
// Chain: format_change_in -> bim -> accumulator (Accu + double Psum Buf)
// -> quant. Over a sequence of beats marked first..last the PE accumulates
// bias + sum(act * weight) and then requantizes it to int8. One beat per
// cycle; M products per beat in 8x4 mode, M/2 in 8x8 mode.
// Timing: y_valid is seen 4 clock edges after the edge that takes the
// `last` beat (psum hand-over, then 3 quant stages) and the next output may start on the cycle after
// `last`. Consecutive outputs must be at least 2 beats long.
// Following the paper: BIM, Accu, double-buffered Psum Buf, Quant in this
// order. Loading the bias as the accumulator's initial value (rather than
// adding it in the requantizer) is this design's choice.
module pe #(
  parameter int unsigned M = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic               last,
  input  fq_pkg::bim_mode_e  mode,
  input  logic               half,
  input  logic               a_signed,
  input  logic [M-1:0][7:0]  act_word,
  input  logic [M*4-1:0]     wt,
  input  logic signed [31:0] bias,
  input  logic [31:0]        sf,
  input  logic [5:0]         shift,
  output logic               y_valid,
  output logic signed [7:0]  y,
  output logic               overrun
);
  localparam int unsigned OW = 14 + $clog2(M) + 4 + 1;

  logic [M-1:0][7:0]   a;
  logic [M-1:0][3:0]   w;
  logic [M-1:0]        s;
  logic signed [OW-1:0] psum;
  logic                 acc_valid;
  logic signed [31:0]   acc_sum;

  format_change_in #(.M(M)) u_fc (
    .mode, .half, .act_word, .wt, .a, .w, .s);

  bim #(.M(M)) u_bim (.mode, .a_signed, .a, .w, .s, .out(psum));

  accumulator #(.IW(OW), .AW(32)) u_acc (
    .clk, .rst_n, .in_valid, .first, .last, .psum, .init(bias),
    .out_valid(acc_valid), .out_ready(1'b1), .out_sum(acc_sum), .overrun);

  quant u_q (
    .clk, .rst_n, .in_valid(acc_valid), .acc(acc_sum), .bias(32'sd0),
    .sf, .shift, .out_valid(y_valid), .y);
endmodule
