// pu: processing unit, N PEs sharing one activation stream, plus the
// per-head Q, K, V and Attn buffers.
//
// Each beat, one activation word (M bytes) is broadcast to all N PEs and
// each PE gets its own weight-side value (M nibbles or M/2 bytes), so the
// PU produces N outputs of a matrix product at once.
//   activation mux: I/O buffer word | K buffer word | Attn buffer bank
//   weight mux:     weight buffer slice | Q buffer bank n | V^T buffer bank n
// The PU-local buffers are read with the addresses the controller drives
// (1-cycle latency; the controller issues the beat's control one cycle after
// the addresses). PE results are written back through format_change_out
// into Q/K/V (linear stages) or Attn (Q.K^T), tagged by row/col; the Attn
// buffer can also be read and written from outside by the softmax stage.
// PE results are also brought out (y, y_valid) for the I/O buffer path.
// Following the paper's block diagram: N PEs, a W/Q/V mux and a
// K/Attn/input mux in front of a format change, per-PU Q/K/V/Attn buffers
// behind a second format change. Buffer layouts are this design's choices.
module pu #(
  parameter int unsigned M   = 16,
  parameter int unsigned N   = 8,
  parameter int unsigned SEQ = 128,
  parameter int unsigned DH  = 64,
  localparam int unsigned QD = (SEQ / N) * (DH / M),
  localparam int unsigned KD = SEQ * (DH / M),
  localparam int unsigned VD = (DH / N) * (SEQ / M),
  localparam int unsigned AD = (SEQ / N) * (SEQ / M)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // beat control (aligned with buffer read data)
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  fq_pkg::bim_mode_e        mode,
  input  logic                     half,
  input  logic                     a_signed,
  input  logic [1:0]               act_sel,   // 0 I/O, 1 K, 2 Attn
  input  logic [1:0]               wt_sel,    // 0 W, 1 Q, 2 V
  input  logic [$clog2(N)-1:0]     att_bank,
  input  logic [M-1:0][7:0]        io_word,
  input  logic [N-1:0][M*4-1:0]    w_word,
  input  logic [N-1:0][31:0]       bias,
  input  logic [31:0]              sf,
  input  logic [5:0]               shift,
  // buffer read addresses (one cycle ahead of the beat)
  input  logic                     rd_en,
  input  logic [$clog2(QD)-1:0]    q_rd_addr,
  input  logic [$clog2(KD)-1:0]    k_rd_addr,
  input  logic [$clog2(VD)-1:0]    v_rd_addr,
  input  logic [$clog2(AD)-1:0]    a_rd_addr,
  // result write-back tag (aligned with y_valid)
  input  logic                     wb_en,
  input  fq_pkg::dst_e             wb_dst,
  input  logic                     wb_att,
  input  logic [15:0]              wb_row,
  input  logic [15:0]              wb_col,
  // Attn buffer access for the softmax stage
  output logic [N*M-1:0][7:0]      a_rd_data,
  input  logic [N*M-1:0]           a_ext_be,
  input  logic [$clog2(AD)-1:0]    a_ext_addr,
  input  logic [N*M-1:0][7:0]      a_ext_data,
  // results
  output logic                     y_valid,
  output logic [N-1:0][7:0]        y,
  output logic                     overrun
);
  logic [N*M-1:0][7:0] q_rd, v_rd;
  logic [M-1:0][7:0]   k_rd;
  logic [M-1:0][7:0]   act;
  logic [N-1:0][M*4-1:0] wt;
  logic [N-1:0]        yv, ov;

  // write-back through the output format change
  logic [N*M-1:0]          q_be, v_be, a_be;
  logic [M-1:0]            k_be;
  logic [$clog2(QD)-1:0]   q_wa;
  logic [$clog2(KD)-1:0]   k_wa;
  logic [$clog2(VD)-1:0]   v_wa;
  logic [$clog2(AD)-1:0]   a_wa;
  logic [N*M-1:0][7:0]     q_wd, v_wd, a_wd;
  logic [M-1:0][7:0]       k_wd;

  format_change_out #(.M(M), .N(N), .SEQ(SEQ), .DH(DH)) u_fco (
    .valid(wb_en), .dst(wb_dst), .to_att(wb_att), .row(wb_row), .col(wb_col), .y,
    .q_be, .q_addr(q_wa), .q_data(q_wd), .k_be, .k_addr(k_wa), .k_data(k_wd),
    .v_be, .v_addr(v_wa), .v_data(v_wd), .a_be, .a_addr(a_wa), .a_data(a_wd));

  sram_1r1w #(.NB(N*M), .DEPTH(QD)) u_qbuf (
    .clk, .rd_en, .rd_addr(q_rd_addr), .rd_data(q_rd), .wr_be(q_be), .wr_addr(q_wa), .wr_data(q_wd));
  sram_1r1w #(.NB(M), .DEPTH(KD)) u_kbuf (
    .clk, .rd_en, .rd_addr(k_rd_addr), .rd_data(k_rd), .wr_be(k_be), .wr_addr(k_wa), .wr_data(k_wd));
  sram_1r1w #(.NB(N*M), .DEPTH(VD)) u_vbuf (
    .clk, .rd_en, .rd_addr(v_rd_addr), .rd_data(v_rd), .wr_be(v_be), .wr_addr(v_wa), .wr_data(v_wd));
  sram_1r1w #(.NB(N*M), .DEPTH(AD)) u_abuf (
    .clk, .rd_en, .rd_addr(a_rd_addr), .rd_data(a_rd_data),
    .wr_be(|a_ext_be ? a_ext_be : a_be), .wr_addr(|a_ext_be ? a_ext_addr : a_wa),
    .wr_data(|a_ext_be ? a_ext_data : a_wd));

  // input muxes
  always_comb begin
    unique case (act_sel)
      2'd1:    act = k_rd;
      2'd2:    act = a_rd_data[att_bank*M +: M];
      default: act = io_word;
    endcase
    for (int n = 0; n < N; n++) begin
      unique case (wt_sel)
        2'd1:    wt[n] = half ? q_rd[n*M + M/2 +: M/2] : q_rd[n*M +: M/2];
        2'd2:    wt[n] = half ? v_rd[n*M + M/2 +: M/2] : v_rd[n*M +: M/2];
        default: wt[n] = w_word[n];
      endcase
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_pe
    pe #(.M(M)) u_pe (
      .clk, .rst_n, .in_valid, .first, .last, .mode, .half, .a_signed,
      .act_word(act), .wt(wt[n]), .bias(bias[n]), .sf, .shift,
      .y_valid(yv[n]), .y(y[n]), .overrun(ov[n]));
  end

  assign y_valid = yv[0];
  assign overrun = |ov;
endmodule
