// fqbert_top: accelerator for one fully quantized BERT encoder layer.
//
// Blocks: H processing units (each N PEs with an M-multiplier bit-split
// inner-product module, plus the per-head Q/K/V/Attn buffers), the
// double-buffered weight buffer, the bias, scale and layer-norm parameter
// buffers, the input/output buffer, the softmax core, the layer-norm core
// and the stage controller. The host (embedding and task layers, weight
// streaming from off-chip memory) is outside and talks to the accelerator
// through three plain ports:
//   load port   ld_valid/ld_sel/ld_addr/ld_data writes M bytes per cycle into
//               one buffer (see ld_sel_e). Wide words are written in M-byte
//               beats: ld_addr = word * (word bytes / M) + beat. Weight loads
//               go into the weight buffer's fill bank; wb_commit hands the
//               bank to the compute side, wb_can_fill says the fill bank is
//               free. Other buffers may only be loaded while busy is low.
//   command     cmd_valid/cmd_ready with an fq_pkg::cmd_t stage command.
//   read-back   rd_en/rd_addr -> rd_data (I/O buffer, 1 cycle, busy low).
// Word layouts: weight word = for PU h, PE n, M 4-bit weights at byte
// (h*N+n)*M/2 (lane i in nibble i, little-endian); bias word = 32-bit bias
// of PU h, PE n at byte (h*N+n)*4; scale word = scale_t (bytes 4..7 s_f);
// LN parameter word = M gamma bytes then M beta bytes; I/O rows are
// row-major M-byte words.
// Timing: one beat per cycle on every PE during matrix stages; a linear
// stage of T tokens, Din inputs and Dout outputs takes about
// T * Din/M * Dout/(H*N) cycles when the weights arrive in time.
// The block structure follows the paper's block diagram; ports, layouts,
// depths and the command set are this design's own.
module fqbert_top #(
  parameter int unsigned M      = 16,
  parameter int unsigned N      = 8,
  parameter int unsigned H      = 12,
  parameter int unsigned SEQ    = 128,
  parameter int unsigned DMODEL = 768,
  parameter int unsigned DFF    = 3072,
  parameter int unsigned IOD    = 65536,
  parameter int unsigned BD     = 128,
  parameter int unsigned SD     = 16,
  parameter int unsigned LPD    = 128,
  localparam int unsigned DH    = DMODEL / H,
  localparam int unsigned WD    = DFF / M,
  localparam int unsigned WB    = H * N * M / 2,
  localparam int unsigned BB    = H * N * 4,
  localparam int unsigned QD    = (SEQ / N) * (DH / M),
  localparam int unsigned KD    = SEQ * (DH / M),
  localparam int unsigned VD    = (DH / N) * (SEQ / M),
  localparam int unsigned AD    = (SEQ / N) * (SEQ / M),
  localparam int unsigned SL    = $clog2(SEQ + 1),
  localparam int unsigned LW    = $clog2(WD + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  fq_pkg::cmd_t            cmd,
  output logic                    busy,
  input  logic                    ld_valid,
  input  fq_pkg::ld_sel_e         ld_sel,
  input  logic [23:0]             ld_addr,
  input  logic [M-1:0][7:0]       ld_data,
  input  logic                    wb_commit,
  output logic                    wb_can_fill,
  input  logic                    rd_en,
  input  logic [$clog2(IOD)-1:0]  rd_addr,
  output logic [M-1:0][7:0]       rd_data,
  output logic                    stall_w,
  output logic                    overrun
);
  import fq_pkg::*;

  // ---------------- controller ----------------
  logic [7:0]               scale_idx;
  logic                     wb_full, wb_rd_en, wb_release;
  logic [$clog2(WD)-1:0]    wb_rd_addr;
  logic [$clog2(BD)-1:0]    bias_rd_addr;
  logic                     bias_zero;
  logic                     c_rda_en, c_rdb_en;
  logic [$clog2(IOD)-1:0]   c_rda_addr, c_rdb_addr, c_wr_addr;
  logic [M-1:0]             c_wr_be;
  logic [M-1:0][7:0]        c_wr_data;
  logic                     pu_valid, pu_first, pu_last, pu_half, pu_a_signed, pu_rd_en;
  bim_mode_e                pu_mode;
  logic [1:0]               pu_act_sel, pu_wt_sel;
  logic [$clog2(N)-1:0]     pu_att_bank;
  logic [$clog2(QD)-1:0]    q_rd_addr;
  logic [$clog2(KD)-1:0]    k_rd_addr;
  logic [$clog2(VD)-1:0]    v_rd_addr;
  logic [$clog2(AD)-1:0]    a_rd_addr;
  logic [H-1:0]             y_valid, pu_ovr;
  logic [H-1:0][N-1:0][7:0] y;
  logic                     wb_en, wb_att;
  dst_e                     wb_dst;
  logic [15:0]              wb_row, wb_col;
  logic [$clog2(H)-1:0]     sm_pu;
  logic [H-1:0][N*M-1:0][7:0] att_rd;
  logic [N*M-1:0]           sm_wr_be;
  logic [$clog2(AD)-1:0]    sm_wr_addr;
  logic [N*M-1:0][7:0]      sm_wr_data;
  logic [SL-1:0]            sm_len, sm_out_idx;
  logic                     sm_in_valid, sm_in_ready, sm_out_valid;
  logic signed [7:0]        sm_in_data;
  logic [7:0]               sm_out_data;
  logic [LW-1:0]            ln_nwords, ln_out_widx, ln_paddr;
  logic [15:0]              ln_pbase;
  logic                     ln_in_valid, ln_in_ready, ln_out_valid;
  logic [M-1:0][7:0]        ln_out_word;

  controller #(.M(M), .N(N), .H(H), .SEQ(SEQ), .DH(DH), .IOD(IOD), .WD(WD), .BD(BD)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .scale_idx,
    .wb_full, .wb_rd_en, .wb_rd_addr, .wb_release, .stall_w,
    .bias_rd_addr, .bias_zero,
    .io_rda_en(c_rda_en), .io_rda_addr(c_rda_addr), .io_rdb_en(c_rdb_en), .io_rdb_addr(c_rdb_addr),
    .io_wr_be(c_wr_be), .io_wr_addr(c_wr_addr), .io_wr_data(c_wr_data),
    .pu_valid, .pu_first, .pu_last, .pu_mode, .pu_half, .pu_a_signed, .pu_act_sel, .pu_wt_sel,
    .pu_att_bank, .pu_rd_en, .q_rd_addr, .k_rd_addr, .v_rd_addr, .a_rd_addr,
    .y_valid(y_valid[0]), .y, .wb_en, .wb_dst, .wb_att, .wb_row, .wb_col,
    .sm_pu, .sm_att_word(att_rd[sm_pu]), .sm_wr_be, .sm_wr_addr, .sm_wr_data, .sm_len,
    .sm_in_valid, .sm_in_data, .sm_out_valid, .sm_out_idx, .sm_out_data,
    .ln_nwords, .ln_pbase, .ln_in_valid, .ln_in_ready, .ln_out_valid, .ln_out_widx, .ln_out_word);

  // ---------------- host load decoding ----------------
  localparam int unsigned WBEATS = WB / M;
  localparam int unsigned BBEATS = BB / M;
  logic [WB-1:0]  w_ld_be;
  logic [BB-1:0]  b_ld_be;
  logic [2*M-1:0] lp_ld_be;
  logic [7:0]     s_ld_be;
  always_comb begin
    w_ld_be = '0; b_ld_be = '0; lp_ld_be = '0; s_ld_be = '0;
    if (ld_valid && ld_sel == LD_WEIGHT) w_ld_be[(ld_addr % WBEATS) * M +: M] = '1;
    if (ld_valid && ld_sel == LD_BIAS)   b_ld_be[(ld_addr % BBEATS) * M +: M] = '1;
    if (ld_valid && ld_sel == LD_LNPARAM) lp_ld_be[ld_addr[0] * M +: M] = '1;
    if (ld_valid && ld_sel == LD_SCALE)  s_ld_be = '1;
  end

  // ---------------- buffers ----------------
  logic [WB-1:0][7:0] w_rd;
  weight_buf #(.WB(WB), .DEPTH(WD)) u_wbuf (
    .clk, .rst_n, .ld_be(w_ld_be), .ld_addr($clog2(WD)'(ld_addr / WBEATS)), .ld_data({WBEATS{ld_data}}),
    .commit(wb_commit), .can_fill(wb_can_fill),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(w_rd), .rd_full(wb_full), .release_bank(wb_release));

  logic [BB-1:0][7:0] b_rd;
  sram_1r1w #(.NB(BB), .DEPTH(BD)) u_bias_buf (
    .clk, .rd_en(1'b1), .rd_addr(bias_rd_addr), .rd_data(b_rd),
    .wr_be(b_ld_be), .wr_addr($clog2(BD)'(ld_addr / BBEATS)), .wr_data({BBEATS{ld_data}}));

  logic [7:0][7:0] s_rd;
  scale_t          scl;
  sram_1r1w #(.NB(8), .DEPTH(SD)) u_scale_buf (
    .clk, .rd_en(1'b1), .rd_addr($clog2(SD)'(scale_idx)), .rd_data(s_rd),
    .wr_be(s_ld_be), .wr_addr($clog2(SD)'(ld_addr)), .wr_data(ld_data[7:0]));
  assign scl = scale_t'(s_rd);

  logic [2*M-1:0][7:0] lp_rd;
  sram_1r1w #(.NB(2*M), .DEPTH(LPD)) u_lnp_buf (
    .clk, .rd_en(1'b1), .rd_addr($clog2(LPD)'(ln_pbase + 16'(ln_paddr))), .rd_data(lp_rd),
    .wr_be(lp_ld_be), .wr_addr($clog2(LPD)'(ld_addr >> 1)), .wr_data({2{ld_data}}));

  logic [M-1:0][7:0] rda_data, rdb_data;
  logic              h_ld_io;
  assign h_ld_io = ld_valid && ld_sel == LD_IO;
  io_buf #(.NB(M), .DEPTH(IOD)) u_iobuf (
    .clk,
    .rda_en(busy ? c_rda_en : rd_en), .rda_addr(busy ? c_rda_addr : rd_addr), .rda_data,
    .rdb_en(c_rdb_en), .rdb_addr(c_rdb_addr), .rdb_data,
    .wr_be(h_ld_io ? '1 : c_wr_be), .wr_addr(h_ld_io ? $clog2(IOD)'(ld_addr) : c_wr_addr),
    .wr_data(h_ld_io ? ld_data : c_wr_data));
  assign rd_data = rda_data;

  // ---------------- processing units ----------------
  for (genvar h = 0; h < H; h++) begin : g_pu
    logic [N-1:0][M*4-1:0] w_slice;
    logic [N-1:0][31:0]    b_slice;
    always_comb begin
      for (int n = 0; n < N; n++) begin
        w_slice[n] = w_rd[(h*N + n) * (M/2) +: M/2];
        b_slice[n] = bias_zero ? 32'd0 : b_rd[(h*N + n) * 4 +: 4];
      end
    end
    pu #(.M(M), .N(N), .SEQ(SEQ), .DH(DH)) u_pu (
      .clk, .rst_n,
      .in_valid(pu_valid), .first(pu_first), .last(pu_last), .mode(pu_mode), .half(pu_half),
      .a_signed(pu_a_signed), .act_sel(pu_act_sel), .wt_sel(pu_wt_sel), .att_bank(pu_att_bank),
      .io_word(rda_data), .w_word(w_slice), .bias(b_slice), .sf(scl.sf), .shift(scl.shift),
      .rd_en(pu_rd_en), .q_rd_addr, .k_rd_addr, .v_rd_addr, .a_rd_addr,
      .wb_en, .wb_dst, .wb_att, .wb_row, .wb_col,
      .a_rd_data(att_rd[h]),
      .a_ext_be((sm_pu == h) ? sm_wr_be : '0), .a_ext_addr(sm_wr_addr), .a_ext_data(sm_wr_data),
      .y_valid(y_valid[h]), .y(y[h]), .overrun(pu_ovr[h]));
  end
  assign overrun = |pu_ovr;

  // ---------------- softmax and layer-norm cores ----------------
  softmax_core #(.MAXL(SEQ)) u_softmax (
    .clk, .rst_n,
    .lut_we(ld_valid && ld_sel == LD_SMLUT), .lut_addr(ld_addr[7:0]), .lut_data(ld_data[0]),
    .len(sm_len), .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(sm_in_data),
    .out_valid(sm_out_valid), .out_idx(sm_out_idx), .out_data(sm_out_data));

  logic [M-1:0][7:0] ln_gamma, ln_beta;
  assign ln_gamma = lp_rd[M-1:0];
  assign ln_beta  = lp_rd[2*M-1:M];
  ln_core #(.LANES(M), .MAXWORDS(WD)) u_ln (
    .clk, .rst_n, .nwords(ln_nwords), .s1(scl.s1), .s2(scl.s2), .ln_shift(scl.ln_shift),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .a(rda_data), .b(rdb_data),
    .param_addr(ln_paddr), .gamma(ln_gamma), .beta(ln_beta),
    .out_valid(ln_out_valid), .out_widx(ln_out_widx), .out_word(ln_out_word));

  a_sm_ready: assert property (@(posedge clk) disable iff (!rst_n) sm_in_valid |-> sm_in_ready)
    else $error("fqbert_top: softmax core not ready for a score");
endmodule
