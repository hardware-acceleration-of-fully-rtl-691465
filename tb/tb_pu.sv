// tb_pu: one processing unit (M=8, N=4, sequence 8, head width 8).
// Phase 1: 8x4 products from the I/O-buffer input with per-PE weights and
// biases; every result is checked against an integer model and written into
// the PU's K buffer through the output format change (rows 0..7, columns
// 0..3 and 4..7).
// Phase 2: 8x8 products with the K buffer as activation source (two beats
// per 8-byte row, half 0 and 1) and per-PE 8-bit weights, checked against
// the model's K values; this checks the K layout, the activation mux and
// the 8x8 path. Phase 3: Attn buffer written and read through the external
// port.
module tb_pu;
  import fq_pkg::*;
  localparam int M = 8, N = 4, SEQ = 8, DH = 8;
  localparam int QD = (SEQ/N)*(DH/M), KD = SEQ*(DH/M), VD = (DH/N)*(SEQ/M), AD = (SEQ/N)*(SEQ/M);
  logic clk = 0, rst_n = 0;
  logic in_valid, first, last, half, a_signed, rd_en, wb_en, wb_att, y_valid, overrun;
  bim_mode_e mode;
  logic [1:0] act_sel, wt_sel;
  logic [$clog2(N)-1:0] att_bank;
  logic [M-1:0][7:0] io_word;
  logic [N-1:0][M*4-1:0] w_word;
  logic [N-1:0][31:0] bias;
  logic [31:0] sf;
  logic [5:0] shift;
  logic [$clog2(QD)-1:0] q_rd_addr;
  logic [$clog2(KD)-1:0] k_rd_addr;
  logic [$clog2(VD)-1:0] v_rd_addr;
  logic [$clog2(AD)-1:0] a_rd_addr, a_ext_addr;
  dst_e wb_dst;
  logic [15:0] wb_row, wb_col;
  logic [N*M-1:0][7:0] a_rd_data, a_ext_data;
  logic [N*M-1:0] a_ext_be;
  logic [N-1:0][7:0] y;
  int checks = 0, failures = 0;
  int Kref [SEQ][DH];
  int expq [$][N];
  int tagr [$], tagc [$];

  pu #(.M(M), .N(N), .SEQ(SEQ), .DH(DH)) dut (.*);
  always #5 clk = ~clk;

  function automatic int rq(longint acc, int f, int sh);
    automatic longint r = ((acc * f) + (64'sd1 <<< (sh - 1))) >>> sh;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  // write-back tag follows the result
  assign wb_en  = y_valid && tagr.size() > 0;
  assign wb_row = (tagr.size() > 0) ? 16'(tagr[0]) : 16'd0;
  assign wb_col = (tagc.size() > 0) ? 16'(tagc[0]) : 16'd0;

  always @(posedge clk) if (rst_n && y_valid) begin
    if (expq.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      for (int n = 0; n < N; n++) begin
        checks++;
        if ($signed(y[n]) != expq[0][n]) begin
          failures++;
          if (failures < 10) $display("PE %0d got %0d exp %0d", n, $signed(y[n]), expq[0][n]);
        end
      end
      expq.pop_front();
      if (tagr.size() > 0) begin void'(tagr.pop_front()); void'(tagc.pop_front()); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; half = 0; a_signed = 1; mode = MODE_8X4; act_sel = 0;
    wt_sel = 0; att_bank = 0; io_word = '0; w_word = '0; bias = '0; sf = 32'd40; shift = 6'd10;
    rd_en = 0; q_rd_addr = 0; k_rd_addr = 0; v_rd_addr = 0; a_rd_addr = 0; wb_dst = DST_K; wb_att = 0;
    a_ext_be = '0; a_ext_addr = 0; a_ext_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: K[t][c+n] = rq(bias + 2-beat 8x4 dot product)
    for (int t = 0; t < SEQ; t++)
      for (int c = 0; c < DH; c += N) begin
        longint acc [N];
        int e [N];
        for (int n = 0; n < N; n++) begin bias[n] = $urandom % 401 - 200; acc[n] = $signed(bias[n]); end
        for (int b = 0; b < 2; b++) begin
          @(negedge clk);
          in_valid = 1; first = (b == 0); last = (b == 1); mode = MODE_8X4; act_sel = 0; wt_sel = 0;
          for (int i = 0; i < M; i++) io_word[i] = 8'($urandom);
          for (int n = 0; n < N; n++) begin
            w_word[n] = $urandom;
            for (int i = 0; i < M; i++) acc[n] += longint'($signed(io_word[i])) * longint'($signed(w_word[n][4*i +: 4]));
          end
        end
        for (int n = 0; n < N; n++) begin e[n] = rq(acc[n], 40, 10); Kref[t][c + n] = e[n]; end
        expq.push_back(e); tagr.push_back(t); tagc.push_back(c);
      end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    // phase 2: 8x8 with K as activations
    bias = '0;
    for (int t = 0; t < SEQ; t++) begin
      longint acc [N];
      int e [N];
      for (int n = 0; n < N; n++) acc[n] = 0;
      @(negedge clk);
      in_valid = 0; rd_en = 1; k_rd_addr = $clog2(KD)'(t * (DH / M));
      for (int b = 0; b < 2; b++) begin
        @(negedge clk);
        in_valid = 1; first = (b == 0); last = (b == 1); mode = MODE_8X8; half = b[0];
        act_sel = 2'd1; wt_sel = 2'd0;
        for (int n = 0; n < N; n++) begin
          w_word[n] = $urandom;
          for (int i = 0; i < M/2; i++)
            acc[n] += longint'(Kref[t][b * (M/2) + i]) * longint'($signed(w_word[n][8*i +: 8]));
        end
      end
      for (int n = 0; n < N; n++) e[n] = rq(acc[n], 40, 10);
      expq.push_back(e);
      @(negedge clk) in_valid = 0;
      repeat (6) @(negedge clk);
    end
    // phase 3: external Attn write and read-back
    for (int a = 0; a < AD; a++) begin
      @(negedge clk);
      a_ext_be = '1; a_ext_addr = $clog2(AD)'(a);
      for (int b = 0; b < N*M; b++) a_ext_data[b] = 8'(a * 7 + b);
    end
    @(negedge clk) a_ext_be = '0;
    for (int a = 0; a < AD; a++) begin
      @(negedge clk) rd_en = 1; a_rd_addr = $clog2(AD)'(a);
      @(posedge clk); #1;
      checks++;
      if (a_rd_data[3] != 8'(a * 7 + 3) || a_rd_data[N*M-1] != 8'(a * 7 + N*M-1)) failures++;
    end
    checks++;
    if (expq.size() != 0 || overrun) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
