// tb_fqbert_layer_full: one complete BERT-base encoder layer on the
// accelerator at its default size (12 PUs x 8 PEs x 16 multipliers,
// sequence 128, hidden 768, 12 heads, FFN 3072), i.e. the per-layer work of
// the SST-2 and MNLI workloads (batch 1, 128 tokens); both tasks share these
// shapes, so one test serves both. The model data are random.
//
// The host side loads X, biases, scale entries, LN parameters and the exp
// table, streams all 72 weight groups of the six linear stages into the
// weight buffer while the stages run, and issues the 11 stage commands in
// dataflow order: X.W^Q, X.W^K, X.W^V, Q.K^T, softmax, Att.V, O_A.W^S,
// Add&LN, O_L.W^ffn1, O_f1.W^ffn2, Add&LN.
// An integer reference model of every stage, computed in this test from the
// stage formulas, gives the expected O_A, O_S, O_L, O_f1, O_f2 and X1
// (638,976 bytes), which are read back from the I/O buffer and compared.
// It prints the cycle count of every stage and counts the same mechanisms
// as the reduced end-to-end test (weight stalls, bank hand-overs, mode
// switches, psum double buffering, saturation, softmax and LN rows, LN
// pipelining), failing if one never occurred.
module tb_fqbert_layer_full;
  import fq_pkg::*;
  localparam int M = 16, N = 8, H = 12, SEQ = 128, DM = 768, DFF = 3072, IOD = 65536;
  localparam int DH = DM / H, WBB = H * N * M / 2, WBEATS = WBB / M, BBEATS = H * N * 4 / M;
  localparam int T = SEQ;
  localparam int G = DM / (H * N), GF = DFF / (H * N), LNW = DM / M;   // weight groups, LN words
  localparam int XW = T * DM / M;                                       // I/O words of a T x DM matrix
  localparam int A_X = 0, A_OA = XW, A_OS = 2 * XW, A_OL = 3 * XW, A_F1 = 4 * XW;
  localparam int A_F2 = A_F1 + T * DFF / M, A_X1 = A_F2 + XW;
  localparam bit BIG = DM > 64;                                         // scale choice for long dot products
  localparam int WATCHDOG = BIG ? 3000000 : 200000;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, ld_valid, wb_commit, wb_can_fill, rd_en, stall_w, overrun;
  cmd_t cmd;
  ld_sel_e ld_sel;
  logic [23:0] ld_addr;
  logic [M-1:0][7:0] ld_data, rd_data;
  logic [$clog2(IOD)-1:0] rd_addr;
  int checks = 0, failures = 0;

  fqbert_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- model data ----------------
  int X [T][DM];
  int Wq [DM][DM], Wk [DM][DM], Wv [DM][DM], Ws [DM][DM], W1 [DM][DFF], W2 [DFF][DM];
  int Bq [DM], Bk [DM], Bv [DM], Bs [DM], B1 [DFF], B2 [DM];
  int Q [T][DM], K [T][DM], V [T][DM], S [H][T][T], A [H][T][T];
  int OA [T][DM], OS [T][DM], OL [T][DM], F1 [T][DFF], F2 [T][DM], X1 [T][DM];
  int G1 [DM], E1 [DM], G2 [DM], E2 [DM];
  int lut [256];
  // scale entries: 0 Q, 1 K, 2 V, 3 QK, 4 AV, 5 Ws, 6 LN1, 7 FFN1, 8 FFN2, 9 LN2
  int SF [10], SH [10], LS1 [10], LS2 [10], LSH [10];

  function automatic int rq(longint acc, int sf, int sh);
    automatic longint p = acc * sf, r;
    r = (sh == 0) ? p : ((p + (64'sd1 <<< (sh - 1))) >>> sh);
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  function automatic longint isqrt(longint v);
    automatic longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_release = 0, n_mode_sw = 0, n_psum_ovl = 0, n_sat = 0, n_sm_rows = 0, n_ln_rows = 0, n_ln_ovl = 0;
  logic last_mode_v;
  bim_mode_e last_mode;
  always @(posedge clk) if (rst_n) begin
    if (stall_w) n_stall++;
    if (dut.wb_release) n_release++;
    if (dut.pu_valid) begin
      if (last_mode_v && dut.pu_mode != last_mode) n_mode_sw++;
      last_mode = dut.pu_mode; last_mode_v = 1;
    end
    if (dut.g_pu[0].u_pu.g_pe[0].u_pe.u_acc.in_valid && dut.g_pu[0].u_pu.g_pe[0].u_pe.u_acc.full != 0) n_psum_ovl++;
    if (dut.y_valid[0]) for (int n = 0; n < N; n++)
      if ($signed(dut.y[0][n]) == 127 || $signed(dut.y[0][n]) == -128) n_sat++;
    if (dut.sm_out_valid && dut.sm_out_idx == T - 1) n_sm_rows++;
    if (dut.ln_out_valid && dut.ln_out_widx == DM / M - 1) n_ln_rows++;
    if (dut.ln_out_valid && dut.ln_in_valid) n_ln_ovl++;
    if (overrun) begin failures++; $display("psum overrun"); end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host helpers ----------------
  task automatic ld(ld_sel_e sel, int addr, logic [M-1:0][7:0] data);
    @(negedge clk);
    ld_valid = 1; ld_sel = sel; ld_addr = 24'(addr); ld_data = data;
    @(negedge clk);
    ld_valid = 0;
  endtask

  // weight group g of a linear stage with input width din, output columns
  // j = h*(groups*N) + g*N + n
  task automatic load_wgroup(int which, int din, int groups, int g);
    for (int c = 0; c < din / M; c++) begin
      logic [WBB-1:0][7:0] word;
      word = '0;
      for (int h = 0; h < H; h++)
        for (int n = 0; n < N; n++)
          for (int i = 0; i < M; i++) begin
            automatic int j = h * groups * N + g * N + n, k = c * M + i, w;
            case (which)
              0: w = Wq[k][j]; 1: w = Wk[k][j]; 2: w = Wv[k][j];
              3: w = Ws[k][j]; 4: w = W1[k][j]; default: w = W2[k][j];
            endcase
            word[(h*N + n) * (M/2) + i/2][(i%2)*4 +: 4] = 4'(w);
          end
      for (int b = 0; b < WBEATS; b++) begin
        while (!wb_can_fill) @(negedge clk);
        ld(LD_WEIGHT, c * WBEATS + b, word[b*M +: M]);
      end
    end
    @(negedge clk) wb_commit = 1;
    @(negedge clk) wb_commit = 0;
  endtask

  task automatic load_bias(int which, int base, int groups);
    for (int g = 0; g < groups; g++) begin
      logic [H*N*4-1:0][7:0] word;
      for (int h = 0; h < H; h++)
        for (int n = 0; n < N; n++) begin
          automatic int j = h * groups * N + g * N + n, bv;
          case (which)
            0: bv = Bq[j]; 1: bv = Bk[j]; 2: bv = Bv[j]; 3: bv = Bs[j]; 4: bv = B1[j]; default: bv = B2[j];
          endcase
          for (int b = 0; b < 4; b++) word[(h*N + n) * 4 + b] = 8'(bv >> (8*b));
        end
      for (int b = 0; b < BBEATS; b++) ld(LD_BIAS, (base + g) * BBEATS + b, word[b*M +: M]);
    end
  endtask

  task automatic run(op_e op, dst_e dst, int kwords, int groups, int src, int srcb, int dst_base,
                     int sidx, int bbase, bit ben);
    time t0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.dst = dst; cmd.rows = 16'(T); cmd.kwords = 16'(kwords); cmd.groups = 16'(groups);
    cmd.src_base = 16'(src); cmd.srcb_base = 16'(srcb); cmd.dst_base = 16'(dst_base);
    cmd.scale_idx = 8'(sidx); cmd.bias_base = 16'(bbase); cmd.bias_en = ben;
    cmd_valid = 1;
    t0 = $time;
    @(negedge clk) cmd_valid = 0;
    while (busy) @(negedge clk);
    $display("stage %s: %0d cycles", op.name(), ($time - t0) / 10);
  endtask

  // compare an I/O-buffer matrix with the model
  task automatic cmp(string name, int base, int width, int which);
    automatic int bad = 0;
    for (int t = 0; t < T; t++)
      for (int w = 0; w < width / M; w++) begin
        @(negedge clk) rd_en = 1; rd_addr = $clog2(IOD)'(base + t * (width / M) + w);
        @(negedge clk) rd_en = 0;
        for (int l = 0; l < M; l++) begin
          automatic int e, col = w * M + l;
          case (which)
            0: e = OA[t][col]; 1: e = OS[t][col]; 2: e = OL[t][col];
            3: e = F1[t][col]; 4: e = F2[t][col]; default: e = X1[t][col];
          endcase
          checks++;
          if ($signed(rd_data[l]) != e) begin
            failures++; bad++;
            if (bad < 4) $display("%s[%0d][%0d] got %0d exp %0d", name, t, col, $signed(rd_data[l]), e);
          end
        end
      end
  endtask

  // ---------------- reference model ----------------
  task automatic model();
    // Q, K, V
    for (int t = 0; t < T; t++)
      for (int j = 0; j < DM; j++) begin
        automatic longint aq = Bq[j], ak = Bk[j], av = Bv[j];
        for (int k = 0; k < DM; k++) begin
          aq += X[t][k] * Wq[k][j]; ak += X[t][k] * Wk[k][j]; av += X[t][k] * Wv[k][j];
        end
        Q[t][j] = rq(aq, SF[0], SH[0]); K[t][j] = rq(ak, SF[1], SH[1]); V[t][j] = rq(av, SF[2], SH[2]);
      end
    for (int h = 0; h < H; h++) begin
      for (int i = 0; i < T; i++) begin
        automatic int mx = -1000, sum = 0, r;
        int e [T];
        for (int j = 0; j < T; j++) begin
          automatic longint s = 0;
          for (int d = 0; d < DH; d++) s += Q[i][h*DH + d] * K[j][h*DH + d];
          S[h][i][j] = rq(s, SF[3], SH[3]);
          if (S[h][i][j] > mx) mx = S[h][i][j];
        end
        for (int j = 0; j < T; j++) begin
          automatic int dd = mx - S[h][i][j];
          e[j] = lut[dd > 255 ? 255 : dd];
          sum += e[j];
        end
        r = (sum == 0) ? 32'h1ffffff : (1 << 24) / sum;
        for (int j = 0; j < T; j++) begin
          automatic longint o = (longint'(e[j]) * r + 32768) >>> 16;
          A[h][i][j] = (o > 255) ? 255 : int'(o);
        end
      end
      for (int i = 0; i < T; i++)
        for (int d = 0; d < DH; d++) begin
          automatic longint s = 0;
          for (int j = 0; j < T; j++) s += A[h][i][j] * V[j][h*DH + d];
          OA[i][h*DH + d] = rq(s, SF[4], SH[4]);
        end
    end
    for (int t = 0; t < T; t++)
      for (int j = 0; j < DM; j++) begin
        automatic longint s = Bs[j];
        for (int k = 0; k < DM; k++) s += OA[t][k] * Ws[k][j];
        OS[t][j] = rq(s, SF[5], SH[5]);
      end
    ln(X, OS, OL, G1, E1, 6);
    for (int t = 0; t < T; t++)
      for (int j = 0; j < DFF; j++) begin
        automatic longint s = B1[j];
        for (int k = 0; k < DM; k++) s += OL[t][k] * W1[k][j];
        F1[t][j] = rq(s, SF[7], SH[7]);
      end
    for (int t = 0; t < T; t++)
      for (int j = 0; j < DM; j++) begin
        automatic longint s = B2[j];
        for (int k = 0; k < DFF; k++) s += F1[t][k] * W2[k][j];
        F2[t][j] = rq(s, SF[8], SH[8]);
      end
    ln(OL, F2, X1, G2, E2, 9);
  endtask

  task automatic ln(ref int a [T][DM], ref int b [T][DM], ref int y [T][DM], ref int g [DM], ref int be [DM], input int si);
    for (int t = 0; t < T; t++) begin
      automatic longint z [DM], sum = 0, mean, sq = 0, sd, inv;
      for (int i = 0; i < DM; i++) begin z[i] = a[t][i] * LS1[si] + b[t][i] * LS2[si]; sum += z[i]; end
      mean = sum / DM;
      for (int i = 0; i < DM; i++) begin z[i] -= mean; sq += z[i] * z[i]; end
      sd = isqrt(sq / DM);
      inv = (64'sd1 <<< 24) / (sd == 0 ? 1 : sd);
      for (int i = 0; i < DM; i++) begin
        automatic longint p = z[i] * inv * g[i], r;
        r = ((p + (64'sd1 <<< (LSH[si] - 1))) >>> LSH[si]) + be[i];
        y[t][i] = (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
      end
    end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    cmd_valid = 0; cmd = '0; ld_valid = 0; ld_sel = LD_IO; ld_addr = 0; ld_data = '0;
    wb_commit = 0; rd_en = 0; rd_addr = 0; last_mode_v = 0; last_mode = MODE_8X4;
    // random model
    for (int t = 0; t < T; t++) for (int k = 0; k < DM; k++) X[t][k] = $signed(8'($urandom));
    for (int k = 0; k < DM; k++) for (int j = 0; j < DM; j++) begin
      Wq[k][j] = $signed(4'($urandom)); Wk[k][j] = $signed(4'($urandom));
      Wv[k][j] = $signed(4'($urandom)); Ws[k][j] = $signed(4'($urandom));
    end
    for (int k = 0; k < DM; k++) for (int j = 0; j < DFF; j++) W1[k][j] = $signed(4'($urandom));
    for (int k = 0; k < DFF; k++) for (int j = 0; j < DM; j++) W2[k][j] = $signed(4'($urandom));
    for (int j = 0; j < DM; j++) begin
      Bq[j] = $urandom % 2001 - 1000; Bk[j] = $urandom % 2001 - 1000; Bv[j] = $urandom % 2001 - 1000;
      Bs[j] = $urandom % 2001 - 1000; B2[j] = $urandom % 2001 - 1000;
      G1[j] = 16 + $urandom % 24; G2[j] = 16 + $urandom % 24;
      E1[j] = $urandom % 16 - 8; E2[j] = $urandom % 16 - 8;
    end
    for (int j = 0; j < DFF; j++) B1[j] = $urandom % 2001 - 1000;
    for (int d = 0; d < 256; d++) lut[d] = $rtoi($exp(-real'(d) / 16.0) * 255.0 + 0.5);
    for (int s = 0; s < 10; s++) begin SF[s] = BIG ? 10 : 20; SH[s] = 12; LS1[s] = 0; LS2[s] = 0; LSH[s] = 0; end
    SF[3] = BIG ? 2 : 3;  SH[3] = 10;     // scores
    SF[4] = 60; SH[4] = 13;               // Att.V (probabilities are 0.8 fixed point)
    SF[8] = BIG ? 6 : 12; SH[8] = 12;
    SF[0] = BIG ? 100 : 600;              // large: some Q entries saturate
    LS1[6] = 40; LS2[6] = 70; LSH[6] = 24;
    LS1[9] = 50; LS2[9] = 60; LSH[9] = 24;
    SF[6] = 0; SF[9] = 0;
    model();

    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialization: activations, biases, scales, LN parameters, exp table
    for (int t = 0; t < T; t++)
      for (int w = 0; w < DM / M; w++) begin
        logic [M-1:0][7:0] d;
        for (int l = 0; l < M; l++) d[l] = 8'(X[t][w*M + l]);
        ld(LD_IO, A_X + t * (DM / M) + w, d);
      end
    load_bias(0, 0, G); load_bias(1, G, G); load_bias(2, 2 * G, G); load_bias(3, 3 * G, G);
    load_bias(4, 4 * G, GF); load_bias(5, 4 * G + GF, G);
    for (int s = 0; s < 10; s++) begin
      logic [63:0] v;
      scale_t sc;
      sc = '0; sc.sf = 32'(SF[s]); sc.shift = 6'(SH[s]); sc.s1 = 8'(LS1[s]); sc.s2 = 8'(LS2[s]);
      sc.ln_shift = 6'(LSH[s]);
      v = sc;
      ld(LD_SCALE, s, {{(M-8){8'h00}}, v});
    end
    for (int w = 0; w < LNW; w++) begin
      logic [M-1:0][7:0] gg, bb, gg2, bb2;
      for (int l = 0; l < M; l++) begin
        gg[l] = 8'(G1[w*M+l]); bb[l] = 8'(E1[w*M+l]); gg2[l] = 8'(G2[w*M+l]); bb2[l] = 8'(E2[w*M+l]);
      end
      ld(LD_LNPARAM, w * 2, gg);        ld(LD_LNPARAM, w * 2 + 1, bb);
      ld(LD_LNPARAM, (LNW + w) * 2, gg2); ld(LD_LNPARAM, (LNW + w) * 2 + 1, bb2);
    end
    for (int d = 0; d < 256; d++) ld(LD_SMLUT, d, M'(lut[d]) );

    fork
      begin : weights
        for (int g = 0; g < G; g++) load_wgroup(0, DM, G, g);
        for (int g = 0; g < G; g++) load_wgroup(1, DM, G, g);
        for (int g = 0; g < G; g++) load_wgroup(2, DM, G, g);
        while (!cmd_ready) @(negedge clk);   // late weights: forces a stall
        repeat (300) @(negedge clk);
        for (int g = 0; g < G; g++) load_wgroup(3, DM, G, g);
        for (int g = 0; g < GF; g++) load_wgroup(4, DM, GF, g);
        for (int g = 0; g < G; g++) load_wgroup(5, DFF, G, g);
      end
      begin : commands
        run(OP_LINEAR, DST_Q, DM / M, G, A_X, 0, 0, 0, 0, 1);
        run(OP_LINEAR, DST_K, DM / M, G, A_X, 0, 0, 1, G, 1);
        run(OP_LINEAR, DST_V, DM / M, G, A_X, 0, 0, 2, 2 * G, 1);
        run(OP_QK, DST_Q, 0, 0, 0, 0, 0, 3, 0, 0);
        run(OP_SOFTMAX, DST_Q, 0, 0, 0, 0, 0, 0, 0, 0);
        run(OP_AV, DST_IO, 0, 0, 0, 0, A_OA, 4, 0, 0);
        run(OP_LINEAR, DST_IO, DM / M, G, A_OA, 0, A_OS, 5, 3 * G, 1);
        run(OP_ADDLN, DST_IO, DM / M, 0, A_X, A_OS, A_OL, 6, 0, 0);
        run(OP_LINEAR, DST_IO, DM / M, GF, A_OL, 0, A_F1, 7, 4 * G, 1);
        run(OP_LINEAR, DST_IO, DFF / M, G, A_F1, 0, A_F2, 8, 4 * G + GF, 1);
        run(OP_ADDLN, DST_IO, DM / M, 0, A_OL, A_F2, A_X1, 9, LNW, 0);
      end
    join

    cmp("O_A", A_OA, DM, 0);
    cmp("O_S", A_OS, DM, 1);
    cmp("O_L", A_OL, DM, 2);
    cmp("O_f1", A_F1, DFF, 3);
    cmp("O_f2", A_F2, DM, 4);
    cmp("X1", A_X1, DM, 5);

    $display("mechanisms: weight-stall cycles %0d, bank hand-overs %0d, mode switches %0d, psum overlap %0d, saturations %0d, softmax rows %0d, LN rows %0d, LN row overlap %0d",
             n_stall, n_release, n_mode_sw, n_psum_ovl, n_sat, n_sm_rows, n_ln_rows, n_ln_ovl);
    checks += 7;
    if (n_stall == 0) failures++;
    if (n_release != 5 * G + GF) failures++;
    if (n_mode_sw < 2) failures++;
    if (n_psum_ovl == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_sm_rows != H * T) failures++;
    if (n_ln_rows != 2 * T) failures++;
    checks++;
    if (n_ln_ovl == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
