// tb_fqbert_full: the accelerator at its default size (12 PUs x 8 PEs x 16
// multipliers, sequence 128, hidden 768) running one complete linear stage,
// X (128 x 768, int8) times W^Q (768 x 768, int4) plus bias, requantized
// and written to the I/O buffer. The weights are streamed group by group
// (8 groups of 96 output columns, 48 words of 768 bytes each) into the
// double-buffered weight buffer while the stage runs. All 98,304 results
// are read back and compared with an integer model computed here; the
// compute time must be within 10% of T * Din/M * Dout/(H*N) = 49,152 cycles
// after the first weight group is in.
module tb_fqbert_full;
  import fq_pkg::*;
  localparam int M = 16, N = 8, H = 12, T = 128, DM = 768, IOD = 65536;
  localparam int WBB = H * N * M / 2, WBEATS = WBB / M, BBEATS = H * N * 4 / M, G = DM / (H * N);
  localparam int A_X = 0, A_Y = 8192;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, ld_valid, wb_commit, wb_can_fill, rd_en, stall_w, overrun;
  cmd_t cmd;
  ld_sel_e ld_sel;
  logic [23:0] ld_addr;
  logic [M-1:0][7:0] ld_data, rd_data;
  logic [$clog2(IOD)-1:0] rd_addr;
  int checks = 0, failures = 0, cyc = 0;

  fqbert_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  byte X [T][DM];
  byte W [DM][DM];
  int  B [DM];
  localparam int SF = 30, SH = 14;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_start, t_end, bad;
    cmd_valid = 0; cmd = '0; ld_valid = 0; ld_sel = LD_IO; ld_addr = 0; ld_data = '0;
    wb_commit = 0; rd_en = 0; rd_addr = 0;
    for (int t = 0; t < T; t++) for (int k = 0; k < DM; k++) X[t][k] = byte'($urandom);
    for (int k = 0; k < DM; k++) for (int j = 0; j < DM; j++) W[k][j] = byte'($signed(4'($urandom)));
    for (int j = 0; j < DM; j++) B[j] = $urandom % 4001 - 2000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // activations
    for (int t = 0; t < T; t++)
      for (int w = 0; w < DM / M; w++) begin
        ld_valid = 1; ld_sel = LD_IO; ld_addr = 24'(A_X + t * (DM / M) + w);
        for (int l = 0; l < M; l++) ld_data[l] = X[t][w*M + l];
        @(negedge clk);
      end
    // biases (group g at bias word g) and the scale entry
    for (int g = 0; g < G; g++) begin
      logic [H*N*4-1:0][7:0] word;
      for (int h = 0; h < H; h++) for (int n = 0; n < N; n++)
        for (int b = 0; b < 4; b++) word[(h*N + n) * 4 + b] = 8'(B[h * G * N + g * N + n] >> (8*b));
      for (int b = 0; b < BBEATS; b++) begin
        ld_valid = 1; ld_sel = LD_BIAS; ld_addr = 24'(g * BBEATS + b); ld_data = word[b*M +: M];
        @(negedge clk);
      end
    end
    begin
      scale_t sc;
      sc = '0; sc.sf = SF; sc.shift = SH;
      ld_valid = 1; ld_sel = LD_SCALE; ld_addr = 0; ld_data = '0; ld_data[7:0] = sc;
      @(negedge clk);
    end
    ld_valid = 0;
    fork
      begin : weights
        for (int g = 0; g < G; g++) begin
          for (int c = 0; c < DM / M; c++) begin
            logic [WBB-1:0][7:0] word;
            for (int h = 0; h < H; h++) for (int n = 0; n < N; n++) for (int i = 0; i < M; i++)
              word[(h*N + n) * (M/2) + i/2][(i%2)*4 +: 4] = 4'(W[c*M + i][h * G * N + g * N + n]);
            for (int b = 0; b < WBEATS; b++) begin
              while (!wb_can_fill) begin ld_valid = 0; @(negedge clk); end
              ld_valid = 1; ld_sel = LD_WEIGHT; ld_addr = 24'(c * WBEATS + b); ld_data = word[b*M +: M];
              @(negedge clk);
            end
          end
          ld_valid = 0; wb_commit = 1;
          @(negedge clk) wb_commit = 0;
        end
      end
      begin : command
        while (!cmd_ready) @(negedge clk);
        cmd = '0; cmd.op = OP_LINEAR; cmd.dst = DST_IO; cmd.rows = 16'(T); cmd.kwords = 16'(DM / M);
        cmd.groups = 16'(G); cmd.src_base = 16'(A_X); cmd.dst_base = 16'(A_Y); cmd.bias_en = 1;
        cmd_valid = 1;
        @(negedge clk) cmd_valid = 0;
        while (stall_w) @(negedge clk);
        t_start = cyc;
        while (busy) @(negedge clk);
        t_end = cyc;
      end
    join
    $display("stage compute cycles after first weight group: %0d", t_end - t_start);
    checks++;
    if (t_end - t_start < T * (DM / M) * G || t_end - t_start > T * (DM / M) * G * 11 / 10) failures++;
    bad = 0;
    for (int t = 0; t < T; t++)
      for (int w = 0; w < DM / M; w++) begin
        rd_en = 1; rd_addr = 16'(A_Y + t * (DM / M) + w);
        @(negedge clk);
        rd_en = 0;
        for (int l = 0; l < M; l++) begin
          automatic int j = w * M + l;
          automatic longint acc = B[j], r;
          for (int k = 0; k < DM; k++) acc += longint'(X[t][k]) * longint'(W[k][j]);
          r = ((acc * SF) + (64'sd1 <<< (SH - 1))) >>> SH;
          r = (r > 127) ? 127 : (r < -128) ? -128 : r;
          checks++;
          if (longint'($signed(rd_data[l])) != r) begin
            failures++; bad++;
            if (bad < 5) $display("Y[%0d][%0d] got %0d exp %0d", t, j, $signed(rd_data[l]), r);
          end
        end
      end
    if (overrun) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
