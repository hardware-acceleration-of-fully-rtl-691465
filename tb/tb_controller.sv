// tb_controller: the controller alone, with a cycle model of the PU array
// (results 4 cycles after a beat marked last) and of the weight buffer.
// LINEAR stage: checks the I/O-buffer and weight-buffer read address of
// every beat, that beat control follows one cycle after its addresses with
// correct first/last, that no beat issues while the weight bank is empty
// (stall), one bank release per group, and every write of the I/O
// write-back serializer (address, byte lanes, data).
// QK stage: checks the K/Q read addresses and the write-back tags.
module tb_controller;
  import fq_pkg::*;
  localparam int M = 8, N = 4, H = 2, SEQ = 16, DH = 16, IOD = 1024, WD = 8, BD = 32;
  localparam int QD = (SEQ/N)*(DH/M), KD = SEQ*(DH/M), VD = (DH/N)*(SEQ/M), AD = (SEQ/N)*(SEQ/M);
  localparam int SL = $clog2(SEQ + 1), LW = $clog2(WD + 1);
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, wb_full, wb_rd_en, wb_release, stall_w, bias_zero;
  cmd_t cmd;
  logic [7:0] scale_idx;
  logic [$clog2(WD)-1:0] wb_rd_addr;
  logic [$clog2(BD)-1:0] bias_rd_addr;
  logic io_rda_en, io_rdb_en;
  logic [$clog2(IOD)-1:0] io_rda_addr, io_rdb_addr, io_wr_addr;
  logic [M-1:0] io_wr_be;
  logic [M-1:0][7:0] io_wr_data;
  logic pu_valid, pu_first, pu_last, pu_half, pu_a_signed, pu_rd_en;
  bim_mode_e pu_mode;
  logic [1:0] pu_act_sel, pu_wt_sel;
  logic [$clog2(N)-1:0] pu_att_bank;
  logic [$clog2(QD)-1:0] q_rd_addr;
  logic [$clog2(KD)-1:0] k_rd_addr;
  logic [$clog2(VD)-1:0] v_rd_addr;
  logic [$clog2(AD)-1:0] a_rd_addr, sm_wr_addr;
  logic y_valid;
  logic [H-1:0][N-1:0][7:0] y;
  logic wb_en, wb_att;
  dst_e wb_dst;
  logic [15:0] wb_row, wb_col, ln_pbase;
  logic [$clog2(H)-1:0] sm_pu;
  logic [N*M-1:0][7:0] sm_att_word, sm_wr_data;
  logic [N*M-1:0] sm_wr_be;
  logic [SL-1:0] sm_len, sm_out_idx;
  logic sm_in_valid, sm_out_valid, ln_in_valid, ln_out_valid;
  logic ln_in_ready = 1'b1;
  logic signed [7:0] sm_in_data;
  logic [7:0] sm_out_data;
  logic [LW-1:0] ln_nwords, ln_out_widx;
  logic [M-1:0][7:0] ln_out_word;
  int checks = 0, failures = 0;

  controller #(.M(M), .N(N), .H(H), .SEQ(SEQ), .DH(DH), .IOD(IOD), .WD(WD), .BD(BD)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- PU array model: result 4 cycles after a last beat ----
  int lat_q [$];
  int cyc = 0;
  int res_n = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    y_valid <= 1'b0;
    if (pu_valid && pu_last) lat_q.push_back(cyc + 4);
    if (lat_q.size() > 0 && lat_q[0] == cyc + 1) begin
      void'(lat_q.pop_front());
      y_valid <= 1'b1;
      for (int h = 0; h < H; h++) for (int n = 0; n < N; n++) y[h][n] <= 8'(res_n * 16 + h * N + n);
      res_n <= res_n + 1;
    end
  end

  // ---- weight buffer model ----
  int empty_cnt = 20, n_stall = 0, n_rel = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall_w) n_stall++;
    if (wb_release) begin n_rel++; empty_cnt <= 10; end
    else if (empty_cnt > 0) empty_cnt <= empty_cnt - 1;
    if (!wb_full && !wb_release) chk(!dut.issue || cmd.op != OP_LINEAR, "issue with empty bank");
  end
  assign wb_full = (empty_cnt == 0) && !wb_release;

  // ---- expected streams ----
  int exp_rd [$], exp_wb [$], exp_first [$], exp_last [$];
  int exp_wa [$], exp_lane [$], exp_d [$];
  int exp_tr [$], exp_tc [$];
  logic pend; int pend_first, pend_last;

  always @(posedge clk) if (rst_n) begin
    // beat control one cycle after the address
    if (pend) chk(pu_valid && pu_first == pend_first[0] && pu_last == pend_last[0], "beat control");
    else chk(!pu_valid, "no beat without address");
    pend = 0;
    if (dut.issue) begin
      if (cmd.op == OP_LINEAR) begin
        chk(io_rda_en && wb_rd_en, "read enables");
        chk(exp_rd.size() > 0 && int'(io_rda_addr) == exp_rd[0] && int'(wb_rd_addr) == exp_wb[0], "linear read address");
      end else begin
        chk(exp_rd.size() > 0 && int'(k_rd_addr) == exp_rd[0] && int'(q_rd_addr) == exp_wb[0], "QK read address");
      end
      if (exp_rd.size() > 0) begin
        void'(exp_rd.pop_front()); void'(exp_wb.pop_front());
        pend = 1; pend_first = exp_first.pop_front(); pend_last = exp_last.pop_front();
      end
    end
    if (io_wr_be != 0) begin
      chk(exp_wa.size() > 0, "unexpected I/O write");
      if (exp_wa.size() > 0) begin
        chk(int'(io_wr_addr) == exp_wa[0], "I/O write address");
        for (int n = 0; n < N; n++)
          chk(io_wr_be[exp_lane[0] + n] && io_wr_data[exp_lane[0] + n] == 8'(exp_d[0] + n), "I/O write lane/data");
        chk($countones(io_wr_be) == N, "I/O write width");
        void'(exp_wa.pop_front()); void'(exp_lane.pop_front()); void'(exp_d.pop_front());
      end
    end
    if (wb_en) begin
      chk(exp_tr.size() > 0 && int'(wb_row) == exp_tr[0] && int'(wb_col) == exp_tc[0] && wb_att, "QK tag");
      if (exp_tr.size() > 0) begin void'(exp_tr.pop_front()); void'(exp_tc.pop_front()); end
    end
  end

  task automatic issue_cmd();
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    @(negedge clk) cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    automatic int rows = 4, kw = 3, groups = 2, rn;
    cmd_valid = 0; cmd = '0; y = '0; sm_att_word = '0; sm_out_valid = 0; sm_out_idx = 0; sm_out_data = 0;
    ln_out_valid = 0; ln_out_widx = 0; ln_out_word = '0; pend = 0;
    // LINEAR expectations
    rn = 0;
    for (int g = 0; g < groups; g++)
      for (int t = 0; t < rows; t++) begin
        for (int c = 0; c < kw; c++) begin
          exp_rd.push_back(100 + t * kw + c); exp_wb.push_back(c);
          exp_first.push_back(c == 0); exp_last.push_back(c == kw - 1);
        end
        for (int h = 0; h < H; h++) begin
          automatic int gn = groups * N, col = h * gn + g * N;
          exp_wa.push_back(500 + t * (H * gn / M) + col / M);
          exp_lane.push_back(col % M);
          exp_d.push_back(rn * 16 + h * N);
        end
        rn++;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    cmd.op = OP_LINEAR; cmd.dst = DST_IO; cmd.rows = 16'(rows); cmd.kwords = 16'(kw);
    cmd.groups = 16'(groups); cmd.src_base = 16'd100; cmd.dst_base = 16'd500; cmd.bias_en = 1;
    issue_cmd();
    chk(exp_rd.size() == 0 && exp_wa.size() == 0, "all LINEAR beats and writes seen");
    chk(n_stall > 0 && n_rel == groups, "weight stall and one release per group");
    // QK expectations (rows = 8)
    rows = 8;
    for (int o = 0; o < rows / N; o++)
      for (int j = 0; j < rows; j++) begin
        for (int c = 0; c < 2 * DH / M; c++) begin
          exp_rd.push_back(j * (DH / M) + c / 2); exp_wb.push_back(o * (DH / M) + c / 2);
          exp_first.push_back(c == 0); exp_last.push_back(c == 2 * DH / M - 1);
        end
        exp_tr.push_back(o * N); exp_tc.push_back(j);
      end
    cmd = '0; cmd.op = OP_QK; cmd.rows = 16'(rows);
    issue_cmd();
    chk(exp_rd.size() == 0 && exp_tr.size() == 0, "all QK beats and tags seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
