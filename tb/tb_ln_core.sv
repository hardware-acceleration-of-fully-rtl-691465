// tb_ln_core: rows through the layer-norm core, compared with an integer
// model of the specified arithmetic (scaled add, mean, variance, integer
// square root, reciprocal, gamma/beta), plus a real-valued sanity check
// that each normalized row has about zero mean.
// Phase A: 30 lone rows of random length W; each must take 3W + 24 cycles
// from its first input word to its last output word.
// Phase B: 24 rows of one length fed back to back as soon as in_ready
// allows (the way the controller feeds a layer): the rows must come out in
// order and correct, successive rows must leave every W + 23 cycles, and
// a row must be entering the core while an earlier one is still in it.
module tb_ln_core;
  localparam int LANES = 4, MAXW = 8, NB = 24;
  localparam int WW = $clog2(MAXW + 1);
  logic clk = 0, rst_n = 0;
  logic [WW-1:0] nwords, param_addr, out_widx;
  logic [7:0] s1, s2;
  logic [5:0] ln_shift;
  logic in_valid, in_ready, out_valid;
  logic [LANES-1:0][7:0] a, b, gamma, beta, out_word;
  int checks = 0, failures = 0, cyc = 0;
  byte gm [MAXW*LANES], bt [MAXW*LANES];
  byte xa [NB][MAXW*LANES], xb [NB][MAXW*LANES];
  int  expv [NB][MAXW*LANES];

  ln_core #(.LANES(LANES), .MAXWORDS(MAXW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // LN parameter buffer model: data one cycle after the address
  always @(posedge clk)
    for (int l = 0; l < LANES; l++) begin
      gamma[l] <= gm[param_addr * LANES + l];
      beta[l]  <= bt[param_addr * LANES + l];
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint isqrt(longint v);
    automatic longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // random row k of W words and its expected output
  task automatic make_row(int k, int W);
    automatic int D = W * LANES;
    longint z [MAXW*LANES], d [MAXW*LANES];
    longint sum, mean, sq, var_v, sd, inv;
    sum = 0;
    for (int i = 0; i < D; i++) begin
      xa[k][i] = byte'($urandom); xb[k][i] = byte'($urandom);
      z[i] = longint'(xa[k][i]) * s1 + longint'(xb[k][i]) * s2;
      sum += z[i];
    end
    mean = sum / D;
    sq = 0;
    for (int i = 0; i < D; i++) begin d[i] = z[i] - mean; sq += d[i] * d[i]; end
    var_v = sq / D;
    sd = isqrt(var_v);
    inv = (64'sd1 <<< 24) / (sd == 0 ? 1 : sd);
    for (int i = 0; i < D; i++) begin
      automatic longint p = d[i] * inv * gm[i];
      automatic longint r = (p + (64'sd1 <<< 23)) >>> 24;
      r += bt[i];
      expv[k][i] = (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
    end
  endtask

  // check one output word of row k; returns the real-valued normalized sum
  task automatic check_word(int k, int got, inout real rsum);
    checks++;
    if (out_widx != WW'(got)) failures++;
    for (int l = 0; l < LANES; l++) begin
      automatic int i = int'(out_widx) * LANES + l;
      checks++;
      rsum += real'($signed(out_word[l]) - bt[i]) / real'(gm[i]);
      if ($signed(out_word[l]) != expv[k][i]) begin
        failures++;
        if (failures < 10) $display("row %0d el %0d got %0d exp %0d", k, i, $signed(out_word[l]), expv[k][i]);
      end
    end
  endtask

  task automatic set_params(int W);
    s1 = 8'(20 + $urandom % 100); s2 = 8'(20 + $urandom % 100);
    ln_shift = 6'd24;
    for (int i = 0; i < W * LANES; i++) begin
      gm[i] = byte'(16 + $urandom % 24); bt[i] = byte'($urandom % 16) - 8;
    end
  endtask

  int t_out [NB];
  int overlap = 0;

  initial begin
    in_valid = 0; a = '0; b = '0; nwords = 0; s1 = 0; s2 = 0; ln_shift = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- phase A: lone rows ----------------
    for (int row = 0; row < 30; row++) begin
      automatic int W = 1 + $urandom % MAXW;
      int t0, got;
      real rsum;
      set_params(W);
      make_row(0, W);
      nwords = WW'(W);
      @(negedge clk);
      checks++;
      if (!in_ready) failures++;
      t0 = cyc;
      for (int w = 0; w < W; w++) begin
        in_valid = 1;
        for (int l = 0; l < LANES; l++) begin a[l] = xa[0][w*LANES+l]; b[l] = xb[0][w*LANES+l]; end
        @(negedge clk);
      end
      in_valid = 0;
      got = 0; rsum = 0;
      while (got < W) begin
        @(posedge clk); #1;
        if (out_valid) begin check_word(0, got, rsum); got++; end
      end
      checks++;
      if (rsum / (W * LANES) > 0.2 || rsum / (W * LANES) < -0.2) begin failures++; $display("mean of normalized row %f", rsum / (W * LANES)); end
      checks++;
      if (cyc - t0 != 3 * W + 24) begin failures++; $display("row cycles %0d W=%0d", cyc - t0, W); end
      @(negedge clk);
    end
    // ---------------- phase B: back-to-back rows ----------------
    begin
      automatic int W = MAXW;
      set_params(W);
      for (int k = 0; k < NB; k++) make_row(k, W);
      nwords = WW'(W);
      fork
        begin : feed
          @(negedge clk);
          for (int k = 0; k < NB; k++) begin
            while (!in_ready) @(negedge clk);
            for (int w = 0; w < W; w++) begin
              in_valid = 1;
              for (int l = 0; l < LANES; l++) begin a[l] = xa[k][w*LANES+l]; b[l] = xb[k][w*LANES+l]; end
              @(negedge clk);
            end
            in_valid = 0;
          end
        end
        begin : drain
          for (int k = 0; k < NB; k++) begin
            automatic int got = 0;
            automatic real rsum = 0;
            while (got < W) begin
              @(posedge clk); #1;
              if (out_valid) begin check_word(k, got, rsum); got++; end
              if (out_valid && in_valid) overlap++;
            end
            t_out[k] = cyc;
          end
        end
      join
      for (int k = 2; k < NB; k++) begin
        checks++;
        if (t_out[k] - t_out[k-1] != W + 23) begin
          failures++;
          $display("row %0d left %0d cycles after row %0d", k, t_out[k] - t_out[k-1], k - 1);
        end
      end
      checks++;
      if (overlap == 0) begin failures++; $display("rows never overlapped"); end
      $display("back-to-back: %0d rows of %0d words in %0d cycles, %0d cycles with input and output active",
               NB, W, t_out[NB-1] - t_out[0], overlap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
