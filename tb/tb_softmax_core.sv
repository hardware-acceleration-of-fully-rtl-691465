// tb_softmax_core: loads a 256-entry table of round(255*exp(-d/16)) and
// runs random score rows of several lengths. Expected outputs are worked out
// in the test from real-valued softmax: every output must be within 3/256 of
// exp(x_i - max)/sum_j exp(x_j - max) evaluated on the same table, and the
// row must take 3L + 1 cycles from first input to last output.
module tb_softmax_core;
  localparam int MAXL = 32;
  localparam int LW = $clog2(MAXL + 1);
  logic clk = 0, rst_n = 0;
  logic lut_we;
  logic [7:0] lut_addr, lut_data, out_data;
  logic [LW-1:0] len, out_idx;
  logic in_valid, in_ready, out_valid;
  logic signed [7:0] in_data;
  int checks = 0, failures = 0, cyc = 0;
  byte unsigned lut_m [256];

  softmax_core #(.MAXL(MAXL)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lut_we = 0; lut_addr = 0; lut_data = 0; len = 0; in_valid = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 256; d++) begin
      @(negedge clk) lut_we = 1; lut_addr = 8'(d);
      lut_data = 8'($rtoi($exp(-real'(d) / 16.0) * 255.0 + 0.5));
      lut_m[d] = lut_data;
    end
    @(negedge clk) lut_we = 0;
    for (int row = 0; row < 60; row++) begin
      automatic int L = (row % 3 == 0) ? MAXL : 4 + $urandom % (MAXL - 4);
      byte x [MAXL];
      real e [MAXL];
      real s;
      int mx, t0, got;
      mx = -128;
      for (int i = 0; i < L; i++) begin
        x[i] = (row % 7 == 6) ? 8'sd5 : byte'($urandom % 120) - 60;
        if (x[i] > mx) mx = x[i];
      end
      s = 0;
      for (int i = 0; i < L; i++) begin
        automatic int d = mx - x[i];
        e[i] = real'(lut_m[d > 255 ? 255 : d]);
        s += e[i];
      end
      len = LW'(L);
      @(negedge clk);
      checks++;
      if (!in_ready) failures++;
      t0 = cyc;
      for (int i = 0; i < L; i++) begin
        in_valid = 1; in_data = x[i];
        @(negedge clk);
      end
      in_valid = 0;
      got = 0;
      while (got < L) begin
        @(posedge clk); #1;
        if (out_valid) begin
          automatic real ref_v = e[out_idx] / s * 256.0;
          if (ref_v > 255.0) ref_v = 255.0;
          checks++;
          if (out_idx != LW'(got) || (real'(out_data) - ref_v > 3.0 || ref_v - real'(out_data) > 3.0)) begin
            failures++;
            if (failures < 10) $display("row %0d idx %0d got %0d ref %f", row, out_idx, out_data, ref_v);
          end
          got++;
        end
      end
      checks++;
      if (cyc - t0 != 3 * L + 1) begin failures++; $display("row cycles %0d for L=%0d", cyc - t0, L); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
