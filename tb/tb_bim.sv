// tb_bim: self-checking test of the bit-split inner-product module.
// Random 8x4 dot products (M terms, signed/unsigned 8-bit operands) and
// 8x8 dot products (M/2 terms, second operand split into a signed high and
// an unsigned low nibble by the test itself) against integer sums.
module tb_bim;
  localparam int M = 16;
  localparam int OW = 14 + $clog2(M) + 4 + 1;
  fq_pkg::bim_mode_e mode;
  logic a_signed;
  logic [M-1:0][7:0] a;
  logic [M-1:0][3:0] w;
  logic [M-1:0] s;
  logic signed [OW-1:0] out;
  int checks = 0, failures = 0;

  bim #(.M(M)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int exp_v;
      logic [M/2-1:0][7:0] b;
      a_signed = t[0];
      for (int i = 0; i < M; i++) a[i] = 8'($urandom);
      if (t % 5 == 4) a = '1;
      exp_v = 0;
      if (t[1]) begin
        mode = fq_pkg::MODE_8X4;
        for (int i = 0; i < M; i++) begin
          w[i] = 4'($urandom);
          s[i] = 1'b1;
          exp_v += (a_signed ? int'($signed(a[i])) : int'(a[i])) * int'($signed(w[i]));
        end
      end else begin
        mode = fq_pkg::MODE_8X8;
        for (int i = 0; i < M/2; i++) begin
          b[i] = 8'($urandom);
          w[i] = b[i][7:4];   s[i] = 1'b1;
          w[i+M/2] = b[i][3:0]; s[i+M/2] = 1'b0;
          a[i+M/2] = a[i];
          exp_v += (a_signed ? int'($signed(a[i])) : int'(a[i])) * int'($signed(b[i]));
        end
      end
      #1;
      checks++;
      if (int'(out) != exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d mode=%0d got %0d exp %0d", t, mode, out, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
