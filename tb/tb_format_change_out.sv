// tb_format_change_out: for each destination, random (row, col) tags are
// written into byte-addressed models of the four buffers through the
// module's outputs; the test then checks that every element sits where its
// reader expects it: Q row r at bank r mod N, K row-major, V transposed,
// Attn row r+n in bank n.
module tb_format_change_out;
  import fq_pkg::*;
  localparam int M = 8, N = 4, SEQ = 16, DH = 16;
  localparam int QD = (SEQ/N)*(DH/M), KD = SEQ*(DH/M), VD = (DH/N)*(SEQ/M), AD = (SEQ/N)*(SEQ/M);
  logic valid, to_att;
  dst_e dst;
  logic [15:0] row, col;
  logic [N-1:0][7:0] y;
  logic [N*M-1:0] q_be, v_be, a_be;
  logic [M-1:0] k_be;
  logic [$clog2(QD)-1:0] q_addr;
  logic [$clog2(KD)-1:0] k_addr;
  logic [$clog2(VD)-1:0] v_addr;
  logic [$clog2(AD)-1:0] a_addr;
  logic [N*M-1:0][7:0] q_data, v_data, a_data;
  logic [M-1:0][7:0] k_data;
  int checks = 0, failures = 0;

  format_change_out #(.M(M), .N(N), .SEQ(SEQ), .DH(DH)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; to_att = 0; dst = DST_Q; row = 0; col = 0; y = '0;
    for (int t = 0; t < 400; t++) begin
      int r, c, sel;
      sel = t % 4;
      r = $urandom % SEQ;
      c = (sel == 3) ? ($urandom % SEQ) : N * ($urandom % (DH / N));
      if (sel == 3) r = N * (r / N);
      valid = 1; to_att = (sel == 3); dst = dst_e'(sel); row = 16'(r); col = 16'(c);
      for (int n = 0; n < N; n++) y[n] = 8'($urandom);
      #1;
      chk($countones(q_be) + $countones(k_be) + $countones(v_be) + $countones(a_be) == N, "N bytes enabled");
      for (int n = 0; n < N; n++) begin
        case (sel)
          0: begin   // Q: element (r, c+n) read by PE (r mod N), word (r/N, (c+n)/M)
            chk(q_addr == (r / N) * (DH / M) + (c + n) / M, "Q addr");
            chk(q_be[(r % N) * M + (c + n) % M] && q_data[(r % N) * M + (c + n) % M] == y[n], "Q byte");
          end
          1: begin   // K: row-major
            chk(k_addr == r * (DH / M) + (c + n) / M, "K addr");
            chk(k_be[(c + n) % M] && k_data[(c + n) % M] == y[n], "K byte");
          end
          2: begin   // V^T: feature c+n is row (c+n) of V^T, held by PE (c+n) mod N
            chk(v_addr == ((c + n) / N) * (SEQ / M) + r / M, "V addr");
            chk(v_be[((c + n) % N) * M + r % M] && v_data[((c + n) % N) * M + r % M] == y[n], "V byte");
          end
          default: begin  // Attn: score (r+n, c), bank (r+n) mod N
            chk(a_addr == ((r + n) / N) * (SEQ / M) + c / M, "A addr");
            chk(a_be[((r + n) % N) * M + c % M] && a_data[((r + n) % N) * M + c % M] == y[n], "A byte");
          end
        endcase
      end
    end
    valid = 0; #1;
    chk(q_be == 0 && k_be == 0 && v_be == 0 && a_be == 0, "no write without valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
