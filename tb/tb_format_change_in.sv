// tb_format_change_in: checks the lane mapping of the input format change
// in both modes and both halves against the documented placement.
module tb_format_change_in;
  localparam int M = 16;
  fq_pkg::bim_mode_e mode;
  logic half;
  logic [M-1:0][7:0] act_word, a;
  logic [M*4-1:0] wt;
  logic [M-1:0][3:0] w;
  logic [M-1:0] s;
  int checks = 0, failures = 0;

  format_change_in #(.M(M)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      mode = t[0] ? fq_pkg::MODE_8X8 : fq_pkg::MODE_8X4;
      half = t[1];
      for (int i = 0; i < M; i++) act_word[i] = 8'($urandom);
      wt = {$urandom, $urandom};
      #1;
      for (int i = 0; i < M; i++) begin
        if (mode == fq_pkg::MODE_8X4) begin
          chk(a[i] == act_word[i] && w[i] == wt[4*i +: 4] && s[i], "8x4 lane");
        end else if (i < M/2) begin
          chk(a[i] == act_word[half*M/2 + i] && w[i] == wt[8*i+4 +: 4] && s[i], "8x8 high lane");
        end else begin
          chk(a[i] == act_word[half*M/2 + i - M/2] && w[i] == wt[8*(i-M/2) +: 4] && !s[i], "8x8 low lane");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
