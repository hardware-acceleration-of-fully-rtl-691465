// tb_pe: PE end to end. Random dot products of random length in 8x4 mode
// (signed activations x signed 4-bit weights) and 8x8 mode (8-bit second
// operand packed as bytes, two beats per activation word), with bias and
// requantization, checked against an integer model; checks the 4-cycle
// latency from the last beat to y_valid.
module tb_pe;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, first, last, half, a_signed, y_valid, overrun;
  fq_pkg::bim_mode_e mode;
  logic [M-1:0][7:0] act_word;
  logic [M*4-1:0] wt;
  logic signed [31:0] bias;
  logic [31:0] sf;
  logic [5:0] shift;
  logic signed [7:0] y;
  int checks = 0, failures = 0, cyc = 0;
  longint exp_q[$];
  int last_cyc[$];

  pe #(.M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rq(longint acc, longint f, int sh);
    automatic longint p = acc * f, r;
    r = (p + (64'sd1 <<< (sh - 1))) >>> sh;
    return (r > 127) ? 127 : (r < -128) ? -128 : r;
  endfunction

  always @(posedge clk) if (rst_n && y_valid) begin
    checks += 2;
    if (exp_q.size() == 0) failures++;
    else begin
      automatic longint e = exp_q.pop_front();
      automatic int lc = last_cyc.pop_front();
      if (longint'(y) != e) begin failures++; if (failures < 10) $display("got %0d exp %0d", y, e); end
      if (cyc - lc != 4) begin failures++; $display("latency %0d", cyc - lc); end
    end
  end

  initial begin
    in_valid = 0; first = 0; last = 0; half = 0; a_signed = 1; mode = fq_pkg::MODE_8X4;
    act_word = '0; wt = '0; bias = 0; sf = 300; shift = 12;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 200; o++) begin
      automatic int len = 2 + $urandom % 8;
      longint acc;
      automatic fq_pkg::bim_mode_e md = o[0] ? fq_pkg::MODE_8X8 : fq_pkg::MODE_8X4;
      automatic logic as = (o % 3 != 0);
      automatic logic signed [31:0] bs = $signed($urandom % 2000) - 1000;
      acc = bs;
      for (int b = 0; b < len; b++) begin
        @(negedge clk);
        in_valid = 1; first = (b == 0); last = (b == len - 1);
        mode = md; a_signed = as; half = b[0]; bias = bs;
        for (int i = 0; i < M; i++) act_word[i] = 8'($urandom);
        wt = {$urandom, $urandom};
        if (md == fq_pkg::MODE_8X4)
          for (int i = 0; i < M; i++)
            acc += (as ? longint'($signed(act_word[i])) : longint'(act_word[i])) * longint'($signed(wt[4*i +: 4]));
        else
          for (int i = 0; i < M/2; i++)
            acc += (as ? longint'($signed(act_word[half*M/2 + i])) : longint'(act_word[half*M/2 + i]))
                   * longint'($signed(wt[8*i +: 8]));
        if (last) begin exp_q.push_back(rq(acc, sf, shift)); last_cyc.push_back(cyc); end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || overrun) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
