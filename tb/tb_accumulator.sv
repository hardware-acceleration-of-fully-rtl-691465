// tb_accumulator: random-length accumulations with a bias as initial value,
// back-to-back outputs (double buffering), hand-over one cycle after `last`,
// and the overrun flag when the read side stalls.
module tb_accumulator;
  localparam int IW = 23;
  logic clk = 0, rst_n = 0;
  logic in_valid, first, last, out_valid, out_ready, overrun;
  logic signed [IW-1:0] psum;
  logic signed [31:0] init, out_sum;
  int checks = 0, failures = 0;
  int cyc = 0;
  int exp_q[$];
  int last_cyc[$];

  accumulator #(.IW(IW), .AW(32)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks += 2;
    if (exp_q.size() == 0) failures++;
    else begin
      automatic int e = exp_q.pop_front();
      automatic int lc = last_cyc.pop_front();
      if (out_sum != e) begin failures++; if (failures < 10) $display("got %0d exp %0d", out_sum, e); end
      if (cyc - lc != 1) begin failures++; $display("handover latency %0d", cyc - lc); end
    end
  end

  initial begin
    in_valid = 0; first = 0; last = 0; psum = 0; init = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 300; o++) begin
      automatic int len = 1 + $urandom % 6;
      int sum;
      automatic int iv = $signed($urandom % 1000) - 500;
      sum = iv;
      for (int b = 0; b < len; b++) begin
        @(negedge clk);
        in_valid = 1; first = (b == 0); last = (b == len - 1); init = iv;
        psum = IW'($signed($urandom % 400000) - 200000);
        sum += int'(psum);
        if (last) begin exp_q.push_back(sum); last_cyc.push_back(cyc); end
      end
    end
    @(negedge clk) in_valid = 0; first = 0; last = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || overrun) failures++;
    // overrun: stop reading and close three sums
    out_ready = 0;
    for (int o = 0; o < 3; o++) begin
      @(negedge clk) in_valid = 1; first = 1; last = 1; psum = 1;
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
