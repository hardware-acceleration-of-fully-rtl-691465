// tb_quant: random requantization against an integer model, including
// saturation, and a check of the 3-cycle latency.
module tb_quant;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [31:0] acc, bias;
  logic [31:0] sf;
  logic [5:0] shift;
  logic out_valid;
  logic signed [7:0] y;
  int checks = 0, failures = 0;
  int sat_seen = 0;

  quant dut (.*);
  always #5 clk = ~clk;

  longint exp_q[$];
  int     t_in[$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model(longint a, longint b, longint f, int sh);
    longint p, r;
    p = (a + b) * f;
    r = (sh == 0) ? p : ((p + (64'sd1 <<< (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return r;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) failures++;
    else begin
      automatic longint e = exp_q.pop_front();
      automatic int ti = t_in.pop_front();
      if (longint'(y) != e) begin failures++; if (failures < 10) $display("got %0d exp %0d", y, e); end
      if (cyc - ti != 3) begin failures++; $display("latency %0d", cyc - ti); end
      if (e == 127 || e == -128) sat_seen++;
    end
  end

  initial begin
    in_valid = 0; acc = 0; bias = 0; sf = 0; shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      acc   = $signed($urandom % 200000) - 100000;
      bias  = $signed($urandom % 2000) - 1000;
      sf    = $urandom % 65536;
      shift = 6'(8 + $urandom % 20);
      if (in_valid) begin
        exp_q.push_back(model(acc, bias, longint'(sf), shift));
        t_in.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || sat_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
