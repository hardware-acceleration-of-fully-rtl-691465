// tb_weight_buf: ping-pong protocol. The test fills bank after bank while
// the read side consumes them, checking that reads return the words of the
// bank that was committed (not the one being filled), that can_fill drops
// when both banks are full, and that rd_full follows commit/release.
module tb_weight_buf;
  localparam int WB = 8, DEPTH = 6;
  logic clk = 0, rst_n = 0;
  logic [WB-1:0] ld_be;
  logic [2:0] ld_addr, rd_addr;
  logic [WB-1:0][7:0] ld_data, rd_data;
  logic commit, can_fill, rd_en, rd_full, release_bank;
  int checks = 0, failures = 0;

  weight_buf #(.WB(WB), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WB-1:0][7:0] pat(int tile, int a);
    logic [WB-1:0][7:0] p;
    for (int b = 0; b < WB; b++) p[b] = 8'(tile * 37 + a * 11 + b * 3);
    return p;
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int tile);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) ld_be = '1; ld_addr = 3'(a); ld_data = pat(tile, a);
    end
    @(negedge clk) ld_be = '0; commit = 1;
    @(negedge clk) commit = 0;
  endtask

  task automatic drain(int tile);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) rd_en = 1; rd_addr = 3'(a);
      @(posedge clk); #1;
      chk(rd_data == pat(tile, a), "read data of committed bank");
    end
    @(negedge clk) rd_en = 0; release_bank = 1;
    @(negedge clk) release_bank = 0;
  endtask

  initial begin
    ld_be = '0; ld_addr = 0; ld_data = '0; commit = 0; rd_en = 0; rd_addr = 0; release_bank = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(can_fill && !rd_full, "empty after reset");
    fill(0);
    chk(rd_full && can_fill, "one bank full");
    fill(1);
    chk(rd_full && !can_fill, "both banks full");
    drain(0);
    chk(can_fill && rd_full, "bank 0 released");
    fill(2);                 // goes into bank 0 while bank 1 is read
    drain(1);
    drain(2);
    chk(!rd_full && can_fill, "all drained");
    for (int t = 3; t < 10; t++) begin fill(t); drain(t); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
