// tb_sram_1r1w: byte-enabled writes against a shadow model, 1-cycle read
// latency and old-data on read-during-write.
module tb_sram_1r1w;
  localparam int NB = 8, DEPTH = 32;
  logic clk = 0, rd_en;
  logic [4:0] rd_addr, wr_addr;
  logic [NB-1:0][7:0] rd_data, wr_data;
  logic [NB-1:0] wr_be;
  logic [NB-1:0][7:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_1r1w #(.NB(NB), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_be = '0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) wr_be = '1; wr_addr = 5'(a);
      for (int b = 0; b < NB; b++) wr_data[b] = 8'($urandom);
      shadow[a] = wr_data;
    end
    for (int t = 0; t < 2000; t++) begin
      logic [NB-1:0][7:0] expd;
      @(negedge clk);
      rd_en = 1; rd_addr = 5'($urandom);
      wr_addr = (t % 4 == 0) ? rd_addr : 5'($urandom);
      wr_be = NB'($urandom);
      for (int b = 0; b < NB; b++) wr_data[b] = 8'($urandom);
      expd = shadow[rd_addr];
      for (int b = 0; b < NB; b++) if (wr_be[b]) shadow[wr_addr][b] = wr_data[b];
      @(posedge clk); #1;
      checks++;
      if (rd_data != expd) begin failures++; if (failures < 10) $display("read mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
