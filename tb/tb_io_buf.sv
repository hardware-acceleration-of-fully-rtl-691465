// tb_io_buf: byte-enabled writes against a shadow model on both read
// ports, 1-cycle read latency and old data on read-during-write.
module tb_io_buf;
  localparam int NB = 8, DEPTH = 32;
  logic clk = 0, rd_en;
  logic [4:0] rd_addr, wr_addr;
  logic [NB-1:0][7:0] rd_data, rdb_data, wr_data;
  logic [4:0] rdb_addr;
  logic [NB-1:0] wr_be;
  logic [NB-1:0][7:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  io_buf #(.NB(NB), .DEPTH(DEPTH)) dut (.clk, .rda_en(rd_en), .rda_addr(rd_addr), .rda_data(rd_data), .rdb_en(rd_en), .rdb_addr(rdb_addr), .rdb_data(rdb_data), .wr_be, .wr_addr, .wr_data);
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
      logic [NB-1:0][7:0] expd, expb;
      @(negedge clk);
      rd_en = 1; rd_addr = 5'($urandom); rdb_addr = 5'($urandom);
      wr_addr = (t % 4 == 0) ? rd_addr : 5'($urandom);
      wr_be = NB'($urandom);
      for (int b = 0; b < NB; b++) wr_data[b] = 8'($urandom);
      expd = shadow[rd_addr]; expb = shadow[rdb_addr];
      for (int b = 0; b < NB; b++) if (wr_be[b]) shadow[wr_addr][b] = wr_data[b];
      @(posedge clk); #1;
      checks++;
      checks++;
      if (rdb_data != expb) begin failures++; if (failures < 10) $display("port b mismatch"); end
      if (rd_data != expd) begin failures++; if (failures < 10) $display("read mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
