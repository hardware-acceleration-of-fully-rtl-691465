// weight_buf: double-buffered (ping-pong) weight buffer.
//
// Two banks of DEPTH words, each word WB bytes (the 4-bit weights of every
// PE of every PU for one beat). The host fills the bank selected by fill_sel
// through a byte-enabled port (`ld_*`), then pulses `commit`, which marks
// the bank full and moves fill_sel to the other bank. The compute side reads
// the bank selected by rd_sel once `rd_full` is high and pulses `release`
// when it is done with it, which marks the bank empty and moves rd_sel on.
// So loading the next sub-stage's weights overlaps the compute of the
// current one. `can_fill` tells the host the fill bank is free; a commit or
// write into a full bank is a protocol error (assertion).
// Read latency 1 cycle. The paper states the weight buffer is double
// buffered to hide off-chip transfers; the commit/release handshake is this
// design's choice.
module weight_buf #(
  parameter int unsigned WB    = 768,
  parameter int unsigned DEPTH = 192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // fill side
  input  logic [WB-1:0]        ld_be,
  input  logic [AW-1:0]        ld_addr,
  input  logic [WB-1:0][7:0]   ld_data,
  input  logic                 commit,
  output logic                 can_fill,
  // compute side
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [WB-1:0][7:0]   rd_data,
  output logic                 rd_full,
  input  logic                 release_bank
);
  logic [WB-1:0][7:0] mem [2][DEPTH];
  logic [1:0]         full;
  logic               fill_sel, rd_sel;

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_sel][rd_addr];
    for (int b = 0; b < WB; b++)
      if (ld_be[b]) mem[fill_sel][ld_addr][b] <= ld_data[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full     <= '0;
      fill_sel <= 1'b0;
      rd_sel   <= 1'b0;
    end else begin
      if (commit) begin
        full[fill_sel] <= 1'b1;
        fill_sel       <= ~fill_sel;
      end
      if (release_bank) begin
        full[rd_sel] <= 1'b0;
        rd_sel       <= ~rd_sel;
      end
    end
  end

  assign can_fill = !full[fill_sel];
  assign rd_full  = full[rd_sel];

  a_commit_free: assert property (@(posedge clk) disable iff (!rst_n) commit |-> !full[fill_sel])
    else $error("weight_buf: commit into a full bank");
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) release_bank |-> full[rd_sel])
    else $error("weight_buf: release of an empty bank");
endmodule
