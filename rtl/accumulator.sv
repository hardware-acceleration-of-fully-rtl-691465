// accumulator: the Accu adder and the double-buffered Psum Buf of a PE.
//
// Each valid BIM partial sum is added to the open psum bank (set to `init`,
// e.g. the bias, by `first`). On `last` the open bank is closed, handed to the read side and
// the other bank is opened, so accumulation of the next output can start on
// the following cycle while the requantizer drains the closed one. The read
// side presents a closed bank on out_valid/out_sum and frees it when
// out_ready is high. `overrun` flags a close into a bank that is still
// full (the pipeline was driven faster than it drains).
// Interface: one partial sum per cycle in; one 32-bit sum out per closed
// bank, available the cycle after `last`.
// The paper gives the Accu/Psum Buf pair and the double buffering; the
// 32-bit width and the valid/ready handshake are this design's choices.
module accumulator #(
  parameter int unsigned IW = 23,
  parameter int unsigned AW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic signed [IW-1:0] psum,
  input  logic signed [AW-1:0] init,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic signed [AW-1:0] out_sum,
  output logic                 overrun
);
  logic signed [AW-1:0] bank [2];
  logic [1:0]           full;
  logic                 wr_sel, rd_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank[0] <= '0; bank[1] <= '0;
      full    <= '0;
      wr_sel  <= 1'b0;
      rd_sel  <= 1'b0;
      overrun <= 1'b0;
    end else begin
      if (out_valid && out_ready) begin
        full[rd_sel] <= 1'b0;
        rd_sel       <= ~rd_sel;
      end
      if (in_valid) begin
        bank[wr_sel] <= (first ? init : bank[wr_sel]) + AW'(psum);
        if (last) begin
          if (full[wr_sel]) overrun <= 1'b1;
          full[wr_sel] <= 1'b1;
          wr_sel       <= ~wr_sel;
        end
      end
    end
  end

  assign out_valid = full[rd_sel];
  assign out_sum   = bank[rd_sel];
endmodule
