// sram_1r1w: on-chip buffer with one synchronous read port and one write
// port with byte enables.
//
// Used for every plain on-chip buffer of the accelerator: the per-head Q, K,
// V and Attn buffers, the bias buffer, the scale buffer and the layer-norm
// parameter buffer. A word is NB bytes. Read data appears one cycle after
// rd_en (block-RAM behaviour); a read and a write of the same address in
// one cycle return the old data. Contents are not reset.
// The paper names these buffers; their word widths and depths are this
// design's choices, set by the instantiating module.
module sram_1r1w #(
  parameter int unsigned NB    = 16,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [NB-1:0][7:0]   rd_data,
  input  logic [NB-1:0]        wr_be,
  input  logic [AW-1:0]        wr_addr,
  input  logic [NB-1:0][7:0]   wr_data
);
  logic [NB-1:0][7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    for (int b = 0; b < NB; b++)
      if (wr_be[b]) mem[wr_addr][b] <= wr_data[b];
  end
endmodule
