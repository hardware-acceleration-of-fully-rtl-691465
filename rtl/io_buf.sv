// io_buf: the Input/Output buffer. Holds the token activations of a layer
// (input X, attention output, layer-norm outputs, FFN intermediates) as
// rows of M-byte words.
//
// Two synchronous read ports (A feeds the PUs or the first LN operand and
// the host read-back, B the second LN operand) and one byte-enabled write
// port. Read latency 1 cycle; read-during-write returns old data.
// The paper names a single input/output buffer; the two read ports and the
// depth are this design's choices.
module io_buf #(
  parameter int unsigned NB    = 16,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rda_en,
  input  logic [AW-1:0]        rda_addr,
  output logic [NB-1:0][7:0]   rda_data,
  input  logic                 rdb_en,
  input  logic [AW-1:0]        rdb_addr,
  output logic [NB-1:0][7:0]   rdb_data,
  input  logic [NB-1:0]        wr_be,
  input  logic [AW-1:0]        wr_addr,
  input  logic [NB-1:0][7:0]   wr_data
);
  logic [NB-1:0][7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rda_en) rda_data <= mem[rda_addr];
    if (rdb_en) rdb_data <= mem[rdb_addr];
    for (int b = 0; b < NB; b++)
      if (wr_be[b]) mem[wr_addr][b] <= wr_data[b];
  end
endmodule
