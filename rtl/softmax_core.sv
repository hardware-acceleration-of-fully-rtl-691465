// softmax_core: softmax over one row of int8 attention scores.
//
// Works row by row in three passes over an internal row buffer:
//   LOAD  take `len` int8 scores (one per cycle while in_ready) and track
//         the row maximum;
//   EXP   for each score look up e = LUT[max - x] (0..255 clamped), sum the e
//         and keep them; since every x <= max the table only has to cover
//         exp() on [.., 0], i.e. values in (0, 1], as 8-bit numbers;
//   NORM  one division R = 2^24 / sum, then for each element
//         out = min(255, (e*R + 2^15) >> 16), i.e. e/sum in unsigned 0.8
//         fixed point, emitted on out_valid/out_data with its index.
// The 256-entry LUT is written through lut_we/lut_addr/lut_data before use
// (it is part of the parameter buffer). A row of L elements takes 3L+1
// cycles from first input to last output; a new row can be fed as soon as in_ready returns.
// From the paper: max subtraction, an exp LUT of 256 entries, 8-bit exp
// values and 8-bit output. The reciprocal-multiply normalization, the LUT
// indexing by (max - x) and the one-element-per-cycle rate are this
// design's choices.
module softmax_core #(
  parameter int unsigned MAXL = 128,
  localparam int unsigned LW  = $clog2(MAXL + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               lut_we,
  input  logic [7:0]         lut_addr,
  input  logic [7:0]         lut_data,
  input  logic [LW-1:0]      len,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [7:0]  in_data,
  output logic               out_valid,
  output logic [LW-1:0]      out_idx,
  output logic [7:0]         out_data
);
  typedef enum logic [1:0] {S_LOAD, S_EXP, S_RECIP, S_NORM} state_e;

  state_e             state;
  logic [7:0]         lut [256];
  logic [7:0]         row [MAXL];
  logic [LW-1:0]      cnt;
  logic [$clog2(MAXL)-1:0] ci;     // row buffer index (cnt < MAXL)
  logic signed [7:0]  mx;
  logic [23:0]        sum;
  logic [24:0]        recip;
  logic [8:0]         diff;
  logic [7:0]         e_k;
  logic [32:0]        prod;

  always_ff @(posedge clk) if (lut_we) lut[lut_addr] <= lut_data;

  assign in_ready = (state == S_LOAD);
  assign ci       = $clog2(MAXL)'(cnt);
  assign diff     = 9'($signed({mx[7], mx}) - $signed({row[ci][7], row[ci]}));
  assign e_k      = lut[(diff > 9'd255) ? 8'd255 : diff[7:0]];
  assign prod     = 33'(row[ci]) * 33'(recip) + 33'd32768;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      cnt       <= '0;
      mx        <= -8'sd128;
      sum       <= '0;
      recip     <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          row[ci] <= in_data;
          if (cnt == 0 || in_data > mx) mx <= in_data;
          if (cnt == len - 1) begin
            cnt   <= '0;
            sum   <= '0;
            state <= S_EXP;
          end else cnt <= cnt + 1'b1;
        end
        S_EXP: begin
          row[ci] <= e_k;
          sum      <= sum + 24'(e_k);
          if (cnt == len - 1) begin
            cnt   <= '0;
            state <= S_RECIP;
          end else cnt <= cnt + 1'b1;
        end
        S_RECIP: begin
          recip <= (sum == 0) ? 25'h1ffffff : 25'(25'h1000000 / 25'(sum));
          state <= S_NORM;
        end
        S_NORM: begin
          out_valid <= 1'b1;
          out_idx   <= cnt;
          out_data  <= (prod[32:16] > 17'd255) ? 8'd255 : prod[23:16];
          if (cnt == len - 1) begin
            cnt   <= '0;
            state <= S_LOAD;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
