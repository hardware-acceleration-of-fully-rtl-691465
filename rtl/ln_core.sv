// ln_core: residual add + layer normalization, LANES elements per cycle.
//
// A coarse-grained three-stage pipeline over rows of nwords*LANES elements.
// Each stage works on a whole row held in one of three row banks; the banks
// rotate, so stage 1 can take row k+2 while stage 2 works on row k+1 and
// stage 3 emits row k:
//   stage 1  z = a*s1 + b*s2 for the two int8 input vectors a (residual)
//            and b (sub-layer output) with their 8-bit scale factors, and
//            mean = sum(z) / D;                                  W cycles
//   stage 2  d = z - mean (written back) and var = sum(d^2) / D, then
//            std = isqrt(var) (20-cycle bit-serial square root) and
//            inv = 2^24 / std;                                   W + 21 cycles
//   stage 3  y = sat8( round(d * inv * gamma / 2^ln_shift) + beta ) with
//            the int8 gamma/beta of each element read from the LN parameter
//            buffer (address param_addr, data one cycle later).  W cycles
// A finished row moves on when the next stage is empty (one cycle).
// Input: in_ready is high while stage 1 is empty; once the first word of a
// row is taken, the other nwords-1 words must follow on consecutive cycles.
// nwords, s1, s2 and ln_shift must stay constant while rows are in flight.
// Output: one word per cycle on out_valid with its index out_widx.
// A lone row takes 3W + 24 cycles from its first input word to its last
// output word; back-to-back rows leave the core every W + 23 cycles
// (stage 2 is the slowest stage).
// The stage split follows the paper (stage 1: two vectors and two scale
// factors in, one vector and a mean out; stage 2: mean subtraction and
// variance; stage 3: element-wise multiplication), as does pipelining the
// stages across rows. The fixed-point formats, the square root, the division
// and the three rotating row banks are this design's choices.
module ln_core #(
  parameter int unsigned LANES    = 16,
  parameter int unsigned MAXWORDS = 192,
  localparam int unsigned WW      = $clog2(MAXWORDS + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [WW-1:0]              nwords,
  input  logic [7:0]                 s1,
  input  logic [7:0]                 s2,
  input  logic [5:0]                 ln_shift,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [LANES-1:0][7:0]      a,
  input  logic [LANES-1:0][7:0]      b,
  output logic [WW-1:0]              param_addr,
  input  logic [LANES-1:0][7:0]      gamma,
  input  logic [LANES-1:0][7:0]      beta,
  output logic                       out_valid,
  output logic [WW-1:0]              out_widx,
  output logic [LANES-1:0][7:0]      out_word
);
  typedef logic signed [LANES-1:0][23:0] rowword_t;
  typedef enum logic [1:0] {T2_IDLE, T2_RUN, T2_SQRT, T2_DONE} st2_e;

  logic signed [39:0] dlen;
  assign dlen = 40'(nwords) * 40'(LANES);

  // ---------------- stage state ----------------
  // stage 1
  logic               busy1, done1;
  logic [1:0]         p1;
  logic [WW-1:0]      cnt1;
  logic signed [39:0] sum1;
  logic signed [23:0] mean1;
  // stage 2
  st2_e               st2;
  logic [1:0]         p2;
  logic [WW-1:0]      cnt2;
  logic signed [23:0] mean2;
  logic [47:0]        sq2;
  logic [39:0]        op, res, one;
  logic [4:0]         it;
  logic [24:0]        inv2;
  // stage 3
  logic               busy3;
  logic [1:0]         p3;
  logic [WW-1:0]      cnt3;
  logic [24:0]        inv3;
  logic               v3;
  logic [1:0]         p3q;
  logic [WW-1:0]      wq;
  logic [24:0]        inv3q;

  logic take12, take23;
  assign take12   = done1 && st2 == T2_IDLE;
  assign take23   = st2 == T2_DONE && !busy3;
  assign in_ready = !busy1 && !done1;
  assign param_addr = cnt3;

  // ---------------- three row banks ----------------
  // bank j: written by stage 1 (z) or stage 2 (d); read by stage 2 and 3
  rowword_t rd2 [3], rd3 [3];
  logic     we1, we2;
  rowword_t z_w, d_w;
  assign we1 = in_valid && (busy1 || in_ready);
  assign we2 = st2 == T2_RUN;

  for (genvar j = 0; j < 3; j++) begin : g_bank
    rowword_t mem [MAXWORDS];
    always_ff @(posedge clk) begin
      if (we1 && p1 == 2'(j))      mem[cnt1] <= z_w;
      else if (we2 && p2 == 2'(j)) mem[cnt2] <= d_w;
    end
    assign rd2[j] = mem[cnt2];
    assign rd3[j] = mem[wq];
  end

  // ---------------- lane arithmetic ----------------
  logic signed [39:0] zsum_w;
  logic [47:0]        dsq_w;
  rowword_t           row2, row3;
  assign row2 = rd2[p2];
  assign row3 = rd3[p3q];
  always_comb begin
    zsum_w = '0;
    dsq_w  = '0;
    for (int l = 0; l < LANES; l++) begin
      z_w[l] = 24'($signed(a[l]) * $signed({1'b0, s1}) + $signed(b[l]) * $signed({1'b0, s2}));
      zsum_w += 40'($signed(z_w[l]));
      d_w[l] = $signed(row2[l]) - mean2;
      dsq_w += 48'(64'($signed(d_w[l]) * $signed(d_w[l])));
    end
  end

  logic [LANES-1:0][7:0] y_w;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [63:0] n, p, r;
      n = 64'($signed(row3[l])) * $signed({39'd0, inv3q});
      p = n * 64'($signed(gamma[l]));
      r = (ln_shift == 0) ? p : ((p + (64'sd1 <<< (ln_shift - 1))) >>> ln_shift);
      y_w[l] = fq_pkg::sat8(r + 64'($signed(beta[l])));
    end
  end

  // ---------------- stage 1 ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy1 <= 1'b0; done1 <= 1'b0; p1 <= '0; cnt1 <= '0; sum1 <= '0; mean1 <= '0;
    end else begin
      if (take12) begin
        done1 <= 1'b0;
        p1    <= (p1 == 2'd2) ? 2'd0 : p1 + 2'd1;
      end
      if (we1) begin
        if (cnt1 == nwords - 1) begin
          mean1 <= 24'((sum1 + zsum_w) / dlen);
          sum1  <= '0;
          cnt1  <= '0;
          busy1 <= 1'b0;
          done1 <= 1'b1;
        end else begin
          sum1  <= sum1 + zsum_w;
          cnt1  <= cnt1 + 1'b1;
          busy1 <= 1'b1;
        end
      end
    end
  end

  // ---------------- stage 2 ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st2 <= T2_IDLE; p2 <= '0; cnt2 <= '0; mean2 <= '0; sq2 <= '0;
      op <= '0; res <= '0; one <= '0; it <= '0; inv2 <= '0;
    end else begin
      unique case (st2)
        T2_IDLE: if (take12) begin
          p2    <= p1;
          mean2 <= mean1;
          cnt2  <= '0;
          sq2   <= '0;
          st2   <= T2_RUN;
        end
        T2_RUN: begin
          if (cnt2 == nwords - 1) begin
            op   <= 40'((sq2 + dsq_w) / 48'(dlen));
            res  <= '0;
            one  <= 40'd1 << 38;
            it   <= '0;
            cnt2 <= '0;
            st2  <= T2_SQRT;
          end else begin
            sq2  <= sq2 + dsq_w;
            cnt2 <= cnt2 + 1'b1;
          end
        end
        T2_SQRT: begin
          if (it == 5'd20) begin
            inv2 <= 25'(25'h1000000 / ((res == 0) ? 40'd1 : res));
            st2  <= T2_DONE;
          end else begin
            if (op >= res + one) begin
              op  <= op - (res + one);
              res <= (res >> 1) + one;
            end else res <= res >> 1;
            one <= one >> 2;
            it  <= it + 1'b1;
          end
        end
        T2_DONE: if (take23) st2 <= T2_IDLE;
        default: st2 <= T2_IDLE;
      endcase
    end
  end

  // ---------------- stage 3 ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy3 <= 1'b0; p3 <= '0; cnt3 <= '0; inv3 <= '0;
      v3 <= 1'b0; p3q <= '0; wq <= '0; inv3q <= '0;
      out_valid <= 1'b0; out_widx <= '0; out_word <= '0;
    end else begin
      // element pass: address (param_addr = cnt3) now, compute next cycle
      v3    <= busy3;
      wq    <= cnt3;
      p3q   <= p3;
      inv3q <= inv3;
      out_valid <= v3;
      out_widx  <= wq;
      out_word  <= y_w;
      if (take23) begin
        busy3 <= 1'b1;
        p3    <= p2;
        inv3  <= inv2;
        cnt3  <= '0;
      end else if (busy3) begin
        if (cnt3 == nwords - 1) begin
          busy3 <= 1'b0;
          cnt3  <= '0;
        end else cnt3 <= cnt3 + 1'b1;
      end
    end
  end

  a_in_accepted: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> (busy1 || in_ready))
    else $error("ln_core: input word while stage 1 holds a finished row");
endmodule
