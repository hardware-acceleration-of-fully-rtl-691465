// controller: stage sequencer of the accelerator.
//
// Executes one stage command (fq_pkg::cmd_t) at a time; the host issues
// the stages of an encoder layer in dataflow order (X.W^Q, X.W^K, X.W^V,
// Q.K^T, softmax, Att.V, O_A.W^S, Add&LN, FFN1, FFN2, Add&LN).
//
// Matrix stages walk three nested loops (outer o, middle r, inner c) and
// issue one beat per cycle to all PUs; the buffer addresses are driven in
// the issue cycle and the beat control one cycle later, matching the 1-cycle
// read latency of the buffers.
//   LINEAR: o = output group (N columns per PU), r = token, c = input word.
//           Before each group it waits until the weight buffer's read bank
//           is full (a weight stall) and releases the bank after the group's
//           last beat, so the host can refill it while the next group runs.
//   QK:     o = block of N query rows, r = key row j, c = 8x8 half-word.
//   AV:     o = block of N value columns, r = query row, c = half-word.
// Each output's tag (row, column) goes into a small FIFO and is popped when
// the PEs deliver the result, which is then written to the PU's Q/K/V/Attn
// buffer (by the PU) or, for I/O-buffer destinations, captured and written
// one PU per cycle (H cycles; an output must take at least H beats).
//   SOFTMAX: for every head and row, feeds the row of scores from the Attn
//           buffer into the softmax core and writes the probabilities back.
//   ADDLN:  for every token, feeds the two I/O-buffer rows into the LN core
//           (a row starts whenever the core's first stage is empty, so
//           rows overlap in its three-stage pipeline) and writes each
//           output row to the I/O buffer.
// cmd_ready is high in IDLE; `busy` is high while a stage runs or drains.
// The paper names the controller and shows the stage order; the command
// format, loop order and handshakes are this design's own.
module controller #(
  parameter int unsigned M   = 16,
  parameter int unsigned N   = 8,
  parameter int unsigned H   = 12,
  parameter int unsigned SEQ = 128,
  parameter int unsigned DH  = 64,
  parameter int unsigned IOD = 32768,
  parameter int unsigned WD  = 192,
  parameter int unsigned BD  = 64,
  localparam int unsigned QD = (SEQ / N) * (DH / M),
  localparam int unsigned KD = SEQ * (DH / M),
  localparam int unsigned VD = (DH / N) * (SEQ / M),
  localparam int unsigned AD = (SEQ / N) * (SEQ / M),
  localparam int unsigned SL = $clog2(SEQ + 1),
  localparam int unsigned LW = $clog2(WD + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  fq_pkg::cmd_t              cmd,
  output logic                      busy,
  output logic [7:0]                scale_idx,
  // weight buffer
  input  logic                      wb_full,
  output logic                      wb_rd_en,
  output logic [$clog2(WD)-1:0]     wb_rd_addr,
  output logic                      wb_release,
  output logic                      stall_w,
  // bias buffer
  output logic [$clog2(BD)-1:0]     bias_rd_addr,
  output logic                      bias_zero,
  // I/O buffer
  output logic                      io_rda_en,
  output logic [$clog2(IOD)-1:0]    io_rda_addr,
  output logic                      io_rdb_en,
  output logic [$clog2(IOD)-1:0]    io_rdb_addr,
  output logic [M-1:0]              io_wr_be,
  output logic [$clog2(IOD)-1:0]    io_wr_addr,
  output logic [M-1:0][7:0]         io_wr_data,
  // PU beat control
  output logic                      pu_valid,
  output logic                      pu_first,
  output logic                      pu_last,
  output fq_pkg::bim_mode_e         pu_mode,
  output logic                      pu_half,
  output logic                      pu_a_signed,
  output logic [1:0]                pu_act_sel,
  output logic [1:0]                pu_wt_sel,
  output logic [$clog2(N)-1:0]      pu_att_bank,
  output logic                      pu_rd_en,
  output logic [$clog2(QD)-1:0]     q_rd_addr,
  output logic [$clog2(KD)-1:0]     k_rd_addr,
  output logic [$clog2(VD)-1:0]     v_rd_addr,
  output logic [$clog2(AD)-1:0]     a_rd_addr,
  // PU results and write-back tag
  input  logic                      y_valid,
  input  logic [H-1:0][N-1:0][7:0]  y,
  output logic                      wb_en,
  output fq_pkg::dst_e              wb_dst,
  output logic                      wb_att,
  output logic [15:0]               wb_row,
  output logic [15:0]               wb_col,
  // softmax stage
  output logic [$clog2(H)-1:0]      sm_pu,
  input  logic [N*M-1:0][7:0]       sm_att_word,
  output logic [N*M-1:0]            sm_wr_be,
  output logic [$clog2(AD)-1:0]     sm_wr_addr,
  output logic [N*M-1:0][7:0]       sm_wr_data,
  output logic [SL-1:0]             sm_len,
  output logic                      sm_in_valid,
  output logic signed [7:0]         sm_in_data,
  input  logic                      sm_out_valid,
  input  logic [SL-1:0]             sm_out_idx,
  input  logic [7:0]                sm_out_data,
  // layer-norm stage
  output logic [LW-1:0]             ln_nwords,
  output logic [15:0]               ln_pbase,
  output logic                      ln_in_valid,
  input  logic                      ln_in_ready,
  input  logic                      ln_out_valid,
  input  logic [LW-1:0]             ln_out_widx,
  input  logic [M-1:0][7:0]         ln_out_word
);
  import fq_pkg::*;

  typedef enum logic [3:0] {
    C_IDLE, C_WAITW, C_RUN, C_DRAIN, C_SM_FEED, C_SM_WAIT, C_LN_FEED, C_LN_WAIT
  } cstate_e;

  typedef struct packed {
    logic [15:0] row;
    logic [15:0] col;
  } tag_t;

  localparam int unsigned TFD = 8;

  cstate_e     st;
  cmd_t        c;
  logic [15:0] o, r, k;           // loop counters
  logic [15:0] lr;                // Add&LN: row whose output is being written
  logic        ln_feed;           // Add&LN: a word is read for the LN core
  logic [15:0] o_n, r_n, k_n;     // loop bounds
  logic        last_beat, last_k;

  // tag FIFO
  tag_t        tf [TFD];
  logic [2:0]  tf_wp, tf_rp;
  logic [3:0]  tf_cnt;
  tag_t        tag_head;

  // I/O write-back serializer
  logic [H-1:0][N-1:0][7:0] stg;
  tag_t                     stg_tag;
  logic                     ser_busy;
  logic [$clog2(H+1)-1:0]   ser_h;

  // softmax feed bookkeeping
  logic [15:0] sm_j;
  logic        sm_fq;
  logic [15:0] sm_jq;

  assign cmd_ready = (st == C_IDLE);
  assign busy      = (st != C_IDLE);
  assign scale_idx = c.scale_idx;
  assign stall_w   = (st == C_WAITW);

  // loop bounds per stage
  always_comb begin
    o_n = 16'd1; r_n = c.rows; k_n = c.kwords;
    unique case (c.op)
      OP_LINEAR: begin o_n = c.groups;    r_n = c.rows; k_n = c.kwords; end
      OP_QK:     begin o_n = c.rows / N;  r_n = c.rows; k_n = 16'(2 * DH / M); end
      OP_AV:     begin o_n = 16'(DH / N); r_n = c.rows; k_n = 16'(2 * c.rows / M); end
      default:   begin o_n = 16'd1;       r_n = c.rows; k_n = c.kwords; end
    endcase
  end
  assign last_k    = (k == k_n - 1);
  assign last_beat = last_k && (r == r_n - 1);

  // issue-cycle addresses
  logic issue;
  assign issue = (st == C_RUN) && (tf_cnt < TFD - 2);
  assign wb_release = issue && last_beat && (c.op == OP_LINEAR);
  always_comb begin
    io_rda_en   = 1'b0;
    io_rda_addr = '0;
    io_rdb_en   = 1'b0;
    io_rdb_addr = '0;
    wb_rd_en    = 1'b0;
    wb_rd_addr  = $clog2(WD)'(k);
    bias_rd_addr = $clog2(BD)'(c.bias_base + o);
    pu_rd_en    = issue;
    q_rd_addr   = $clog2(QD)'(o * (DH / M) + k / 2);
    k_rd_addr   = $clog2(KD)'(r * (DH / M) + k / 2);
    v_rd_addr   = $clog2(VD)'(o * (SEQ / M) + k / 2);
    a_rd_addr   = $clog2(AD)'((r / N) * (SEQ / M) + k / 2);
    if (st == C_RUN && c.op == OP_LINEAR) begin
      io_rda_en   = issue;
      io_rda_addr = $clog2(IOD)'(c.src_base + r * c.kwords + k);
      wb_rd_en    = issue;
    end
    if (st == C_SM_FEED) begin
      pu_rd_en  = 1'b1;
      a_rd_addr = $clog2(AD)'((r / N) * (SEQ / M) + sm_j / M);
    end
    if (ln_feed) begin
      io_rda_en   = 1'b1;
      io_rda_addr = $clog2(IOD)'(c.src_base + r * c.kwords + k);
      io_rdb_en   = 1'b1;
      io_rdb_addr = $clog2(IOD)'(c.srcb_base + r * c.kwords + k);
    end
  end

  // write-back tag for PU-local destinations
  assign tag_head = tf[tf_rp];
  assign wb_att   = (c.op == OP_QK);
  assign wb_dst   = c.dst;
  assign wb_en    = y_valid && (c.op == OP_QK || (c.op == OP_LINEAR && c.dst != DST_IO));
  assign wb_row   = tag_head.row;
  assign wb_col   = tag_head.col;

  // softmax / LN static outputs
  assign sm_pu      = $clog2(H)'(o);
  assign sm_len     = SL'(c.rows);
  assign sm_in_data = sm_att_word[(r % N) * M + sm_jq % M];
  assign sm_in_valid = sm_fq;
  assign ln_nwords  = LW'(c.kwords);
  // a new LN row starts only when the core's first stage is empty
  assign ln_feed    = (st == C_LN_FEED) && (k != 0 || (ln_in_ready && !ln_in_valid));
  assign ln_pbase   = c.bias_base;

  // I/O write port: serializer, LN output or softmax (Attn only)
  logic [15:0] gn, rwo, colh;
  always_comb begin
    gn   = (c.op == OP_AV) ? 16'(DH) : 16'(c.groups * N);
    rwo  = 16'(H * gn / M);
    colh = 16'(ser_h * gn + stg_tag.col);
    io_wr_be   = '0;
    io_wr_addr = '0;
    io_wr_data = '0;
    sm_wr_be   = '0;
    sm_wr_addr = $clog2(AD)'((r / N) * (SEQ / M) + sm_out_idx / M);
    sm_wr_data = '0;
    if (ser_busy) begin
      io_wr_addr = $clog2(IOD)'(c.dst_base + stg_tag.row * rwo + colh / M);
      for (int n = 0; n < N; n++) begin
        io_wr_be[colh % M + n]   = 1'b1;
        io_wr_data[colh % M + n] = stg[ser_h][n];
      end
    end else if (ln_out_valid) begin
      io_wr_be   = '1;
      io_wr_addr = $clog2(IOD)'(c.dst_base + lr * c.kwords + ln_out_widx);
      io_wr_data = ln_out_word;
    end
    if (st == C_SM_WAIT && sm_out_valid) begin
      sm_wr_be[(r % N) * M + sm_out_idx % M]   = 1'b1;
      sm_wr_data[(r % N) * M + sm_out_idx % M] = sm_out_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; c <= '0; o <= '0; r <= '0; k <= '0; lr <= '0;
      tf_wp <= '0; tf_rp <= '0; tf_cnt <= '0;
      for (int i = 0; i < TFD; i++) tf[i] <= '0;
      stg <= '0; stg_tag <= '0; ser_busy <= 1'b0; ser_h <= '0;
      sm_j <= '0; sm_fq <= 1'b0; sm_jq <= '0;
      pu_valid <= 1'b0; pu_first <= 1'b0; pu_last <= 1'b0; pu_mode <= MODE_8X4;
      pu_half <= 1'b0; pu_a_signed <= 1'b1; pu_act_sel <= '0; pu_wt_sel <= '0;
      pu_att_bank <= '0; bias_zero <= 1'b1; ln_in_valid <= 1'b0;
    end else begin
      pu_valid    <= 1'b0;
      ln_in_valid <= 1'b0;
      sm_fq       <= 1'b0;

      // tag FIFO pop on result, serializer capture
      if (y_valid) begin
        tf_rp <= tf_rp + 1'b1;
        if ((c.op == OP_LINEAR && c.dst == DST_IO) || c.op == OP_AV) begin
          stg      <= y;
          stg_tag  <= tag_head;
          ser_busy <= 1'b1;
          ser_h    <= '0;
        end
      end else if (ser_busy) begin
        if (ser_h == H - 1) ser_busy <= 1'b0;
        else ser_h <= ser_h + 1'b1;
      end
      tf_cnt <= tf_cnt + ((issue && last_k) ? 4'd1 : 4'd0) - (y_valid ? 4'd1 : 4'd0);
      if (st == C_IDLE) lr <= '0;
      else if (ln_out_valid && ln_out_widx == LW'(c.kwords - 1)) lr <= lr + 1'b1;

      unique case (st)
        C_IDLE: if (cmd_valid) begin
          c <= cmd;
          o <= '0; r <= '0; k <= '0; sm_j <= '0;
          unique case (cmd.op)
            OP_LINEAR:  st <= C_WAITW;
            OP_QK, OP_AV: st <= C_RUN;
            OP_SOFTMAX: st <= C_SM_FEED;
            default:    st <= C_LN_FEED;
          endcase
        end
        C_WAITW: if (wb_full) st <= C_RUN;
        C_RUN: if (issue) begin
          // beat control, one cycle after the addresses
          pu_valid    <= 1'b1;
          pu_first    <= (k == 0);
          pu_last     <= last_k;
          pu_mode     <= (c.op == OP_LINEAR) ? MODE_8X4 : MODE_8X8;
          pu_half     <= (c.op == OP_LINEAR) ? 1'b0 : k[0];
          pu_a_signed <= (c.op != OP_AV);
          pu_act_sel  <= (c.op == OP_LINEAR) ? 2'd0 : (c.op == OP_QK) ? 2'd1 : 2'd2;
          pu_wt_sel   <= (c.op == OP_LINEAR) ? 2'd0 : (c.op == OP_QK) ? 2'd1 : 2'd2;
          pu_att_bank <= $clog2(N)'(r % N);
          bias_zero   <= !(c.op == OP_LINEAR && c.bias_en);
          if (last_k) begin
            tf[tf_wp] <= (c.op == OP_QK) ? '{row: 16'(o * N), col: r}
                                         : '{row: r, col: 16'(o * N)};
            tf_wp <= tf_wp + 1'b1;
          end
          if (!last_k) k <= k + 1'b1;
          else begin
            k <= '0;
            if (r != r_n - 1) r <= r + 1'b1;
            else begin
              r <= '0;
                      if (o == o_n - 1) st <= C_DRAIN;
              else begin
                o  <= o + 1'b1;
                st <= (c.op == OP_LINEAR) ? C_WAITW : C_RUN;
              end
            end
          end
        end
        C_DRAIN: if (tf_cnt == 0 && !ser_busy && !y_valid && !pu_valid) st <= C_IDLE;
        C_SM_FEED: begin
          sm_fq <= 1'b1;
          sm_jq <= sm_j;
          if (sm_j == c.rows - 1) begin
            sm_j <= '0;
            st   <= C_SM_WAIT;
          end else sm_j <= sm_j + 1'b1;
        end
        C_SM_WAIT: if (sm_out_valid && sm_out_idx == SL'(c.rows - 1)) begin
          if (r != c.rows - 1) begin
            r  <= r + 1'b1;
            st <= C_SM_FEED;
          end else begin
            r <= '0;
            if (o == H - 1) st <= C_IDLE;
            else begin
              o  <= o + 1'b1;
              st <= C_SM_FEED;
            end
          end
        end
        C_LN_FEED: if (ln_feed) begin
          ln_in_valid <= 1'b1;
          if (k == c.kwords - 1) begin
            k <= '0;
            if (r == c.rows - 1) st <= C_LN_WAIT;
            else r <= r + 1'b1;
          end else k <= k + 1'b1;
        end
        C_LN_WAIT: if (ln_out_valid && ln_out_widx == LW'(c.kwords - 1) && lr == c.rows - 1)
          st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end

  a_ser_free: assert property (@(posedge clk) disable iff (!rst_n)
    (y_valid && ((c.op == OP_LINEAR && c.dst == DST_IO) || c.op == OP_AV)) |-> !ser_busy || ser_h == H - 1)
    else $error("controller: I/O write-back serializer overrun");
endmodule
