// attention_head: one of the independent self-attention heads of Fig. 3
// ("Compute QKV" -> "Q x K" -> "Soft Max" -> "x V").
//
// Phase 1 (collect): the head accepts the T layer-normed tokens of the layer
// on in_valid/in_ready. For each token it computes its query, key and value
// slices (3*DH dot products of length D) with its own weight buffer, and
// stores q and k row-wise and v transposed (one row per value channel).
// Phase 2 (attend): for every query i in turn it computes the T scores
// q_i . k_t, scales them by 1/sqrt(DH), takes the softmax, and multiplies the
// probability vector with V, i.e. o_ij = sum_t p_it v_tj. The DH outputs of
// query i are offered on out_valid/out_ready, in query order.
// Weight buffer layout (words of LANES values): rows 0..DH-1 are W_q, rows
// DH..2DH-1 W_k, rows 2DH..3DH-1 W_v, each row D/LANES words, written through
// the w_we port before the layer starts.
// Timing: about 3*DH*D/LANES cycles per input token, then per query about
// T*DH/LANES + 3*T + 40 + DH*TP/LANES cycles. The three-phase dataflow follows
// Fig. 3; the buffers, the sequential order and the 1/sqrt(DH) scaling of the
// standard scaled dot product are this design's choices.
module attention_head
  import m3vit_pkg::*;
#(
  parameter int T     = 196,
  parameter int D     = 384,
  parameter int DH    = 32,
  parameter int LANES = 32,
  parameter int TP    = ((T + LANES - 1) / LANES) * LANES,
  parameter int WAW   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight load port
  input  logic               w_we,
  input  logic [WAW-1:0]     w_waddr,
  input  data_t [LANES-1:0]  w_wdata,
  // token stream in (T tokens per layer)
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [D-1:0]      in_tok,
  // per-query head output
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [DH-1:0]     out_vec
);
  localparam int NCH    = D / LANES;
  localparam int DCH    = (DH + LANES - 1) / LANES;   // words per q/k row
  localparam int DHP    = DCH * LANES;
  localparam int TCH    = TP / LANES;
  localparam int WDEPTH = 3 * DH * NCH;
  localparam int SCALE  = inv_sqrt_q8(DH);
  localparam int TW     = $clog2(T + 1);

  typedef enum logic [2:0] {S_IN, S_QKV, S_SCORE, S_SMAX, S_PV, S_OUT} state_e;
  state_e state_q;

  logic [TW-1:0] tok_q, qi_q;
  logic          mv1_busy_q;

  // ---------------- weights
  logic               wr_re;
  logic [WAW-1:0]     wr_addr;
  data_t [LANES-1:0]  wr_data;
  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(WDEPTH), .AW(WAW)) u_wbuf (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .re(wr_re), .raddr(wr_addr), .rdata(wr_data));

  // ---------------- q, k (row-wise, DHP slots per token) and v transposed
  // (TP slots per channel). Padding slots are never written: the padded
  // lanes of qvec and pvec are zero, so they contribute nothing.
  data_t q_mem [T * DHP];
  data_t k_mem [T * DHP];
  data_t v_mem [DH * TP];

  data_t [D-1:0]   x_q;
  data_t [DHP-1:0] qvec;
  data_t [TP-1:0]  pvec;

  // ---------------- QKV engine
  logic mv0_start, mv0_done, mv0_valid;
  logic [15:0] mv0_row;
  acc_t mv0_acc;
  matvec_seq #(.IN_MAX(D), .LANES(LANES), .AW(WAW)) u_qkv (
    .clk, .rst_n, .start(mv0_start), .n_rows(16'(3 * DH)), .in_chunks(16'(NCH)),
    .base('0), .x(x_q), .w_re(wr_re), .w_raddr(wr_addr), .w_rdata(wr_data),
    .res_valid(mv0_valid), .res_row(mv0_row), .res_acc(mv0_acc), .busy(), .done(mv0_done));

  // ---------------- score engine: rows of K are the matrix
  logic mv1_start, mv1_done, mv1_valid, k_re;
  logic [15:0] mv1_row, k_addr;
  acc_t mv1_acc;
  data_t [LANES-1:0] k_rdata;
  matvec_seq #(.IN_MAX(DHP), .LANES(LANES), .AW(16)) u_score (
    .clk, .rst_n, .start(mv1_start), .n_rows(16'(T)), .in_chunks(16'(DCH)),
    .base('0), .x(qvec), .w_re(k_re), .w_raddr(k_addr), .w_rdata(k_rdata),
    .res_valid(mv1_valid), .res_row(mv1_row), .res_acc(mv1_acc), .busy(), .done(mv1_done));

  // ---------------- P x V engine: rows of V^T are the matrix
  logic mv2_start, mv2_done, mv2_valid, v_re;
  logic [15:0] mv2_row, v_addr;
  acc_t mv2_acc;
  data_t [LANES-1:0] v_rdata;
  matvec_seq #(.IN_MAX(TP), .LANES(LANES), .AW(16)) u_pv (
    .clk, .rst_n, .start(mv2_start), .n_rows(16'(DH)), .in_chunks(16'(TCH)),
    .base('0), .x(pvec), .w_re(v_re), .w_raddr(v_addr), .w_rdata(v_rdata),
    .res_valid(mv2_valid), .res_row(mv2_row), .res_acc(mv2_acc), .busy(), .done(mv2_done));

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (k_re) k_rdata[l] <= k_mem[int'(k_addr) * LANES + l];
      if (v_re) v_rdata[l] <= v_mem[int'(v_addr) * LANES + l];
    end
  end

  // ---------------- softmax
  logic sm_start, sm_done;
  data_t [T-1:0] sm_prob;
  softmax_unit #(.MAXLEN(T), .IW(TW)) u_smax (
    .clk, .rst_n, .in_valid(mv1_valid), .in_idx(TW'(mv1_row)),
    .in_data(sat16((64'(acc_to_data(mv1_acc)) * 64'(SCALE)) >>> FRAC)),
    .start(sm_start), .len(TW'(T)), .prob(sm_prob), .busy(), .done(sm_done));

  always_comb begin
    pvec = '0;
    for (int t = 0; t < T; t++) pvec[t] = sm_prob[t];
  end

  // ---------------- storing results
  always_ff @(posedge clk) begin
    if (mv0_valid) begin
      if (int'(mv0_row) < DH)
        q_mem[int'(tok_q) * DHP + int'(mv0_row)] <= acc_to_data(mv0_acc);
      else if (int'(mv0_row) < 2 * DH)
        k_mem[int'(tok_q) * DHP + int'(mv0_row) - DH] <= acc_to_data(mv0_acc);
      else
        v_mem[(int'(mv0_row) - 2 * DH) * TP + int'(tok_q)] <= acc_to_data(mv0_acc);
    end
  end

  // ---------------- control
  assign in_ready  = (state_q == S_IN);
  assign out_valid = (state_q == S_OUT);
  assign mv0_start = (state_q == S_IN) && in_valid;
  assign mv1_start = (state_q == S_SCORE) && !mv1_busy_q;
  assign sm_start  = (state_q == S_SCORE) && mv1_done;
  assign mv2_start = (state_q == S_SMAX) && sm_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IN; tok_q <= '0; qi_q <= '0; x_q <= '0; qvec <= '0; out_vec <= '0;
      mv1_busy_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IN: if (in_valid) begin
          x_q <= in_tok; state_q <= S_QKV;
        end
        S_QKV: if (mv0_done) begin
          if (int'(tok_q) == T - 1) begin
            tok_q <= '0; qi_q <= '0; state_q <= S_SCORE; mv1_busy_q <= 1'b0;
            for (int j = 0; j < DHP; j++) qvec[j] <= (j < DH) ? q_mem[j] : '0;
          end else begin
            tok_q <= tok_q + 1'b1; state_q <= S_IN;
          end
        end
        S_SCORE: begin
          mv1_busy_q <= 1'b1;
          if (mv1_done) begin state_q <= S_SMAX; mv1_busy_q <= 1'b0; end
        end
        S_SMAX: if (sm_done) state_q <= S_PV;
        S_PV: begin
          if (mv2_valid) out_vec[int'(mv2_row)] <= acc_to_data(mv2_acc);
          if (mv2_done) state_q <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (int'(qi_q) == T - 1) begin
            qi_q <= '0; state_q <= S_IN;
          end else begin
            qi_q <= qi_q + 1'b1; state_q <= S_SCORE;
            for (int j = 0; j < DHP; j++)
              qvec[j] <= (j < DH) ? q_mem[(int'(qi_q) + 1) * DHP + j] : '0;
          end
        end
        default: state_q <= S_IN;
      endcase
    end
  end
endmodule
