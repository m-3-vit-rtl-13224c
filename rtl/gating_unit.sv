// gating_unit: the MoE gating function (router) of Fig. 2(a)/Fig. 3 and the
// "Expert selection" step of Fig. 4.
//
// For each token x it computes the N router logits G(x) = W_r x (a single
// linear layer, LANES products per cycle), their softmax R(x), and selects
// the K experts with the largest logits (equal to the K largest
// probabilities; ties go to the lower expert number). For each selected
// expert it emits one push, one per cycle, carrying the expert number, the
// token index and the gate weight R(x)_e, which the caller appends to that
// expert's queue. The weight is the un-renormalised softmax value, as in
// y = sum_k R(x)_k f_k(x).
// Multi-gate operation: the caller loads the router rows of the task being
// run (N rows of D/LANES words) through the weight port; switching task only
// changes which rows are loaded.
// Timing per token: N*D/LANES + 3 (logits) + 3*N + about 40 (softmax) + K
// cycles.
module gating_unit
  import m3vit_pkg::*;
#(
  parameter int D     = 384,
  parameter int N     = 16,
  parameter int K     = 4,
  parameter int T     = 196,
  parameter int LANES = 32,
  parameter int EW    = $clog2(N),
  parameter int TW    = $clog2(T + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_we,
  input  logic [15:0]        w_waddr,
  input  data_t [LANES-1:0]  w_wdata,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [D-1:0]      in_tok,
  input  logic [TW-1:0]      in_idx,
  output logic               push,
  output logic [EW-1:0]      push_expert,
  output logic [TW-1:0]      push_tok,
  output data_t              push_weight
);
  localparam int NCH = D / LANES;
  localparam int SW  = $clog2(N + 1);

  typedef enum logic [1:0] {S_IN, S_LOGIT, S_SMAX, S_SEL} state_e;
  state_e state_q;

  data_t [D-1:0] x_q;
  data_t [N-1:0] logit_q;
  logic  [N-1:0] taken_q;
  logic  [TW-1:0] tok_q;
  logic  [$clog2(K + 1)-1:0] k_q;

  logic re, mv_start, mv_valid, mv_done, sm_done;
  logic [15:0] raddr, mv_row;
  data_t [LANES-1:0] rdata;
  acc_t mv_acc;
  data_t [N-1:0] prob;

  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(N * NCH), .AW(16)) u_wbuf (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata), .re(re), .raddr(raddr), .rdata(rdata));

  matvec_seq #(.IN_MAX(D), .LANES(LANES), .AW(16)) u_mv (
    .clk, .rst_n, .start(mv_start), .n_rows(16'(N)), .in_chunks(16'(NCH)), .base('0),
    .x(x_q), .w_re(re), .w_raddr(raddr), .w_rdata(rdata),
    .res_valid(mv_valid), .res_row(mv_row), .res_acc(mv_acc), .busy(), .done(mv_done));

  softmax_unit #(.MAXLEN(N), .IW(SW)) u_smax (
    .clk, .rst_n, .in_valid(mv_valid), .in_idx(SW'(mv_row)), .in_data(acc_to_data(mv_acc)),
    .start(mv_done), .len(SW'(N)), .prob, .busy(), .done(sm_done));

  // largest logit among the experts not yet taken
  logic [EW-1:0] best;
  always_comb begin
    data_t bv;
    logic  found;
    best = '0; bv = '0; found = 1'b0;
    for (int e = 0; e < N; e++) begin
      if (!taken_q[e] && (!found || logit_q[e] > bv)) begin
        best = EW'(e); bv = logit_q[e]; found = 1'b1;
      end
    end
  end

  assign in_ready    = (state_q == S_IN);
  assign mv_start    = (state_q == S_IN) && in_valid;
  assign push        = (state_q == S_SEL);
  assign push_expert = best;
  assign push_tok    = tok_q;
  assign push_weight = prob[best];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IN; x_q <= '0; logit_q <= '0; taken_q <= '0; tok_q <= '0; k_q <= '0;
    end else begin
      unique case (state_q)
        S_IN: if (in_valid) begin
          x_q <= in_tok; tok_q <= in_idx; state_q <= S_LOGIT;
        end
        S_LOGIT: begin
          if (mv_valid) logit_q[int'(mv_row)] <= acc_to_data(mv_acc);
          if (mv_done) state_q <= S_SMAX;
        end
        S_SMAX: if (sm_done) begin state_q <= S_SEL; taken_q <= '0; k_q <= '0; end
        S_SEL: begin
          taken_q[best] <= 1'b1;
          if (int'(k_q) == K - 1) state_q <= S_IN;
          else k_q <= k_q + 1'b1;
        end
        default: state_q <= S_IN;
      endcase
    end
  end
endmodule
