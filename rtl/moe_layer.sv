// moe_layer: the MoE unit of Fig. 3 with the memory-efficient computation
// reordering of Fig. 4.
//
// 1. Gate: the T layer-normed tokens arrive on in_valid/in_ready. Each is
//    kept in the token buffer, its output accumulator is cleared, and the
//    gating unit appends it, with its gate weight, to the queues of its top-K
//    experts.
// 2. Expert by expert: the experts with non-empty queues are visited in
//    increasing number. The first one is loaded from off-chip memory into
//    bank 0 of the ping-pong expert buffer. Then, for every expert e: the
//    expert unit (an mlp_unit with H = HE) computes W2 gelu(W1 x) for every
//    token x in e's queue, reading bank b, while the loader fetches the next
//    non-empty expert into bank 1-b. When both have finished the banks swap.
//    Each expert output is scaled by its gate weight and added to the
//    token's accumulator ("Combine Experts Per Token"), LANES values per
//    cycle.
// 3. Output: the T accumulated tokens leave in token order on
//    out_valid/out_ready (the caller adds the residual).
// On-chip memory is two expert banks regardless of N, which is the point of
// the scheme. Expert e of this layer lies in off-chip memory at
// expert_base + e*EXP_WORDS: W1 (HE rows of D/LANES words) then W2 (D rows of
// HE/LANES words). The router rows of the running task are written through
// the r_* port beforehand. Counters report how many experts ran, how many
// loads overlapped a computation, and cycles spent waiting for a load.
// The flow (queues, double buffering, prefetch, swap) follows Sec. 3.2 and
// Fig. 4; visiting experts in increasing order and skipping empty queues are
// this design's choices.
module moe_layer
  import m3vit_pkg::*;
#(
  parameter int T     = 196,
  parameter int D     = 384,
  parameter int HE    = 384,
  parameter int N     = 16,
  parameter int K     = 4,
  parameter int LANES = 32,
  parameter int EW    = $clog2(N),
  parameter int TW    = $clog2(T + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // router weights of the running task
  input  logic               r_we,
  input  logic [15:0]        r_waddr,
  input  data_t [LANES-1:0]  r_wdata,
  input  logic [31:0]        expert_base,
  // off-chip memory read port
  output logic               rd_req,
  output logic [31:0]        rd_addr,
  input  logic               rd_gnt,
  input  logic               rd_valid,
  input  data_t [LANES-1:0]  rd_data,
  // tokens
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [D-1:0]      in_tok,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [D-1:0]      out_tok,
  // activity
  output logic [15:0]        experts_run,
  output logic [15:0]        overlapped_loads,
  output logic [31:0]        load_wait_cycles
);
  localparam int NCH       = D / LANES;
  localparam int EXP_WORDS = HE * NCH + D * (HE / LANES);
  localparam int BAW       = $clog2(EXP_WORDS + 1);

  typedef enum logic [2:0] {S_GATE, S_GWAIT, S_FIRST, S_LOAD0, S_RUN, S_OUT} state_e;
  typedef enum logic [1:0] {C_FEED, C_WAIT, C_COMB, C_DONE} cstate_e;
  state_e  state_q;
  cstate_e cst_q;

  data_t [D-1:0] xbuf [T];
  data_t [D-1:0] ybuf [T];
  logic [TW-1:0] tcnt_q;

  // ---------------- gating and queues
  logic g_in_valid, g_in_ready, push;
  logic [EW-1:0] push_e;
  logic [TW-1:0] push_t;
  data_t push_w;
  logic [EW-1:0] cur_e_q, nxt_e_q;
  logic [TW-1:0] qidx_q, q_tok;
  data_t q_w;
  logic [N-1:0][TW-1:0] count;

  gating_unit #(.D(D), .N(N), .K(K), .T(T), .LANES(LANES), .EW(EW), .TW(TW)) u_gate (
    .clk, .rst_n, .w_we(r_we), .w_waddr(r_waddr), .w_wdata(r_wdata),
    .in_valid(g_in_valid), .in_ready(g_in_ready), .in_tok, .in_idx(tcnt_q),
    .push, .push_expert(push_e), .push_tok(push_t), .push_weight(push_w));

  expert_queues #(.N(N), .T(T), .EW(EW), .TW(TW)) u_queues (
    .clk, .rst_n, .clear(state_q == S_OUT && out_valid && out_ready && int'(tcnt_q) == T - 1),
    .push, .push_expert(push_e), .push_tok(push_t), .push_weight(push_w),
    .rd_expert(cur_e_q), .rd_idx(qidx_q), .rd_tok(q_tok), .rd_weight(q_w), .count);

  assign in_ready   = (state_q == S_GATE) && g_in_ready;
  assign g_in_valid = (state_q == S_GATE) && in_valid;

  // next non-empty queue after expert `from` (or the first one if first)
  function automatic logic [EW:0] next_nonempty(input logic [N-1:0][TW-1:0] c,
                                                input int from, input logic first);
    for (int e = 0; e < N; e++)
      if ((first || e > from) && c[e] != 0) return {1'b1, EW'(e)};
    return '0;
  endfunction

  // ---------------- expert buffer, loader, expert unit
  logic ld_start, ld_busy, ld_done, b_we;
  logic [BAW-1:0] b_waddr;
  data_t [LANES-1:0] b_wdata, b_rdata;
  logic wr_bank_q, cur_bank_q;
  logic [31:0] ld_src;

  weight_loader #(.LANES(LANES), .BAW(BAW)) u_loader (
    .clk, .rst_n, .start(ld_start), .src(ld_src), .dst('0), .len(32'(EXP_WORDS)),
    .busy(ld_busy), .done(ld_done),
    .rd_req, .rd_addr, .rd_gnt, .rd_valid, .rd_data,
    .buf_we(b_we), .buf_waddr(b_waddr), .buf_wdata(b_wdata));

  logic e_re;
  logic [BAW-1:0] e_raddr;
  pingpong_buffer #(.LANES(LANES), .DEPTH(EXP_WORDS), .AW(BAW)) u_pp (
    .clk, .rst_n, .we(b_we), .wr_bank(wr_bank_q), .waddr(b_waddr), .wdata(b_wdata),
    .re(e_re), .rd_bank(cur_bank_q), .raddr(e_raddr), .rdata(b_rdata));

  logic m_in_valid, m_in_ready, m_out_valid, m_out_ready;
  data_t [D-1:0] m_out;
  mlp_unit #(.D(D), .H(HE), .LANES(LANES), .AW(BAW)) u_expert (
    .clk, .rst_n, .w_base('0), .w_re(e_re), .w_raddr(e_raddr), .w_rdata(b_rdata),
    .in_valid(m_in_valid), .in_ready(m_in_ready), .in_tok(xbuf[q_tok]),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_tok(m_out));

  assign m_in_valid  = (state_q == S_RUN) && (cst_q == C_FEED);
  assign m_out_ready = (state_q == S_RUN) && (cst_q == C_WAIT);

  // ---------------- control
  logic has_nxt_q, ld_pending_q;
  logic [15:0] cch_q;
  data_t [D-1:0] o_q;
  logic [EW:0] nn_first, nn_next;
  assign nn_first = next_nonempty(count, 0, 1'b1);
  assign nn_next  = next_nonempty(count, int'(cur_e_q), 1'b0);

  assign out_valid = (state_q == S_OUT);
  assign out_tok   = ybuf[tcnt_q];

  always_comb begin
    ld_start = 1'b0;
    ld_src   = expert_base + 32'(EXP_WORDS) * 32'(nn_first[EW-1:0]);
    if (state_q == S_FIRST && nn_first[EW]) ld_start = 1'b1;
    if (state_q == S_RUN && cst_q == C_FEED && int'(qidx_q) == 0 && nn_next[EW] &&
        !ld_pending_q && !has_nxt_q) begin
      ld_start = 1'b1;
      ld_src   = expert_base + 32'(EXP_WORDS) * 32'(nn_next[EW-1:0]);
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_GATE && in_valid && g_in_ready) begin
      xbuf[tcnt_q] <= in_tok;
      ybuf[tcnt_q] <= '0;
    end
    if (state_q == S_RUN && cst_q == C_COMB) begin
      for (int l = 0; l < LANES; l++)
        ybuf[q_tok][int'(cch_q) * LANES + l] <= qadd(ybuf[q_tok][int'(cch_q) * LANES + l],
                                                   qmul(q_w, o_q[int'(cch_q) * LANES + l]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_GATE; cst_q <= C_FEED; tcnt_q <= '0; cur_e_q <= '0; nxt_e_q <= '0;
      qidx_q <= '0; wr_bank_q <= 1'b0; cur_bank_q <= 1'b0; has_nxt_q <= 1'b0;
      ld_pending_q <= 1'b0; cch_q <= '0; o_q <= '0;
      experts_run <= '0; overlapped_loads <= '0; load_wait_cycles <= '0;
    end else begin
      unique case (state_q)
        S_GATE: if (in_valid && g_in_ready) begin
          if (int'(tcnt_q) == T - 1) begin tcnt_q <= '0; state_q <= S_GWAIT; end
          else tcnt_q <= tcnt_q + 1'b1;
        end
        S_GWAIT: if (g_in_ready) state_q <= S_FIRST;
        S_FIRST: begin
          experts_run <= '0; overlapped_loads <= '0; load_wait_cycles <= '0;
          if (nn_first[EW]) begin
            cur_e_q <= nn_first[EW-1:0]; wr_bank_q <= 1'b0; cur_bank_q <= 1'b0;
            state_q <= S_LOAD0;
          end else state_q <= S_OUT;
        end
        S_LOAD0: begin
          load_wait_cycles <= load_wait_cycles + 1'b1;
          if (ld_done) begin
            state_q <= S_RUN; cst_q <= C_FEED; qidx_q <= '0; has_nxt_q <= 1'b0;
            wr_bank_q <= 1'b1;
          end
        end
        S_RUN: begin
          if (ld_start) begin
            has_nxt_q <= 1'b1; ld_pending_q <= 1'b1; nxt_e_q <= nn_next[EW-1:0];
            overlapped_loads <= overlapped_loads + 1'b1;
          end
          if (ld_done) ld_pending_q <= 1'b0;
          unique case (cst_q)
            C_FEED: if (m_in_ready) cst_q <= C_WAIT;
            C_WAIT: if (m_out_valid) begin o_q <= m_out; cch_q <= '0; cst_q <= C_COMB; end
            C_COMB: begin
              if (int'(cch_q) == NCH - 1) begin
                if (int'(qidx_q) + 1 == int'(count[cur_e_q])) cst_q <= C_DONE;
                else begin qidx_q <= qidx_q + 1'b1; cst_q <= C_FEED; end
              end else cch_q <= cch_q + 1'b1;
            end
            C_DONE: begin
              // both the computation and the prefetch must be finished
              if (ld_pending_q && !ld_done) begin
                load_wait_cycles <= load_wait_cycles + 1'b1;
              end else begin
                experts_run <= experts_run + 1'b1;
                if (has_nxt_q) begin
                  cur_e_q <= nxt_e_q; cur_bank_q <= ~cur_bank_q; wr_bank_q <= cur_bank_q;
                  has_nxt_q <= 1'b0; qidx_q <= '0; cst_q <= C_FEED;
                end else begin
                  state_q <= S_OUT; tcnt_q <= '0;
                end
              end
            end
            default: cst_q <= C_FEED;
          endcase
        end
        S_OUT: if (out_ready) begin
          if (int'(tcnt_q) == T - 1) begin tcnt_q <= '0; state_q <= S_GATE; end
          else tcnt_q <= tcnt_q + 1'b1;
        end
        default: state_q <= S_GATE;
      endcase
    end
  end
endmodule
