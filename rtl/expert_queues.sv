// expert_queues: the per-expert token queues of the computation reordering
// scheme (Fig. 4, "Computation reordering"; the small stacks between the
// gating function and the expert units in Fig. 3).
//
// Instead of computing a token's experts as soon as it has been routed, the
// router appends (token index, gate weight) to the queue of each selected
// expert. Later the MoE layer walks the queues expert by expert. Each queue
// has room for T entries, enough because a token enters a given expert's
// queue at most once per layer. clear empties all queues (start of an MoE
// layer). Reading is combinational: rd_tok/rd_weight show entry rd_idx of
// queue rd_expert, and count[e] is the length of queue e.
module expert_queues
  import m3vit_pkg::*;
#(
  parameter int N  = 16,
  parameter int T  = 196,
  parameter int EW = $clog2(N),
  parameter int TW = $clog2(T + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    push,
  input  logic [EW-1:0]           push_expert,
  input  logic [TW-1:0]           push_tok,
  input  data_t                   push_weight,
  input  logic [EW-1:0]           rd_expert,
  input  logic [TW-1:0]           rd_idx,
  output logic [TW-1:0]           rd_tok,
  output data_t                   rd_weight,
  output logic [N-1:0][TW-1:0]    count
);
  logic [TW-1:0] tok_mem [N * T];
  data_t         w_mem   [N * T];

  always_ff @(posedge clk) begin
    if (push && !clear) begin
      tok_mem[int'(push_expert) * T + int'(count[push_expert])] <= push_tok;
      w_mem[int'(push_expert) * T + int'(count[push_expert])]   <= push_weight;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else if (clear) count <= '0;
    else if (push) count[push_expert] <= count[push_expert] + 1'b1;
  end

  assign rd_tok    = tok_mem[int'(rd_expert) * T + int'(rd_idx)];
  assign rd_weight = w_mem[int'(rd_expert) * T + int'(rd_idx)];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  (push && !clear) |-> (int'(count[push_expert]) < T));
endmodule
