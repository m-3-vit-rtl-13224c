// m3vit_top: layer-sequential accelerator for the MoE ViT backbone of
// M3ViT (Fig. 3): one set of hardware computes all layers in turn, and
// within a layer the units work on the tokens in parallel where the
// dataflow allows it.
//
// One frame (start pulse, task_id):
//   1. Load the patch-embedding weights and embed the T patches supplied on
//      patch_valid/patch_ready into the token buffer X.
//   2. For each of the N_LAYERS layers: load the layer's norm and attention
//      parameters, and either the ViT MLP weights (even layers) or the router
//      rows of task task_id (odd layers, the MoE layers: one MoE layer in
//      every two blocks). Then
//        X <- X + SelfAttention(LN1(X))                (paths 1, 2 of Fig. 3)
//        X <- X + MLP(LN2(X))     for a ViT layer      (paths 3-5)
//        X <- X + MoE(LN2(X))     for an MoE layer     (paths 3-5)
//      The "layer type" multiplexer picks which unit's output is added back
//      (path 6 then starts the next layer).
//   3. Send the T output tokens on out_valid/out_ready and pulse done.
// All weights live in off-chip memory, read through the mem_* port (one word
// of LANES values per cycle, in-order responses). Word address map:
//   0                        patch projection rows, then position embedding
//   PE_WORDS + l*LSTRIDE     layer l: norms (4*D/LANES words), attention
//                            (12 heads' W_q/W_k/W_v, then the projection),
//                            then either the MLP (W1, W2) or the MoE part
//                            (router rows of every task, then the N experts)
// Task and frame switches need no special step: task_id only selects which
// router rows are loaded, exactly as the paper describes.
// Sizes follow the paper's ViT-small MoE backbone (12 layers, 12 heads,
// 16 experts, top-4); the token count, the patch size, the hidden width
// (384), the number format and the lane count are this design's choices.
// The activity counters let a testbench see every mechanism at work.
module m3vit_top
  import m3vit_pkg::*;
#(
  parameter int T        = 196,
  parameter int D        = 384,
  parameter int NH       = 12,
  parameter int MLP_H    = 1536,
  parameter int N        = 16,
  parameter int K        = 4,
  parameter int N_TASKS  = 5,
  parameter int N_LAYERS = 12,
  parameter int PD       = 768,
  parameter int LANES    = 32,
  parameter int TW       = $clog2(T + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [7:0]         task_id,
  output logic               busy,
  output logic               done,
  // image patches, raster order
  input  logic               patch_valid,
  output logic               patch_ready,
  input  data_t [PD-1:0]     patch_data,
  // off-chip memory
  output logic               mem_req,
  output logic [31:0]        mem_addr,
  input  logic               mem_gnt,
  input  logic               mem_valid,
  input  data_t [LANES-1:0]  mem_data,
  // backbone output tokens (to the task decoder)
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [D-1:0]      out_tok,
  output logic [TW-1:0]      out_idx,
  // activity counters (since reset)
  output logic [15:0]        stat_vit_layers,
  output logic [15:0]        stat_moe_layers,
  output logic [31:0]        stat_experts_run,
  output logic [31:0]        stat_prefetches,
  output logic [31:0]        stat_load_wait,
  output logic [15:0]        stat_frames,
  output logic [15:0]        stat_task_switches
);
  localparam int HE           = MLP_H / 4;            // experts 4x narrower
  localparam int DH           = D / NH;
  localparam int NCH          = D / LANES;
  localparam int PE_WORDS     = D * (PD / LANES) + T * NCH;
  localparam int LN_WORDS     = 4 * NCH;
  localparam int ATT_WORDS    = NH * 3 * DH * NCH + D * NCH;
  localparam int FC_WORDS     = MLP_H * NCH + D * (MLP_H / LANES);
  localparam int ROUTER_WORDS = N * NCH;
  localparam int EXP_WORDS    = HE * NCH + D * (HE / LANES);
  localparam int MOE_WORDS    = N_TASKS * ROUTER_WORDS + N * EXP_WORDS;
  localparam int FFN_WORDS    = (FC_WORDS > MOE_WORDS) ? FC_WORDS : MOE_WORDS;
  localparam int LSTRIDE      = LN_WORDS + ATT_WORDS + FFN_WORDS;
  localparam int FC_AW        = $clog2(FC_WORDS + 1);

  typedef enum logic [3:0] {
    T_IDLE, T_LPE, T_PE, T_LLN, T_LATT, T_LFFN, T_ATT, T_FFN, T_OUT, T_DONE
  } tstate_e;
  typedef enum logic [2:0] {DST_PE, DST_LN, DST_SA, DST_FC, DST_RT} dst_e;

  tstate_e state_q;
  dst_e    dst;
  logic [7:0]    layer_q, task_q, last_task_q;
  logic          first_frame_q;
  layer_type_e   ltype;
  logic [TW:0]   fi_q, oi_q;
  logic [31:0]   layer_base;

  data_t [D-1:0] xbuf [T];

  assign ltype      = layer_q[0] ? LAYER_MOE : LAYER_VIT;
  assign layer_base = 32'(PE_WORDS) + 32'(layer_q) * 32'(LSTRIDE);

  // ---------------- global parameter loader
  logic gl_start, gl_done, gl_we, gl_req, gl_valid;
  logic [31:0] gl_src, gl_len, gl_waddr, gl_addr;
  data_t [LANES-1:0] gl_wdata;

  always_comb begin
    gl_src = '0; gl_len = '0; dst = DST_PE;
    unique case (state_q)
      T_LPE:  begin dst = DST_PE; gl_src = '0; gl_len = 32'(PE_WORDS); end
      T_LLN:  begin dst = DST_LN; gl_src = layer_base; gl_len = 32'(LN_WORDS); end
      T_LATT: begin dst = DST_SA; gl_src = layer_base + 32'(LN_WORDS); gl_len = 32'(ATT_WORDS); end
      T_LFFN: begin
        if (ltype == LAYER_VIT) begin
          dst = DST_FC; gl_src = layer_base + 32'(LN_WORDS + ATT_WORDS); gl_len = 32'(FC_WORDS);
        end else begin
          dst = DST_RT;
          gl_src = layer_base + 32'(LN_WORDS + ATT_WORDS) + 32'(task_q) * 32'(ROUTER_WORDS);
          gl_len = 32'(ROUTER_WORDS);
        end
      end
      default: ;
    endcase
  end

  logic ld_issued_q;   // one start per load state
  assign gl_start = (state_q inside {T_LPE, T_LLN, T_LATT, T_LFFN}) && !ld_issued_q;

  weight_loader #(.LANES(LANES), .BAW(32)) u_loader (
    .clk, .rst_n, .start(gl_start), .src(gl_src), .dst('0), .len(gl_len),
    .busy(), .done(gl_done),
    .rd_req(gl_req), .rd_addr(gl_addr), .rd_gnt(mem_gnt), .rd_valid(gl_valid), .rd_data(mem_data),
    .buf_we(gl_we), .buf_waddr(gl_waddr), .buf_wdata(gl_wdata));

  // ---------------- memory port: the MoE unit owns it while it runs
  logic moe_owner, moe_req, moe_valid;
  logic [31:0] moe_addr;
  assign moe_owner = (state_q == T_FFN) && (ltype == LAYER_MOE);
  assign mem_req   = moe_owner ? moe_req : gl_req;
  assign mem_addr  = moe_owner ? moe_addr : gl_addr;
  assign gl_valid  = mem_valid && !moe_owner;
  assign moe_valid = mem_valid && moe_owner;

  // ---------------- patch embedding
  logic pe_out_valid, patch_ready_i;
  data_t [D-1:0] pe_tok;
  logic [TW-1:0] pe_idx;
  patch_embed #(.T(T), .D(D), .PD(PD), .LANES(LANES), .TW(TW)) u_pe (
    .clk, .rst_n, .w_we(gl_we && dst == DST_PE), .w_waddr(gl_waddr), .w_wdata(gl_wdata),
    .in_valid(patch_valid && state_q == T_PE), .in_ready(patch_ready_i), .in_patch(patch_data),
    .out_valid(pe_out_valid), .out_ready(1'b1), .out_tok(pe_tok), .out_idx(pe_idx));
  assign patch_ready = patch_ready_i && (state_q == T_PE);

  // ---------------- layer norm (shared by both halves of a layer)
  logic ln_in_valid, ln_in_ready, ln_out_valid, ln_out_ready;
  data_t [D-1:0] ln_out;
  assign ln_in_valid = (state_q inside {T_ATT, T_FFN}) && (int'(fi_q) < T);
  layer_norm #(.D(D), .LANES(LANES)) u_ln (
    .clk, .rst_n, .p_we(gl_we && dst == DST_LN), .p_waddr(gl_waddr[15:0]), .p_wdata(gl_wdata),
    .sel(state_q == T_FFN),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .in_tok(xbuf[fi_q[TW-1:0]]),
    .out_valid(ln_out_valid), .out_ready(ln_out_ready), .out_tok(ln_out));

  // ---------------- self-attention
  logic sa_in_ready, sa_out_valid;
  data_t [D-1:0] sa_out;
  self_attention #(.T(T), .D(D), .NH(NH), .LANES(LANES)) u_sa (
    .clk, .rst_n, .w_we(gl_we && dst == DST_SA), .w_waddr(gl_waddr), .w_wdata(gl_wdata),
    .in_valid(ln_out_valid && state_q == T_ATT), .in_ready(sa_in_ready), .in_tok(ln_out),
    .out_valid(sa_out_valid), .out_ready(1'b1), .out_tok(sa_out));

  // ---------------- ViT MLP with its weight buffer
  logic fc_re, fc_in_ready, fc_out_valid;
  logic [FC_AW-1:0] fc_raddr;
  data_t [LANES-1:0] fc_rdata;
  data_t [D-1:0] fc_out;
  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(FC_WORDS), .AW(FC_AW)) u_fcbuf (
    .clk, .we(gl_we && dst == DST_FC), .waddr(FC_AW'(gl_waddr)), .wdata(gl_wdata),
    .re(fc_re), .raddr(fc_raddr), .rdata(fc_rdata));
  mlp_unit #(.D(D), .H(MLP_H), .LANES(LANES), .AW(FC_AW)) u_fc (
    .clk, .rst_n, .w_base('0), .w_re(fc_re), .w_raddr(fc_raddr), .w_rdata(fc_rdata),
    .in_valid(ln_out_valid && state_q == T_FFN && ltype == LAYER_VIT), .in_ready(fc_in_ready),
    .in_tok(ln_out), .out_valid(fc_out_valid), .out_ready(1'b1), .out_tok(fc_out));

  // ---------------- MoE layer
  logic moe_in_ready, moe_out_valid;
  data_t [D-1:0] moe_out;
  logic [15:0] moe_experts, moe_prefetch;
  logic [31:0] moe_wait;
  moe_layer #(.T(T), .D(D), .HE(HE), .N(N), .K(K), .LANES(LANES), .TW(TW)) u_moe (
    .clk, .rst_n, .r_we(gl_we && dst == DST_RT), .r_waddr(gl_waddr[15:0]), .r_wdata(gl_wdata),
    .expert_base(layer_base + 32'(LN_WORDS + ATT_WORDS + N_TASKS * ROUTER_WORDS)),
    .rd_req(moe_req), .rd_addr(moe_addr), .rd_gnt(mem_gnt), .rd_valid(moe_valid), .rd_data(mem_data),
    .in_valid(ln_out_valid && state_q == T_FFN && ltype == LAYER_MOE), .in_ready(moe_in_ready),
    .in_tok(ln_out), .out_valid(moe_out_valid), .out_ready(1'b1), .out_tok(moe_out),
    .experts_run(moe_experts), .overlapped_loads(moe_prefetch), .load_wait_cycles(moe_wait));

  always_comb begin
    ln_out_ready = 1'b0;
    if (state_q == T_ATT) ln_out_ready = sa_in_ready;
    else if (state_q == T_FFN) ln_out_ready = (ltype == LAYER_VIT) ? fc_in_ready : moe_in_ready;
  end

  // ---------------- result multiplexer ("Layer type?") and residual
  logic res_valid;
  data_t [D-1:0] res_tok;
  always_comb begin
    res_valid = 1'b0; res_tok = sa_out;
    if (state_q == T_ATT) begin res_valid = sa_out_valid; res_tok = sa_out; end
    else if (state_q == T_FFN && ltype == LAYER_VIT) begin res_valid = fc_out_valid; res_tok = fc_out; end
    else if (state_q == T_FFN) begin res_valid = moe_out_valid; res_tok = moe_out; end
  end

  always_ff @(posedge clk) begin
    if (state_q == T_PE && pe_out_valid) xbuf[pe_idx] <= pe_tok;
    if (res_valid) begin
      for (int j = 0; j < D; j++)
        xbuf[oi_q[TW-1:0]][j] <= qadd(xbuf[oi_q[TW-1:0]][j], res_tok[j]);
    end
  end

  assign out_valid = (state_q == T_OUT);
  assign out_tok   = xbuf[oi_q[TW-1:0]];
  assign out_idx   = oi_q[TW-1:0];
  assign busy      = (state_q != T_IDLE);

  // ---------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= T_IDLE; layer_q <= '0; task_q <= '0; last_task_q <= '0; first_frame_q <= 1'b1;
      fi_q <= '0; oi_q <= '0; ld_issued_q <= 1'b0; done <= 1'b0;
      stat_vit_layers <= '0; stat_moe_layers <= '0; stat_experts_run <= '0;
      stat_prefetches <= '0; stat_load_wait <= '0; stat_frames <= '0; stat_task_switches <= '0;
    end else begin
      done <= 1'b0;
      if (gl_start) ld_issued_q <= 1'b1;
      if (ln_in_valid && ln_in_ready) fi_q <= fi_q + 1'b1;
      if (res_valid) oi_q <= oi_q + 1'b1;
      unique case (state_q)
        T_IDLE: if (start) begin
          task_q <= task_id; state_q <= T_LPE; ld_issued_q <= 1'b0;
          if (!first_frame_q && task_id != last_task_q) stat_task_switches <= stat_task_switches + 1'b1;
        end
        T_LPE: if (gl_done) begin state_q <= T_PE; ld_issued_q <= 1'b0; oi_q <= '0; end
        T_PE: if (pe_out_valid) begin
          if (int'(pe_idx) == T - 1) begin layer_q <= '0; state_q <= T_LLN; end
        end
        T_LLN:  if (gl_done) begin state_q <= T_LATT; ld_issued_q <= 1'b0; end
        T_LATT: if (gl_done) begin state_q <= T_LFFN; ld_issued_q <= 1'b0; end
        T_LFFN: if (gl_done) begin state_q <= T_ATT; ld_issued_q <= 1'b0; fi_q <= '0; oi_q <= '0; end
        T_ATT: if (res_valid && int'(oi_q) == T - 1) begin
          state_q <= T_FFN; fi_q <= '0; oi_q <= '0;
        end
        T_FFN: if (res_valid && int'(oi_q) == T - 1) begin
          oi_q <= '0;
          if (ltype == LAYER_VIT) stat_vit_layers <= stat_vit_layers + 1'b1;
          else begin
            stat_moe_layers  <= stat_moe_layers + 1'b1;
            stat_experts_run <= stat_experts_run + 32'(moe_experts);
            stat_prefetches  <= stat_prefetches + 32'(moe_prefetch);
            stat_load_wait   <= stat_load_wait + moe_wait;
          end
          if (int'(layer_q) == N_LAYERS - 1) state_q <= T_OUT;
          else begin layer_q <= layer_q + 1'b1; state_q <= T_LLN; end
        end
        T_OUT: if (out_ready) begin
          if (int'(oi_q) == T - 1) begin oi_q <= '0; state_q <= T_DONE; end
          else oi_q <= oi_q + 1'b1;
        end
        T_DONE: begin
          done <= 1'b1; state_q <= T_IDLE; stat_frames <= stat_frames + 1'b1;
          last_task_q <= task_q; first_frame_q <= 1'b0;
        end
        default: state_q <= T_IDLE;
      endcase
    end
  end
endmodule
