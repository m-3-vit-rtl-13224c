// patch_embed: the patch-embedding step (Fig. 1, first stage of Fig. 6).
// Each flattened image patch (PD = 3*P*P pixel values) is projected to a
// D-long token with the patch-projection matrix (the convolution with
// stride P written as a matrix product) and the position embedding of its
// index is added.
// Weight port (words of LANES values): the D projection rows of PD/LANES
// words each, then T position-embedding rows of D/LANES words each.
// Patches arrive in raster order on in_valid/in_ready; tokens leave in the
// same order on out_valid/out_ready with their index in out_idx.
// Timing: D*PD/LANES + D/LANES + about 4 cycles per patch. The paper
// describes the step only as a projection by one convolutional layer plus
// position embeddings; the patch size (16, giving PD = 768) is DeiT's.
module patch_embed
  import m3vit_pkg::*;
#(
  parameter int T     = 196,
  parameter int D     = 384,
  parameter int PD    = 768,
  parameter int LANES = 32,
  parameter int TW    = $clog2(T + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_we,
  input  logic [31:0]        w_waddr,
  input  data_t [LANES-1:0]  w_wdata,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [PD-1:0]     in_patch,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [D-1:0]      out_tok,
  output logic [TW-1:0]      out_idx
);
  localparam int NCH   = D / LANES;
  localparam int PCH   = PD / LANES;
  localparam int WW    = D * PCH;
  localparam int DEPTH = WW + T * NCH;
  localparam int AW    = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {S_IN, S_PROJ, S_POS, S_OUT} state_e;
  state_e state_q;

  data_t [PD-1:0] p_q;
  logic [15:0] c_q;
  logic re, mv_re, mv_start, mv_valid, mv_done;
  logic [AW-1:0] raddr, mv_addr;
  data_t [LANES-1:0] rdata;
  logic [15:0] mv_row;
  acc_t mv_acc;

  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(DEPTH), .AW(AW)) u_wbuf (
    .clk, .we(w_we), .waddr(AW'(w_waddr)), .wdata(w_wdata), .re(re), .raddr(raddr), .rdata(rdata));

  matvec_seq #(.IN_MAX(PD), .LANES(LANES), .AW(AW)) u_mv (
    .clk, .rst_n, .start(mv_start), .n_rows(16'(D)), .in_chunks(16'(PCH)), .base('0),
    .x(p_q), .w_re(mv_re), .w_raddr(mv_addr), .w_rdata(rdata),
    .res_valid(mv_valid), .res_row(mv_row), .res_acc(mv_acc), .busy(), .done(mv_done));

  // position-embedding words are read after the projection, one per cycle
  logic pos_re, pos_v_q;
  logic [15:0] pc_q;
  assign pos_re   = (state_q == S_POS) && (int'(c_q) < NCH);
  assign re       = mv_re | pos_re;
  assign raddr    = mv_re ? mv_addr : AW'(WW + int'(out_idx) * NCH + int'(c_q));
  assign mv_start = (state_q == S_IN) && in_valid;
  assign in_ready = (state_q == S_IN);
  assign out_valid = (state_q == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IN; p_q <= '0; c_q <= '0; pc_q <= '0; pos_v_q <= 1'b0;
      out_tok <= '0; out_idx <= '0;
    end else begin
      pos_v_q <= pos_re;
      pc_q    <= c_q;
      unique case (state_q)
        S_IN: if (in_valid) begin p_q <= in_patch; state_q <= S_PROJ; end
        S_PROJ: begin
          if (mv_valid) out_tok[int'(mv_row)] <= acc_to_data(mv_acc);
          if (mv_done) begin c_q <= '0; state_q <= S_POS; end
        end
        S_POS: begin
          if (int'(c_q) < NCH) c_q <= c_q + 1'b1;
          if (pos_v_q) begin
            for (int l = 0; l < LANES; l++)
              out_tok[int'(pc_q) * LANES + l] <= qadd(out_tok[int'(pc_q) * LANES + l], rdata[l]);
            if (int'(pc_q) == NCH - 1) state_q <= S_OUT;
          end
        end
        S_OUT: if (out_ready) begin
          state_q <= S_IN;
          out_idx <= (int'(out_idx) == T - 1) ? '0 : out_idx + 1'b1;
        end
        default: state_q <= S_IN;
      endcase
    end
  end
endmodule
