// self_attention: the self-attention unit of Fig. 3: NH independent heads
// working in parallel on the same tokens, followed by the linear projection.
//
// Every input token (D values, already layer-normed) is broadcast to all
// heads; a token is taken only when every head is ready. After the last of
// the T tokens the heads produce their outputs query by query; for each query
// the unit concatenates the NH head outputs (head h supplies channels
// h*DH..h*DH+DH-1), multiplies the D-long vector with the D x D projection
// matrix (LANES products per cycle) and offers the projected token on
// out_valid/out_ready. Outputs leave in token order; the residual addition is
// done by the caller.
// Weight port (words of LANES values): words 0..NH*3*DH*D/LANES-1 go to the
// heads, head h owning the block of 3*DH*D/LANES words starting at
// h*3*DH*D/LANES; the next D*D/LANES words are the projection rows.
// Timing per query: the head time plus D*D/LANES + 3 cycles of projection.
// The number of heads (12) and the head/projection structure follow Fig. 3.
module self_attention
  import m3vit_pkg::*;
#(
  parameter int T     = 196,
  parameter int D     = 384,
  parameter int NH    = 12,
  parameter int LANES = 32,
  parameter int WAW   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_we,
  input  logic [31:0]        w_waddr,
  input  data_t [LANES-1:0]  w_wdata,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [D-1:0]      in_tok,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [D-1:0]      out_tok
);
  localparam int DH  = D / NH;
  localparam int NCH = D / LANES;
  localparam int HW  = 3 * DH * NCH;      // words per head
  localparam int PW  = D * NCH;           // projection words

  typedef enum logic [1:0] {S_WAIT, S_PROJ, S_OUT} state_e;
  state_e state_q;

  logic [NH-1:0] h_in_ready, h_out_valid;
  data_t [NH-1:0][DH-1:0] h_out;
  data_t [D-1:0] cat_q;
  logic all_in_ready, all_out_valid, h_take;

  assign all_in_ready  = &h_in_ready;
  assign all_out_valid = &h_out_valid;
  assign in_ready      = all_in_ready;
  assign h_take        = (state_q == S_WAIT) && all_out_valid;

  for (genvar h = 0; h < NH; h++) begin : g_head
    logic hw_we;
    assign hw_we = w_we && (w_waddr >= 32'(h * HW)) && (w_waddr < 32'((h + 1) * HW));
    attention_head #(.T(T), .D(D), .DH(DH), .LANES(LANES), .WAW(WAW)) u_head (
      .clk, .rst_n,
      .w_we(hw_we), .w_waddr(WAW'(w_waddr - 32'(h * HW))), .w_wdata,
      .in_valid(in_valid && all_in_ready), .in_ready(h_in_ready[h]), .in_tok,
      .out_valid(h_out_valid[h]), .out_ready(h_take), .out_vec(h_out[h]));
  end

  // ---------------- projection
  logic p_we, p_re, mv_start, mv_valid, mv_done;
  logic [WAW-1:0] p_raddr;
  data_t [LANES-1:0] p_rdata;
  logic [15:0] mv_row;
  acc_t mv_acc;

  assign p_we = w_we && (w_waddr >= 32'(NH * HW)) && (w_waddr < 32'(NH * HW + PW));
  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(PW), .AW(WAW)) u_pbuf (
    .clk, .we(p_we), .waddr(WAW'(w_waddr - 32'(NH * HW))), .wdata(w_wdata),
    .re(p_re), .raddr(p_raddr), .rdata(p_rdata));

  matvec_seq #(.IN_MAX(D), .LANES(LANES), .AW(WAW)) u_proj (
    .clk, .rst_n, .start(mv_start), .n_rows(16'(D)), .in_chunks(16'(NCH)), .base('0),
    .x(cat_q), .w_re(p_re), .w_raddr(p_raddr), .w_rdata(p_rdata),
    .res_valid(mv_valid), .res_row(mv_row), .res_acc(mv_acc), .busy(), .done(mv_done));

  assign mv_start  = h_take;
  assign out_valid = (state_q == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_WAIT; cat_q <= '0; out_tok <= '0;
    end else begin
      unique case (state_q)
        S_WAIT: if (all_out_valid) begin
          for (int h = 0; h < NH; h++)
            for (int j = 0; j < DH; j++) cat_q[h * DH + j] <= h_out[h][j];
          state_q <= S_PROJ;
        end
        S_PROJ: begin
          if (mv_valid) out_tok[int'(mv_row)] <= acc_to_data(mv_acc);
          if (mv_done) state_q <= S_OUT;
        end
        S_OUT: if (out_ready) state_q <= S_WAIT;
        default: state_q <= S_WAIT;
      endcase
    end
  end
endmodule
