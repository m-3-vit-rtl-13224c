// mlp_unit: the fully-connected unit of Fig. 3, computing W2 gelu(W1 x) for
// one token at a time. The same module computes the MLP of a standard ViT
// layer (H = 4*D) and one expert of an MoE layer (H = D, the paper's experts
// being four times narrower than the ViT MLP).
//
// A token is accepted on in_valid/in_ready. Pass 1 computes the H hidden
// values, each a dot product with a row of W1 followed by GELU (path 4 of
// Fig. 3 loops the hidden vector back); pass 2 computes the D outputs from
// the rows of W2. Weights are read from an external buffer through a
// one-cycle-latency read port, W1 rows (D/LANES words each) from w_base on,
// W2 rows (H/LANES words each) right after them. The result is offered on
// out_valid/out_ready. Timing: H*D/LANES + D*H/LANES + about 6 cycles per
// token. Biases are not modelled.
module mlp_unit
  import m3vit_pkg::*;
#(
  parameter int D     = 384,
  parameter int H     = 1536,
  parameter int LANES = 32,
  parameter int AW    = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [AW-1:0]      w_base,
  output logic               w_re,
  output logic [AW-1:0]      w_raddr,
  input  data_t [LANES-1:0]  w_rdata,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t [D-1:0]      in_tok,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t [D-1:0]      out_tok
);
  localparam int NCH = D / LANES;
  localparam int HCH = H / LANES;

  typedef enum logic [1:0] {S_IN, S_FC1, S_FC2, S_OUT} state_e;
  state_e state_q;

  data_t [D-1:0] x_q;
  data_t [H-1:0] h_q;

  logic m1_start, m1_valid, m1_done, m1_re;
  logic m2_start, m2_valid, m2_done, m2_re;
  logic [AW-1:0] m1_addr, m2_addr;
  logic [15:0] m1_row, m2_row;
  acc_t m1_acc, m2_acc;
  logic g_valid;
  data_t g_y;
  logic [15:0] g_row;

  matvec_seq #(.IN_MAX(D), .LANES(LANES), .AW(AW)) u_fc1 (
    .clk, .rst_n, .start(m1_start), .n_rows(16'(H)), .in_chunks(16'(NCH)), .base(w_base),
    .x(x_q), .w_re(m1_re), .w_raddr(m1_addr), .w_rdata,
    .res_valid(m1_valid), .res_row(m1_row), .res_acc(m1_acc), .busy(), .done(m1_done));

  gelu_unit u_gelu (.clk, .rst_n, .in_valid(m1_valid), .x(acc_to_data(m1_acc)),
                    .out_valid(g_valid), .y(g_y));

  matvec_seq #(.IN_MAX(H), .LANES(LANES), .AW(AW)) u_fc2 (
    .clk, .rst_n, .start(m2_start), .n_rows(16'(D)), .in_chunks(16'(HCH)),
    .base(w_base + AW'(H * NCH)),
    .x(h_q), .w_re(m2_re), .w_raddr(m2_addr), .w_rdata,
    .res_valid(m2_valid), .res_row(m2_row), .res_acc(m2_acc), .busy(), .done(m2_done));

  assign w_re     = m1_re | m2_re;
  assign w_raddr  = m1_re ? m1_addr : m2_addr;
  assign in_ready = (state_q == S_IN);
  assign out_valid = (state_q == S_OUT);
  assign m1_start = (state_q == S_IN) && in_valid;

  // the GELU output of row r arrives one cycle after the row result
  logic g_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin g_row <= '0; g_last <= 1'b0; end
    else begin g_row <= m1_row; g_last <= m1_done; end
  end
  assign m2_start = g_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IN; x_q <= '0; h_q <= '0; out_tok <= '0;
    end else begin
      if (g_valid) h_q[int'(g_row)] <= g_y;
      unique case (state_q)
        S_IN:  if (in_valid) begin x_q <= in_tok; state_q <= S_FC1; end
        S_FC1: if (g_last) state_q <= S_FC2;
        S_FC2: begin
          if (m2_valid) out_tok[int'(m2_row)] <= acc_to_data(m2_acc);
          if (m2_done) state_q <= S_OUT;
        end
        S_OUT: if (out_ready) state_q <= S_IN;
        default: state_q <= S_IN;
      endcase
    end
  end
endmodule
