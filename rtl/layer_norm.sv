// layer_norm: the layer-norm unit of Fig. 3, normalising one token at a time.
//
// A token (D values) is accepted on in_valid/in_ready. The unit then makes
// three passes over it, LANES values per cycle: sum -> mean, sum of squared
// deviations -> variance (plus one LSB as epsilon), and finally
// y_i = ((x_i - mean) / std) * gamma_i + beta_i. The standard deviation comes
// from a sequential integer square root and 1/std from a sequential divider,
// once per token. The result is offered on out_valid/out_ready.
// The unit serves both normalisations of a layer (paths 1 and 2 of Fig. 3):
// sel = 0 applies the first set of gamma/beta, sel = 1 the second. Both sets
// of the current layer are written beforehand through the parameter port, in
// blocks of D/LANES words: gamma1, beta1, gamma2, beta2.
// Latency is 3*D/LANES + about 40 cycles per token. The paper only names the
// unit; the arithmetic and the timing are this design's choice.
module layer_norm
  import m3vit_pkg::*;
#(
  parameter int D     = 384,
  parameter int LANES = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // parameter load port
  input  logic                p_we,
  input  logic [15:0]         p_waddr,
  input  data_t [LANES-1:0]   p_wdata,
  input  logic                sel,
  // token stream in
  input  logic                in_valid,
  output logic                in_ready,
  input  data_t [D-1:0]       in_tok,
  // token stream out
  output logic                out_valid,
  input  logic                out_ready,
  output data_t [D-1:0]       out_tok
);
  localparam int NCH = D / LANES;
  localparam longint RECIP_D = recip_q24(D);

  typedef enum logic [2:0] {S_IDLE, S_SUM, S_MEAN, S_VAR, S_SQRT, S_DIV, S_NORM, S_OUT} state_e;
  state_e state_q;

  data_t [1:0][D-1:0] gamma_q, beta_q;
  data_t [D-1:0] x_q;
  logic sel_q;
  logic [15:0]   c_q;
  logic signed [63:0] sum_q, sq_q;
  data_t         mean_q;
  logic [31:0]   var_c;
  logic          sq_start, sq_done, sq_busy, dv_start, dv_done, dv_busy;
  logic [15:0]   std_w;
  logic [16:0]   inv_w, inv_q;

  isqrt_seq #(.W(32)) u_sqrt (.clk, .rst_n, .start(sq_start), .rad(var_c),
                              .root(std_w), .busy(sq_busy), .done(sq_done));
  seq_div #(.NW(17), .DW(16)) u_div (.clk, .rst_n, .start(dv_start), .num(17'h10000),
                                     .den(std_w), .quo(inv_w), .busy(dv_busy), .done(dv_done));

  // variance in Q16 plus epsilon, clamped to 32 bits
  always_comb begin
    logic signed [63:0] v;
    v = ((sq_q * 64'(RECIP_D)) >>> 24) + 64'sd1;
    var_c = (v > 64'sd4294967295) ? 32'hffff_ffff : 32'(v);
  end

  assign sq_start = (state_q == S_SQRT) && !sq_busy && !sq_done && (c_q == 0);
  assign dv_start = (state_q == S_DIV) && (c_q == 0);
  assign in_ready  = (state_q == S_IDLE);
  assign out_valid = (state_q == S_OUT);
  assign out_tok   = x_q;

  always_ff @(posedge clk) begin
    if (p_we) begin
      for (int l = 0; l < LANES; l++) begin
        if (int'(p_waddr) < 4 * NCH) begin
          if ((int'(p_waddr) / NCH) % 2 == 0)
            gamma_q[int'(p_waddr) / (2 * NCH)][(int'(p_waddr) % NCH) * LANES + l] <= p_wdata[l];
          else
            beta_q[int'(p_waddr) / (2 * NCH)][(int'(p_waddr) % NCH) * LANES + l] <= p_wdata[l];
        end
      end
    end
  end

  // per-cycle lane arithmetic of the sum, variance and normalise steps
  logic signed [63:0]  sum_next, sq_next;
  data_t [LANES-1:0]   norm_w;
  always_comb begin
    logic signed [63:0] d;
    data_t z;
    sum_next = sum_q;
    sq_next  = sq_q;
    for (int l = 0; l < LANES; l++) begin
      sum_next += 64'(x_q[int'(c_q) * LANES + l]);
      d = 64'(x_q[int'(c_q) * LANES + l]) - 64'(mean_q);
      sq_next += d * d;
      z = sat16((d * $signed(64'(inv_q))) >>> FRAC);
      norm_w[l] = qadd(qmul(z, gamma_q[sel_q][int'(c_q) * LANES + l]),
                       beta_q[sel_q][int'(c_q) * LANES + l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; c_q <= '0; sum_q <= '0; sq_q <= '0; mean_q <= '0; inv_q <= '0; x_q <= '0; sel_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          x_q <= in_tok; sel_q <= sel; c_q <= '0; sum_q <= '0; state_q <= S_SUM;
        end
        S_SUM: begin
          sum_q <= sum_next;
          if (int'(c_q) == NCH - 1) begin c_q <= '0; state_q <= S_MEAN; end
          else c_q <= c_q + 1'b1;
        end
        S_MEAN: begin
          mean_q <= sat16((sum_q * 64'(RECIP_D)) >>> 24);
          sq_q <= '0; state_q <= S_VAR;
        end
        S_VAR: begin
          sq_q <= sq_next;
          if (int'(c_q) == NCH - 1) begin c_q <= '0; state_q <= S_SQRT; end
          else c_q <= c_q + 1'b1;
        end
        S_SQRT: begin
          // c_q counts 0 (start issued) then 1 (waiting)
          c_q <= 16'd1;
          if (sq_done) begin c_q <= '0; state_q <= S_DIV; end
        end
        S_DIV: begin
          c_q <= 16'd1;
          if (dv_done) begin inv_q <= inv_w; c_q <= '0; state_q <= S_NORM; end
        end
        S_NORM: begin
          for (int l = 0; l < LANES; l++) x_q[int'(c_q) * LANES + l] <= norm_w[l];
          if (int'(c_q) == NCH - 1) begin c_q <= '0; state_q <= S_OUT; end
          else c_q <= c_q + 1'b1;
        end
        S_OUT: if (out_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
