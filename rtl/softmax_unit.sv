// softmax_unit: softmax over a score vector, as needed by every attention
// head (Eq. 1 of the reference algorithm) and by the MoE router (Eq. 3).
//
// Scores are written one per cycle through in_valid/in_idx/in_data. A start
// pulse with len then runs three passes over the stored scores: (1) find the
// maximum m, (2) e_i = exp(s_i - m) in Q0.16 and their sum S, (3) after one
// reciprocal r = floor(2^32 / S) from a sequential divider, p_i = (e_i*r)>>24
// in Q7.8. Subtracting the maximum keeps every exponent <= 0, so e_i <= 1.0
// and S >= 1.0. prob holds the probabilities (zero at and beyond len) from the
// done pulse until the next start. Latency is 3*len + 35 cycles plus a few
// cycles of control. The exp approximation (exp_q16 in m3vit_pkg) is this
// design's choice; the paper only names the softmax.
module softmax_unit
  import m3vit_pkg::*;
#(
  parameter int MAXLEN = 196,
  parameter int IW     = (MAXLEN > 1) ? $clog2(MAXLEN + 1) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IW-1:0]     in_idx,
  input  data_t             in_data,
  input  logic              start,
  input  logic [IW-1:0]     len,
  output data_t [MAXLEN-1:0] prob,
  output logic              busy,
  output logic              done
);
  typedef enum logic [2:0] {S_IDLE, S_MAX, S_EXP, S_DIV, S_WAIT, S_NORM} state_e;
  state_e state_q;

  data_t       score [MAXLEN];
  logic [16:0] e_q   [MAXLEN];
  logic [IW-1:0] i_q, len_q;
  data_t       max_q;
  logic [31:0] sum_q;
  logic        div_start, div_done, div_busy;
  logic [32:0] div_quo;
  logic [32:0] recip_q;

  seq_div #(.NW(33), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(33'h1_0000_0000), .den(sum_q),
    .quo(div_quo), .busy(div_busy), .done(div_done));

  assign div_start = (state_q == S_DIV);
  assign busy      = (state_q != S_IDLE);

  always_ff @(posedge clk) begin
    if (in_valid) score[in_idx] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; i_q <= '0; len_q <= '0; max_q <= '0; sum_q <= '0;
      recip_q <= '0; done <= 1'b0; prob <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          len_q <= len; i_q <= '0; max_q <= 16'sh8000; state_q <= S_MAX;
        end
        S_MAX: begin
          if (score[i_q] > max_q) max_q <= score[i_q];
          if (i_q == len_q - 1'b1) begin i_q <= '0; sum_q <= '0; state_q <= S_EXP; end
          else i_q <= i_q + 1'b1;
        end
        S_EXP: begin
          e_q[i_q] <= exp_q16(sat16(64'(score[i_q]) - 64'(max_q)));
          sum_q    <= sum_q + 32'(exp_q16(sat16(64'(score[i_q]) - 64'(max_q))));
          if (i_q == len_q - 1'b1) begin i_q <= '0; state_q <= S_DIV; end
          else i_q <= i_q + 1'b1;
        end
        S_DIV: state_q <= S_WAIT;
        S_WAIT: if (div_done) begin recip_q <= div_quo; state_q <= S_NORM; prob <= '0; end
        S_NORM: begin
          prob[i_q] <= data_t'((64'(e_q[i_q]) * 64'(recip_q)) >> 24);
          if (i_q == len_q - 1'b1) begin state_q <= S_IDLE; done <= 1'b1; end
          else i_q <= i_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
