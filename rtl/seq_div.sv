// seq_div: unsigned restoring divider, one quotient bit per cycle.
// Pulse start with num/den; NW+1 cycles later done pulses and quo holds
// floor(num/den) (all ones if den is zero). Used for the one reciprocal per
// softmax row and per layer-norm token.
module seq_div #(
  parameter int NW = 33,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic [NW-1:0] quo,
  output logic          busy,
  output logic          done
);
  logic [DW:0]   rem_q;
  logic [NW-1:0] n_q;
  logic [DW-1:0] d_q;
  logic [$clog2(NW+1)-1:0] cnt_q;

  logic [DW:0] shifted;
  assign shifted = {rem_q[DW-1:0], n_q[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0; n_q <= '0; d_q <= '0; cnt_q <= '0; quo <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; rem_q <= '0; n_q <= num; d_q <= den; cnt_q <= '0; quo <= '0;
      end else if (busy) begin
        n_q <= {n_q[NW-2:0], 1'b0};
        if (shifted >= {1'b0, d_q}) begin
          rem_q <= shifted - {1'b0, d_q};
          quo   <= {quo[NW-2:0], 1'b1};
        end else begin
          rem_q <= shifted;
          quo   <= {quo[NW-2:0], 1'b0};
        end
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == ($clog2(NW+1))'(NW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
