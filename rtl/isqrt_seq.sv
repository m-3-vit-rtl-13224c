// isqrt_seq: integer square root, one result bit per cycle.
// Pulse start with an unsigned radicand; W/2 cycles later done pulses and
// root holds floor(sqrt(rad)). Used by the layer-norm unit for the standard
// deviation.
module isqrt_seq #(
  parameter int W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   rad,
  output logic [W/2-1:0] root,
  output logic           busy,
  output logic           done
);
  logic [W-1:0] rad_q;
  logic [$clog2(W)-1:0] bit_q;
  logic [W/2-1:0] trial;

  always_comb begin
    trial = root | (W/2)'(1) << bit_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad_q <= '0; bit_q <= '0; root <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; rad_q <= rad; root <= '0; bit_q <= ($clog2(W))'(W/2 - 1);
      end else if (busy) begin
        if (W'(trial) * W'(trial) <= rad_q) root <= trial;
        if (bit_q == 0) begin
          busy <= 1'b0; done <= 1'b1;
        end else begin
          bit_q <= bit_q - 1'b1;
        end
      end
    end
  end
endmodule
