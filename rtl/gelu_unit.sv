// gelu_unit: GELU activation of one Q7.8 value, registered (one cycle of
// latency, one value per cycle). The paper applies GELU between the two
// fully-connected layers of every ViT MLP and every expert (W2 gelu(W1 x));
// it does not say how the FPGA evaluates it. This unit uses the piecewise
// approximation x * clamp(0.5 + 1.702x/6, 0, 1), a hard-sigmoid version of
// x*sigmoid(1.702x): zero below -1.76, identity above +1.76, a quadratic in
// between, within about 0.07 of the exact GELU (gelu_q in m3vit_pkg).
module gelu_unit
  import m3vit_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t x,
  output logic  out_valid,
  output data_t y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; y <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= gelu_q(x);
    end
  end
endmodule
