// tb_gelu_unit: drives every one of the 65536 input codes through gelu_unit
// and compares each result with x*clamp(0.5 + 1.702x/6, 0, 1) evaluated in
// floating point (allowed error: two LSBs from the two roundings down). Also
// checks that the result is within 0.1 of the exact GELU x*Phi(x) over
// [-6, 6],
// and the one-cycle latency.
module tb_gelu_unit;
  import m3vit_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  data_t x = 0, y;

  gelu_unit dut (.*);

  int checks = 0, failures = 0;

  function automatic real phi(real v);
    // normal CDF through the error-function series of Abramowitz-Stegun 7.1.26
    real t, z, e;
    z = (v < 0) ? -v / 1.4142135623730951 : v / 1.4142135623730951;
    t = 1.0 / (1.0 + 0.3275911 * z);
    e = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t
               + 0.254829592) * t * $exp(-z * z);
    return (v < 0) ? 0.5 * (1.0 - e) : 0.5 * (1.0 + e);
  endfunction

  initial begin
    data_t prev_x;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i <= 65536; i++) begin
      @(negedge clk);
      if (i > 0) begin
        real xr, ref_v, got_r, sg;
        checks++;
        if (!out_valid) begin failures++; $display("no output after one cycle"); end
        xr = real'(prev_x) / 256.0;
        sg = 0.5 + 1.702 * xr / 6.0;
        if (sg < 0.0) sg = 0.0;
        if (sg > 1.0) sg = 1.0;
        ref_v = xr * sg;
        if (ref_v > 127.99) ref_v = 32767.0 / 256.0;
        got_r = real'(y) / 256.0;
        if (got_r > ref_v + 0.0001 || got_r < ref_v - 2.0 / 256.0 - 0.0001) begin
          failures++;
          if (failures < 10) $display("x=%0d got %0d ref %f", prev_x, y, ref_v * 256.0);
        end
        if (xr >= -6.0 && xr <= 6.0) begin
          checks++;
          if (got_r - xr * phi(xr) > 0.1 || xr * phi(xr) - got_r > 0.1) begin
            failures++;
            if (failures < 10) $display("x=%f far from GELU: %f vs %f", xr, got_r, xr * phi(xr));
          end
        end
      end
      if (i < 65536) begin
        in_valid = 1;
        x = data_t'(i - 32768);
        prev_x = x;
      end else in_valid = 0;
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("output without input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
