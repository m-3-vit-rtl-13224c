// tb_layer_norm: layer_norm at full width (D = 384, 32 lanes). Loads two
// gamma/beta sets, normalises 40 random tokens alternating between the sets
// (with random output back-pressure and including a constant token, whose
// variance is only the epsilon), and compares every value with a reference.
// Checks the per-token latency: 3*D/LANES passes plus the square root and
// the divider, at most 3*D/LANES + 45 cycles from acceptance to output.
module tb_layer_norm;
  import m3vit_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 384, L = 32, NCH = D / L;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic p_we = 0, sel = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] p_waddr = 0;
  data_t [L-1:0] p_wdata;
  data_t [D-1:0] in_tok, out_tok;

  layer_norm #(.D(D), .LANES(L)) dut (.*);

  data_t g [2][D], b [2][D];
  int checks = 0, failures = 0;

  initial begin
    data_t x [] = new[D];
    data_t y [] = new[D];
    data_t gg [] = new[D];
    data_t bb [] = new[D];
    int lat, maxlat = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < D; i++) begin
        g[s][i] = data_t'(int'($urandom % 512) - 128);
        b[s][i] = data_t'(int'($urandom % 256) - 128);
      end
    for (int w = 0; w < 4 * NCH; w++) begin
      @(negedge clk);
      p_we = 1; p_waddr = 16'(w);
      for (int l = 0; l < L; l++)
        p_wdata[l] = ((w / NCH) % 2 == 0) ? g[w / (2 * NCH)][(w % NCH) * L + l]
                                          : b[w / (2 * NCH)][(w % NCH) * L + l];
    end
    @(negedge clk) p_we = 0;
    for (int n = 0; n < 40; n++) begin
      int amp = (n % 3 == 0) ? 4096 : 512;
      for (int i = 0; i < D; i++) begin
        x[i] = (n == 5) ? data_t'(77) : data_t'(int'($urandom % (2 * amp)) - amp + 100);
        in_tok[i] = x[i];
      end
      sel = n[0];
      for (int i = 0; i < D; i++) begin gg[i] = g[n % 2][i]; bb[i] = b[n % 2][i]; end
      ref_ln(x, gg, bb, y);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
      lat = 0;
      out_ready = 0;
      while (!out_valid) begin @(negedge clk); lat++; end
      repeat ($urandom % 3) @(negedge clk);
      for (int i = 0; i < D; i++) begin
        data_t got;
        got = out_tok[i];
        checks++;
        if (got !== y[i]) begin
          failures++;
          if (failures < 10) $display("token %0d ch %0d: got %0d expected %0d", n, i, got, y[i]);
        end
      end
      if (lat > maxlat) maxlat = lat;
      out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    checks++;
    if (maxlat > 3 * NCH + 45) begin failures++; $display("latency %0d too long", maxlat); end
    $display("max latency %0d cycles", maxlat);
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
