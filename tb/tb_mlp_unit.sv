// tb_mlp_unit: mlp_unit at width 64 with a 256-wide hidden layer and 16
// lanes, reading its weights from a testbench buffer (one cycle of read
// latency) at a non-zero base. Eight random tokens are pushed through, with
// random output back-pressure, and every output is compared with
// W2 gelu(W1 x). Checks the rate: H*D/LANES + D*H/LANES cycles of dot
// products per token plus at most 8.
module tb_mlp_unit;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 64, H = 256, L = 16, NCH = D / L, HCH = H / L, BASE = 37;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_re, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] w_raddr;
  logic [15:0] w_base = 16'(BASE);
  data_t [L-1:0] w_rdata;
  data_t [D-1:0] in_tok, out_tok;

  mlp_unit #(.D(D), .H(H), .LANES(L), .AW(16)) dut (.*);

  always_ff @(posedge clk)
    if (w_re) for (int l = 0; l < L; l++) w_rdata[l] <= wgen(32'(w_raddr), 32'(l));

  int checks = 0, failures = 0;

  initial begin
    data_t x [] = new[D];
    data_t h [] = new[H];
    data_t wv [] = new[D];
    data_t wh [] = new[H];
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      for (int i = 0; i < D; i++) x[i] = data_t'(int'($urandom % 1024) - 512);
      for (int r = 0; r < H; r++) begin
        for (int i = 0; i < D; i++) wv[i] = wgen(32'(BASE + r * NCH + i / L), 32'(i % L));
        h[r] = gelu_q(dot_q(x, wv));
      end
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < D; i++) in_tok[i] = x[i];
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > H * NCH + D * HCH + 8) begin failures++; $display("token took %0d cycles", cyc); end
      repeat ($urandom % 4) @(negedge clk);
      for (int j = 0; j < D; j++) begin
        data_t got, exp;
        for (int i = 0; i < H; i++) wh[i] = wgen(32'(BASE + H * NCH + j * HCH + i / L), 32'(i % L));
        exp = dot_q(h, wh);
        got = out_tok[j];
        checks++;
        if (got !== exp) begin
          failures++;
          if (failures < 10) $display("token %0d out %0d: got %0d expected %0d", n, j, got, exp);
        end
      end
      $display("token %0d: %0d cycles", n, cyc);
      out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
