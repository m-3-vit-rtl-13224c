// tb_self_attention: the 12-head self-attention unit with projection at a
// small size (5 tokens, width 48, so 4 channels per head, 4 lanes). Loads
// all head weights and the projection through the shared weight port,
// streams two layers of random tokens and compares each projected output
// with a reference that computes the 12 heads, concatenates them and
// applies the projection. Checks that the per-query projection takes
// D*D/LANES cycles plus at most 6.
module tb_self_attention;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 5, D = 48, NH = 12, L = 4, DH = D / NH, NCH = D / L;
  localparam int HW = 3 * DH * NCH, PW = D * NCH;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] w_waddr = 0;
  data_t [L-1:0] w_wdata;
  data_t [D-1:0] in_tok, out_tok;

  self_attention #(.T(T), .D(D), .NH(NH), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;

  function automatic data_t Wm(int base, int r, int i);
    return wgen(32'(base + r * NCH + i / L), 32'(i % L));
  endfunction

  task automatic run_layer();
    data_t x [T][D], cat [T][D];
    data_t xv [] = new[D];
    data_t wv [] = new[D];
    int gap, maxgap = 0;
    for (int t = 0; t < T; t++)
      for (int i = 0; i < D; i++) x[t][i] = data_t'(int'($urandom % 1024) - 512);
    for (int h = 0; h < NH; h++) begin
      data_t q [T][DH], k [T][DH], v [T][DH];
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < D; i++) xv[i] = x[t][i];
        for (int j = 0; j < 3 * DH; j++) begin
          data_t r;
          for (int i = 0; i < D; i++) wv[i] = Wm(h * HW, j, i);
          r = dot_q(xv, wv);
          if (j < DH) q[t][j] = r; else if (j < 2 * DH) k[t][j - DH] = r; else v[t][j - 2 * DH] = r;
        end
      end
      for (int i = 0; i < T; i++) begin
        data_t s [] = new[T];
        data_t p [] = new[T];
        for (int t = 0; t < T; t++) begin
          acc_t a = 0;
          for (int j = 0; j < DH; j++) a += acc_t'(q[i][j]) * acc_t'(k[t][j]);
          s[t] = sat16((64'(acc_to_data(a)) * 64'(inv_sqrt_q8(DH))) >>> 8);
        end
        ref_softmax(s, p);
        for (int j = 0; j < DH; j++) begin
          acc_t a = 0;
          for (int t = 0; t < T; t++) a += acc_t'(p[t]) * acc_t'(v[t][j]);
          cat[i][h * DH + j] = acc_to_data(a);
        end
      end
    end
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < D; i++) in_tok[i] = x[t][i];
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk) in_valid = 0;
    for (int i = 0; i < T; i++) begin
      gap = 0;
      while (!dut.h_take) begin @(negedge clk); end
      while (!out_valid) begin @(negedge clk); gap++; end
      if (gap > maxgap) maxgap = gap;
      for (int j = 0; j < D; j++) begin
        data_t got, exp;
        for (int c = 0; c < D; c++) begin xv[c] = cat[i][c]; wv[c] = Wm(NH * HW, j, c); end
        exp = dot_q(xv, wv);
        got = out_tok[j];
        checks++;
        if (got !== exp) begin
          failures++;
          if (failures < 10) $display("token %0d ch %0d: got %0d expected %0d", i, j, got, exp);
        end
      end
      out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    checks++;
    if (maxgap > D * NCH + 6) begin failures++; $display("projection took %0d cycles", maxgap); end
    $display("projection %0d cycles", maxgap);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < NH * HW + PW; w++) begin
      @(negedge clk) w_we = 1; w_waddr = 32'(w);
      for (int l = 0; l < L; l++) w_wdata[l] = wgen(32'(w), 32'(l));
    end
    @(negedge clk) w_we = 0;
    run_layer();
    run_layer();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
