// tb_attention_head: one attention head with 10 tokens, width 64, 16 head
// channels and 8 lanes. Loads W_q/W_k/W_v, streams two layers' worth of
// random tokens (the second run checks that the head restarts cleanly) and
// compares each of the 10 x 16 outputs per run with a reference computed
// from Eq. 1 with the 1/sqrt(16) scaling. Also checks the collect phase
// rate: 3*DH*D/LANES cycles of dot products per token, plus at most 4.
module tb_attention_head;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 10, D = 64, DH = 16, L = 8, NCH = D / L;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] w_waddr = 0;
  data_t [L-1:0] w_wdata;
  data_t [D-1:0] in_tok;
  data_t [DH-1:0] out_vec;

  attention_head #(.T(T), .D(D), .DH(DH), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;

  function automatic data_t Wm(int r, int i);
    return wgen(32'(r * NCH + i / L), 32'(i % L));
  endfunction

  task automatic run_layer();
    data_t x [T][D];
    data_t q [T][DH], k [T][DH], v [T][DH];
    data_t xv [] = new[D];
    data_t wv [] = new[D];
    int cyc, maxc = 0;
    for (int t = 0; t < T; t++)
      for (int i = 0; i < D; i++) x[t][i] = data_t'(int'($urandom % 1024) - 512);
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < D; i++) xv[i] = x[t][i];
      for (int j = 0; j < 3 * DH; j++) begin
        data_t r;
        for (int i = 0; i < D; i++) wv[i] = Wm(j, i);
        r = dot_q(xv, wv);
        if (j < DH) q[t][j] = r; else if (j < 2 * DH) k[t][j - DH] = r; else v[t][j - 2 * DH] = r;
      end
    end
    // feed
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      in_valid = 1; in_tok = '0;
      for (int i = 0; i < D; i++) in_tok[i] = x[t][i];
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!in_ready);
      if (t > 1 && cyc > maxc) maxc = cyc;
    end
    @(negedge clk) in_valid = 0;
    checks++;
    if (maxc > 3 * DH * NCH + 4) begin failures++; $display("token interval %0d", maxc); end
    // collect
    for (int i = 0; i < T; i++) begin
      data_t s [] = new[T];
      data_t p [] = new[T];
      while (!out_valid) @(negedge clk);
      for (int t = 0; t < T; t++) begin
        data_t qa [] = new[DH];
        data_t ka [] = new[DH];
        for (int j = 0; j < DH; j++) begin qa[j] = q[i][j]; ka[j] = k[t][j]; end
        s[t] = sat16((64'(dot_q(qa, ka)) * 64'(inv_sqrt_q8(DH))) >>> 8);
      end
      ref_softmax(s, p);
      for (int j = 0; j < DH; j++) begin
        acc_t a = 0;
        data_t got;
        for (int t = 0; t < T; t++) a += acc_t'(p[t]) * acc_t'(v[t][j]);
        got = out_vec[j];
        checks++;
        if (got !== acc_to_data(a)) begin
          failures++;
          if (failures < 10) $display("query %0d ch %0d: got %0d expected %0d", i, j, got, acc_to_data(a));
        end
      end
      out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    $display("token interval %0d cycles", maxc);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3 * DH * NCH; w++) begin
      @(negedge clk) w_we = 1; w_waddr = 16'(w);
      for (int l = 0; l < L; l++) w_wdata[l] = wgen(32'(w), 32'(l));
    end
    @(negedge clk) w_we = 0;
    run_layer();
    run_layer();
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
