// tb_gating_unit: the MoE router. Loads N router rows, feeds random tokens
// and checks, for each token, that exactly K pushes come out, in order of
// decreasing logit (ties to the lower expert number), each with the right
// token index and the softmax probability of that expert computed by the
// reference model. Also loads a second set of rows (a task switch of the
// multi-gate router) and checks that the selection follows it. Checks that a
// token takes no more than N*D/LANES + 3N + 60 + K cycles.
module tb_gating_unit;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 64, N = 16, K = 4, T = 20, L = 8, NCH = D / L, EW = 4, TW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we = 0, in_valid = 0, in_ready, push;
  logic [15:0] w_waddr = 0;
  data_t [L-1:0] w_wdata;
  data_t [D-1:0] in_tok;
  logic [TW-1:0] in_idx = 0, push_tok;
  logic [EW-1:0] push_expert;
  data_t push_weight;

  gating_unit #(.D(D), .N(N), .K(K), .T(T), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic load(int set);
    for (int w = 0; w < N * NCH; w++) begin
      @(negedge clk) w_we = 1; w_waddr = 16'(w);
      for (int l = 0; l < L; l++) w_wdata[l] = wgen(32'(set * 4096 + w), 32'(l));
    end
    @(negedge clk) w_we = 0;
  endtask

  task automatic tokens(int set);
    for (int t = 0; t < T; t++) begin
      data_t x [] = new[D];
      data_t wv [] = new[D];
      data_t lg [] = new[N];
      data_t p [] = new[N];
      bit [N-1:0] taken = '0;
      int cyc = 0;
      for (int i = 0; i < D; i++) x[i] = data_t'(int'($urandom % 1024) - 512);
      for (int e = 0; e < N; e++) begin
        for (int i = 0; i < D; i++) wv[i] = wgen(32'(set * 4096 + e * NCH + i / L), 32'(i % L));
        lg[e] = dot_q(x, wv);
      end
      ref_softmax(lg, p);
      @(negedge clk);
      in_valid = 1; in_idx = TW'(t);
      for (int i = 0; i < D; i++) in_tok[i] = x[i];
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
      for (int k = 0; k < K; k++) begin
        int best = -1;
        data_t got_w;
        for (int e = 0; e < N; e++)
          if (!taken[e] && (best < 0 || lg[e] > lg[best])) best = e;
        taken[best] = 1'b1;
        while (!push) begin @(negedge clk); cyc++; end
        got_w = push_weight;
        check(int'(push_expert) == best, $sformatf("tok %0d k %0d expert %0d want %0d", t, k, push_expert, best));
        check(int'(push_tok) == t, "token index");
        check(got_w == p[best], $sformatf("tok %0d weight %0d want %0d", t, got_w, p[best]));
        @(negedge clk); cyc++;
      end
      check(!push, "extra push");
      check(cyc <= N * NCH + 3 * N + 60 + K, $sformatf("token took %0d cycles", cyc));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(0); tokens(0);
    load(1); tokens(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
