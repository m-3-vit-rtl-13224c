// tb_moe_layer: the MoE unit with computation reordering and expert double
// buffering, at a small size (8 tokens, width 32, 16 experts of hidden size
// 32, top-4, 8 lanes) against a memory model with 6 cycles of latency and
// random grant stalls. Runs two layers of random tokens and checks every
// output channel against a reference that, token by token, routes to the
// top-K experts and sums the gate-weighted expert MLP outputs in increasing
// expert order. Checks the counters: every expert that received a token is
// run exactly once, and every load except the first overlaps a computation
// (the prefetch of Fig. 4).
module tb_moe_layer;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 8, D = 32, HE = 32, N = 16, K = 4, L = 8, NCH = D / L;
  localparam int EXPW = HE * NCH + D * HE / L, EBASE = 5000, RBASE = 900000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic r_we = 0, rd_req, rd_gnt, rd_valid, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] r_waddr = 0, experts_run, overlapped_loads;
  logic [31:0] expert_base = EBASE, rd_addr, load_wait_cycles;
  data_t [L-1:0] r_wdata, rd_data;
  data_t [D-1:0] in_tok, out_tok;

  dram_model #(.LANES(L), .LAT(6), .STALL_ONE_IN(5)) mem (
    .clk, .rst_n, .req(rd_req), .addr(rd_addr), .gnt(rd_gnt), .rvalid(rd_valid), .rdata(rd_data));

  moe_layer #(.T(T), .D(D), .HE(HE), .N(N), .K(K), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic data_t W(int base, int rl, int r, int i);
    return wgen(32'(base + r * (rl / L) + i / L), 32'(i % L));
  endfunction

  function automatic data_t dotw(int base, int rl, int r, data_t v [], int n);
    acc_t a = 0;
    for (int i = 0; i < n; i++) a += acc_t'(v[i]) * acc_t'(W(base, rl, r, i));
    return acc_to_data(a);
  endfunction

  task automatic layer(int rset);
    data_t Y [T][D];
    bit used [N];
    int n_used = 0;
    for (int e = 0; e < N; e++) used[e] = 0;
    for (int w = 0; w < N * NCH; w++) begin
      @(negedge clk) r_we = 1; r_waddr = 16'(w);
      for (int l = 0; l < L; l++) r_wdata[l] = wgen(32'(RBASE + rset * 1000 + w), 32'(l));
    end
    @(negedge clk) r_we = 0;
    for (int t = 0; t < T; t++) begin
      data_t x [] = new[D];
      data_t h [] = new[HE];
      data_t lg [] = new[N];
      data_t p [] = new[N];
      bit sel [N];
      for (int i = 0; i < D; i++) x[i] = data_t'(int'($urandom % 1024) - 512);
      for (int e = 0; e < N; e++) lg[e] = dotw(RBASE + rset * 1000, D, e, x, D);
      ref_softmax(lg, p);
      for (int e = 0; e < N; e++) sel[e] = 0;
      for (int k = 0; k < K; k++) begin
        int b = -1;
        for (int e = 0; e < N; e++) if (!sel[e] && (b < 0 || lg[e] > lg[b])) b = e;
        sel[b] = 1;
      end
      for (int j = 0; j < D; j++) Y[t][j] = 0;
      for (int e = 0; e < N; e++) if (sel[e]) begin
        int b1 = EBASE + e * EXPW;
        if (!used[e]) begin used[e] = 1; n_used++; end
        for (int r = 0; r < HE; r++) h[r] = gelu_q(dotw(b1, D, r, x, D));
        for (int j = 0; j < D; j++) Y[t][j] = qadd(Y[t][j], qmul(p[e], dotw(b1 + HE * NCH, HE, j, h, HE)));
      end
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < D; i++) in_tok[i] = x[i];
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
    end
    for (int t = 0; t < T; t++) begin
      while (!out_valid) @(negedge clk);
      for (int j = 0; j < D; j++) begin
        data_t got;
        got = out_tok[j];
        check(got === Y[t][j], $sformatf("tok %0d ch %0d got %0d want %0d", t, j, got, Y[t][j]));
      end
      out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    check(int'(experts_run) == n_used, $sformatf("experts_run %0d want %0d", experts_run, n_used));
    check(int'(overlapped_loads) == n_used - 1,
          $sformatf("overlapped_loads %0d want %0d", overlapped_loads, n_used - 1));
    $display("experts %0d, prefetches %0d, load wait %0d cycles", experts_run, overlapped_loads,
             load_wait_cycles);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    layer(0);
    layer(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
