// tb_m3vit_top: end-to-end test of the backbone accelerator at reduced
// sizes (6 tokens, width 96, 12 heads of 8 channels, 16 experts with top-4,
// 4 layers: ViT, MoE, ViT, MoE, 2 tasks, 8 lanes).
//
// Two frames are run, the first for task 0 and the second for task 1 (a task
// switch between frames). For each frame the testbench computes the whole
// network itself from the same off-chip memory image - patch embedding,
// layer norms, 12-head attention, projection, MLP, router softmax and top-K,
// the expert computations and the per-token combination, residuals - and
// compares every output value. It also checks that each mechanism happened:
// ViT and MoE layers, expert computations, expert prefetches overlapping
// computation, off-chip stalls, the task switch, and the frame count.
module tb_m3vit_top;
  import m3vit_pkg::*;
  import tb_util_pkg::*;

  localparam int T = 6, D = 96, NH = 12, H = 384, N = 16, K = 4, NT = 2, NL = 4, PD = 48, L = 8;
  localparam int DH = D / NH, NCH = D / L, HE = H / 4, TW = $clog2(T + 1);
  localparam int PE_WORDS = D * (PD / L) + T * NCH;
  localparam int LN_WORDS = 4 * NCH;
  localparam int ATT_WORDS = NH * 3 * DH * NCH + D * NCH;
  localparam int FC_WORDS = H * NCH + D * (H / L);
  localparam int ROUTER = N * NCH;
  localparam int EXPW = HE * NCH + D * (HE / L);
  localparam int MOE_WORDS = NT * ROUTER + N * EXPW;
  localparam int LSTRIDE = LN_WORDS + ATT_WORDS + ((FC_WORDS > MOE_WORDS) ? FC_WORDS : MOE_WORDS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [7:0] task_id = 0;
  logic patch_valid, patch_ready;
  data_t [PD-1:0] patch_data;
  logic mem_req, mem_gnt, mem_valid;
  logic [31:0] mem_addr;
  data_t [L-1:0] mem_data;
  logic out_valid, out_ready;
  data_t [D-1:0] out_tok;
  logic [TW-1:0] out_idx;
  logic [15:0] s_vit, s_moe, s_frames, s_tsw;
  logic [31:0] s_exp, s_pref, s_wait;

  m3vit_top #(.T(T), .D(D), .NH(NH), .MLP_H(H), .N(N), .K(K), .N_TASKS(NT), .N_LAYERS(NL),
              .PD(PD), .LANES(L)) dut (
    .clk, .rst_n, .start, .task_id, .busy, .done,
    .patch_valid, .patch_ready, .patch_data,
    .mem_req, .mem_addr, .mem_gnt, .mem_valid, .mem_data,
    .out_valid, .out_ready, .out_tok, .out_idx,
    .stat_vit_layers(s_vit), .stat_moe_layers(s_moe), .stat_experts_run(s_exp),
    .stat_prefetches(s_pref), .stat_load_wait(s_wait), .stat_frames(s_frames),
    .stat_task_switches(s_tsw));

  dram_model #(.LANES(L), .LAT(6), .STALL_ONE_IN(7)) mem (
    .clk, .rst_n, .req(mem_req), .addr(mem_addr), .gnt(mem_gnt), .rvalid(mem_valid), .rdata(mem_data));

  int checks = 0, failures = 0, stalls = 0;
  always @(posedge clk) if (mem_req && !mem_gnt) stalls++;

  // ------------------------------------------------------------ reference
  data_t X [T][D];

  function automatic data_t W(int base, int rl, int r, int i);
    return wgen(32'(base + r * (rl / L) + i / L), 32'(i % L));
  endfunction

  function automatic acc_t dotw(int base, int rl, int r, data_t v [], int n);
    acc_t a = 0;
    for (int i = 0; i < n; i++) a += acc_t'(v[i]) * acc_t'(W(base, rl, r, i));
    return a;
  endfunction

  function automatic void ref_softmax(data_t s [], int n, ref logic [16:0] e [], ref data_t p []);
    data_t m = s[0];
    longint sum = 0, r;
    for (int i = 1; i < n; i++) if (s[i] > m) m = s[i];
    for (int i = 0; i < n; i++) begin e[i] = exp_q16(sat16(64'(s[i]) - 64'(m))); sum += e[i]; end
    r = (longint'(1) << 32) / sum;
    for (int i = 0; i < n; i++) p[i] = data_t'((longint'(e[i]) * r) >> 24);
  endfunction

  function automatic void ref_ln(int pbase, ref data_t y [T][D]);
    longint recip = (longint'(1) << 24) / D;
    for (int t = 0; t < T; t++) begin
      longint s = 0, sq = 0, v, sd, inv;
      data_t mean;
      for (int i = 0; i < D; i++) s += X[t][i];
      mean = sat16((s * recip) >>> 24);
      for (int i = 0; i < D; i++) sq += (longint'(X[t][i]) - mean) * (longint'(X[t][i]) - mean);
      v = ((sq * recip) >>> 24) + 1;
      if (v > 64'hffff_ffff) v = 64'hffff_ffff;
      sd = 0;
      while ((sd + 1) * (sd + 1) <= v) sd++;
      inv = 65536 / sd;
      for (int i = 0; i < D; i++) begin
        data_t z;
        z = sat16(((longint'(X[t][i]) - mean) * inv) >>> 8);
        y[t][i] = qadd(qmul(z, wgen(32'(pbase + i / L), 32'(i % L))),
                       wgen(32'(pbase + NCH + i / L), 32'(i % L)));
      end
    end
  endfunction

  // y = W2 gelu(W1 x) with W1 at b1 (hid rows of D), W2 right after
  function automatic void ref_mlp(int b1, int hid, data_t x [], ref data_t o []);
    data_t h [] = new[hid];
    for (int r = 0; r < hid; r++) h[r] = gelu_q(acc_to_data(dotw(b1, D, r, x, D)));
    for (int j = 0; j < D; j++) o[j] = acc_to_data(dotw(b1 + hid * NCH, hid, j, h, hid));
  endfunction

  int n_topk_ties = 0;

  task automatic ref_frame(int tsk);
    data_t Y [T][D];
    data_t xv [] = new[D];
    data_t ov [] = new[D];
    data_t pv [] = new[PD];
    // patch embedding
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < PD; i++) pv[i] = pgen(32'(t), 32'(i));
      for (int j = 0; j < D; j++)
        X[t][j] = qadd(acc_to_data(dotw(0, PD, j, pv, PD)),
                       wgen(32'(D * (PD / L) + t * NCH + j / L), 32'(j % L)));
    end
    for (int l = 0; l < NL; l++) begin
      int lb = PE_WORDS + l * LSTRIDE;
      int ab = lb + LN_WORDS;
      int fb = lb + LN_WORDS + ATT_WORDS;
      data_t q [T][DH], k [T][DH], v [T][DH];
      data_t cat [T][D];
      ref_ln(lb, Y);
      for (int h = 0; h < NH; h++) begin
        int hb = ab + h * 3 * DH * NCH;
        for (int t = 0; t < T; t++) begin
          for (int i = 0; i < D; i++) xv[i] = Y[t][i];
          for (int j = 0; j < DH; j++) begin
            q[t][j] = acc_to_data(dotw(hb, D, j, xv, D));
            k[t][j] = acc_to_data(dotw(hb, D, DH + j, xv, D));
            v[t][j] = acc_to_data(dotw(hb, D, 2 * DH + j, xv, D));
          end
        end
        for (int i = 0; i < T; i++) begin
          data_t s [] = new[T];
          data_t p [] = new[T];
          logic [16:0] e [] = new[T];
          for (int t = 0; t < T; t++) begin
            acc_t a = 0;
            for (int j = 0; j < DH; j++) a += acc_t'(q[i][j]) * acc_t'(k[t][j]);
            s[t] = sat16((64'(acc_to_data(a)) * 64'(inv_sqrt_q8(DH))) >>> 8);
          end
          ref_softmax(s, T, e, p);
          for (int j = 0; j < DH; j++) begin
            acc_t a = 0;
            for (int t = 0; t < T; t++) a += acc_t'(p[t]) * acc_t'(v[t][j]);
            cat[i][h * DH + j] = acc_to_data(a);
          end
        end
      end
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < D; i++) xv[i] = cat[t][i];
        for (int j = 0; j < D; j++)
          X[t][j] = qadd(X[t][j], acc_to_data(dotw(ab + NH * 3 * DH * NCH, D, j, xv, D)));
      end
      ref_ln(lb + 2 * NCH, Y);
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < D; i++) xv[i] = Y[t][i];
        if (l % 2 == 0) begin
          ref_mlp(fb, H, xv, ov);
          for (int j = 0; j < D; j++) X[t][j] = qadd(X[t][j], ov[j]);
        end else begin
          data_t lg [] = new[N];
          data_t p [] = new[N];
          logic [16:0] e [] = new[N];
          bit sel [N];
          data_t acc [D];
          for (int x = 0; x < N; x++) lg[x] = acc_to_data(dotw(fb + tsk * ROUTER, D, x, xv, D));
          ref_softmax(lg, N, e, p);
          for (int x = 0; x < N; x++) sel[x] = 0;
          for (int kk = 0; kk < K; kk++) begin
            int b = -1;
            for (int x = 0; x < N; x++) if (!sel[x] && (b < 0 || lg[x] > lg[b])) b = x;
            sel[b] = 1;
          end
          for (int j = 0; j < D; j++) acc[j] = 0;
          for (int x = 0; x < N; x++) if (sel[x]) begin
            ref_mlp(fb + NT * ROUTER + x * EXPW, HE, xv, ov);
            for (int j = 0; j < D; j++) acc[j] = qadd(acc[j], qmul(p[x], ov[j]));
          end
          for (int j = 0; j < D; j++) X[t][j] = qadd(X[t][j], acc[j]);
        end
      end
    end
  endtask

  // ------------------------------------------------------------ stimulus
  int pidx;
  assign patch_valid = busy && pidx < T;
  always_comb for (int i = 0; i < PD; i++) patch_data[i] = pgen(32'(pidx), 32'(i));
  always @(posedge clk) if (patch_valid && patch_ready) pidx <= pidx + 1;
  assign out_ready = 1'b1;

  int nz;
  always @(posedge clk) begin
    if (out_valid) begin
      for (int j = 0; j < D; j++) begin
        data_t got, exp;
        got = out_tok[j];
        exp = X[out_idx][j];
        checks++;
        if (got != 0) nz++;
        if (got !== exp) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH token %0d ch %0d: got %0d expected %0d", out_idx, j, got, exp);
        end
      end
    end
  end

  task automatic run_frame(int tsk);
    int cyc = 0;
    ref_frame(tsk);
    pidx = 0;
    task_id = 8'(tsk);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); cyc++; end
    $display("frame task %0d: %0d cycles", tsk, cyc);
  endtask

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    nz = 0;
    pidx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(1);
    $display("vit=%0d moe=%0d experts=%0d prefetch=%0d loadwait=%0d frames=%0d taskswitch=%0d stalls=%0d",
             s_vit, s_moe, s_exp, s_pref, s_wait, s_frames, s_tsw, stalls);
    expect_true(s_vit == 16'(NL), "ViT layers ran");
    expect_true(s_moe == 16'(NL), "MoE layers ran");
    expect_true(s_exp > 0, "experts computed");
    expect_true(s_pref > 0, "expert prefetch overlapped computation");
    expect_true(s_frames == 2, "two frames");
    expect_true(s_tsw == 1, "one task switch");
    expect_true(stalls > 0, "off-chip stalls happened");
    expect_true(nz > T * D, "outputs are not all zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
