// tb_patch_embed: the patch embedding. Loads the projection rows and the
// position embeddings (generated from their addresses), streams two frames
// of T patches and checks every token channel against
// qadd(x . W_j, pos_tj), plus the token index and its wrap-around between
// frames. Checks the per-patch cycle count D*PD/LANES + D/LANES + 8 or less.
module tb_patch_embed;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  localparam int T = 6, D = 32, PD = 48, L = 8, NCH = D / L, PCH = PD / L, TW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] w_waddr = 0;
  data_t [L-1:0] w_wdata;
  data_t [PD-1:0] in_patch;
  data_t [D-1:0] out_tok;
  logic [TW-1:0] out_idx;

  patch_embed #(.T(T), .D(D), .PD(PD), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < D * PCH + T * NCH; w++) begin
      @(negedge clk) w_we = 1; w_waddr = 32'(w);
      for (int l = 0; l < L; l++) w_wdata[l] = wgen(32'(w), 32'(l));
    end
    @(negedge clk) w_we = 0;
    for (int f = 0; f < 2; f++)
      for (int t = 0; t < T; t++) begin
        data_t pv [] = new[PD];
        data_t wv [] = new[PD];
        int cyc;
        cyc = 0;
        for (int i = 0; i < PD; i++) pv[i] = data_t'(int'($urandom % 512) - 256);
        @(negedge clk);
        in_valid = 1;
        for (int i = 0; i < PD; i++) in_patch[i] = pv[i];
        do @(posedge clk); while (!in_ready);
        @(negedge clk) in_valid = 0;
        while (!out_valid) begin @(negedge clk); cyc++; end
        checks++;
        if (int'(out_idx) != t) begin failures++; $display("index %0d want %0d", out_idx, t); end
        checks++;
        if (cyc > D * PCH + NCH + 8) begin failures++; $display("patch took %0d cycles", cyc); end
        for (int j = 0; j < D; j++) begin
          data_t got, exp;
          for (int i = 0; i < PD; i++) wv[i] = wgen(32'(j * PCH + i / L), 32'(i % L));
          exp = qadd(dot_q(pv, wv), wgen(32'(D * PCH + t * NCH + j / L), 32'(j % L)));
          got = out_tok[j];
          checks++;
          if (got !== exp) begin
            failures++;
            if (failures < 10) $display("tok %0d ch %0d got %0d want %0d", t, j, got, exp);
          end
        end
        out_ready = 1;
        @(negedge clk) out_ready = 0;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
