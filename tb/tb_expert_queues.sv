// tb_expert_queues: the per-expert token queues. Pushes random
// (expert, token, weight) triples as the gate would (one per cycle), keeps a
// software copy of every queue, then reads every entry back through the
// combinational read port and checks the counts, order and contents. Then
// clears the queues and repeats, checking that a clear empties them in one
// cycle.
module tb_expert_queues;
  import m3vit_pkg::*;
  localparam int N = 16, T = 196, EW = 4, TW = 8, K = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0;
  logic [EW-1:0] push_expert = 0, rd_expert = 0;
  logic [TW-1:0] push_tok = 0, rd_idx = 0, rd_tok;
  data_t push_weight = 0, rd_weight;
  logic [N-1:0][TW-1:0] count;

  expert_queues #(.N(N), .T(T)) dut (.*);

  int checks = 0, failures = 0;
  int qt [N][$];
  data_t qw [N][$];

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic round(int ntok);
    for (int e = 0; e < N; e++) begin qt[e].delete(); qw[e].delete(); end
    for (int t = 0; t < ntok; t++) begin
      bit [N-1:0] used = '0;
      for (int k = 0; k < K; k++) begin
        int e;
        do e = int'($urandom % N); while (used[e]);
        used[e] = 1'b1;
        @(negedge clk);
        push = 1; push_expert = EW'(e); push_tok = TW'(t);
        push_weight = data_t'($urandom % 256);
        qt[e].push_back(t); qw[e].push_back(push_weight);
      end
    end
    @(negedge clk) push = 0;
    for (int e = 0; e < N; e++) begin
      check(int'(count[e]) == qt[e].size(), $sformatf("count %0d", e));
      for (int i = 0; i < qt[e].size(); i++) begin
        rd_expert = EW'(e); rd_idx = TW'(i);
        #1;
        check(int'(rd_tok) == qt[e][i] && rd_weight == qw[e][i], $sformatf("entry %0d/%0d", e, i));
      end
    end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int e = 0; e < N; e++) check(count[e] == 0, "clear");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    round(T);
    round(37);
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
