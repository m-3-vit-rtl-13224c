// tb_softmax_unit: softmax_unit with room for 196 scores. Runs vectors of
// lengths 196, 16, 5 and 1 (random scores, a wide spread that underflows
// most exponents, and equal scores) and compares every probability, and the
// zeros beyond the length, with a reference. Checks the latency: three
// passes over the scores plus the 33-cycle reciprocal, 3*len + 40 at most.
module tb_softmax_unit;
  import m3vit_pkg::*;
  import tb_ref_pkg::*;
  localparam int M = 196, IW = $clog2(M + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, start = 0, busy, done;
  logic [IW-1:0] in_idx = 0, len = 0;
  data_t in_data = 0;
  data_t [M-1:0] prob;

  softmax_unit #(.MAXLEN(M)) dut (.*);

  int checks = 0, failures = 0;

  task automatic run(int n, int kind);
    data_t s [] = new[n];
    data_t p [] = new[n];
    int lat = 0;
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: s[i] = data_t'(int'($urandom % 1024) - 512);
        1: s[i] = data_t'(int'($urandom % 60000) - 30000);
        default: s[i] = 16'sd300;
      endcase
      @(negedge clk) in_valid = 1; in_idx = IW'(i); in_data = s[i];
    end
    @(negedge clk) in_valid = 0; start = 1; len = IW'(n);
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); lat++; end
    ref_softmax(s, p);
    for (int i = 0; i < M; i++) begin
      data_t got, exp;
      got = prob[i];
      exp = (i < n) ? p[i] : data_t'(0);
      checks++;
      if (got !== exp) begin
        failures++;
        if (failures < 10) $display("len %0d idx %0d: got %0d expected %0d", n, i, got, exp);
      end
    end
    checks++;
    if (lat > 3 * n + 40) begin failures++; $display("len %0d latency %0d", n, lat); end
    $display("len %0d kind %0d latency %0d", n, kind, lat);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(196, 0);
    run(196, 1);
    run(16, 0);
    run(5, 2);
    run(1, 0);
    run(16, 1);
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
