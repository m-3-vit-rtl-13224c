// tb_pingpong_buffer: the two-bank expert weight buffer. Fills bank 0, then
// fills bank 1 while reading bank 0 in the same cycles (the prefetch
// overlapping the compute), then swaps roles, and checks every word read and
// the one-cycle read latency.
module tb_pingpong_buffer;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 8, DEPTH = 64, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, wr_bank = 0, re = 0, rd_bank = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  data_t [L-1:0] wdata, rdata;

  pingpong_buffer #(.LANES(L), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;

  function automatic data_t [L-1:0] pat(int bank, int round, int a);
    data_t [L-1:0] v;
    for (int l = 0; l < L; l++) v[l] = wgen(32'(round * 1000 + bank * 100 + a), 32'(l));
    return v;
  endfunction

  // write bank wb with pattern of round wr while reading bank rb (round rr)
  task automatic phase(int wb, int wr, bit do_rd, int rr);
    for (int a = 0; a <= DEPTH; a++) begin
      @(negedge clk);
      if (do_rd && a > 0) begin
        checks++;
        if (rdata !== pat(1 - wb, rr, a - 1)) begin
          failures++;
          if (failures < 10) $display("read bank %0d addr %0d wrong", 1 - wb, a - 1);
        end
      end
      we = (a < DEPTH); wr_bank = wb[0]; waddr = AW'(a); wdata = pat(wb, wr, a);
      re = do_rd && (a < DEPTH); rd_bank = ~wb[0]; raddr = AW'(a);
    end
    @(negedge clk) we = 0; re = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    phase(0, 0, 0, 0);
    phase(1, 1, 1, 0);
    phase(0, 2, 1, 1);
    phase(1, 3, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
