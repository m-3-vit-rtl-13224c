// tb_weight_loader: the DMA that copies weight words from off-chip memory
// into an on-chip buffer. Runs transfers of several lengths against a
// memory model with 6 cycles of latency, first without and then with random
// grant stalls, records the buffer writes and checks every destination
// address and word. Without stalls a transfer of len words must finish in
// len + latency + 3 cycles or less (one word per cycle, as the "Load
// Weights" path has to stream at memory rate).
module tb_weight_loader;
  import m3vit_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 8, LAT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, rd_req, rd_gnt, rd_valid, buf_we;
  logic [31:0] src = 0, dst = 0, len = 0, rd_addr, buf_waddr;
  data_t [L-1:0] rd_data, buf_wdata;
  logic stall_en = 0;
  logic gnt0, gnt1, rv0, rv1;
  data_t [L-1:0] rd0, rd1;

  // two memory models, one never stalling and one refusing a third of the
  // requests; stall_en selects which one serves the loader
  dram_model #(.LANES(L), .LAT(LAT), .STALL_ONE_IN(0)) mem0 (
    .clk, .rst_n, .req(rd_req && !stall_en), .addr(rd_addr), .gnt(gnt0), .rvalid(rv0), .rdata(rd0));
  dram_model #(.LANES(L), .LAT(LAT), .STALL_ONE_IN(3)) mem1 (
    .clk, .rst_n, .req(rd_req && stall_en), .addr(rd_addr), .gnt(gnt1), .rvalid(rv1), .rdata(rd1));
  assign rd_gnt   = stall_en ? gnt1 : gnt0;
  assign rd_valid = stall_en ? rv1 : rv0;
  assign rd_data  = stall_en ? rd1 : rd0;

  weight_loader #(.LANES(L), .BAW(32)) dut (.*);

  int checks = 0, failures = 0;
  int seen [int];
  always @(posedge clk) if (buf_we) begin
    seen[int'(buf_waddr)] = 1;
    for (int l = 0; l < L; l++)
      if (buf_wdata[l] !== wgen(32'(int'(src) + int'(buf_waddr) - int'(dst)), 32'(l))) begin
        failures++;
        if (failures < 10) $display("word at %0d lane %0d wrong", buf_waddr, l);
      end
  end

  task automatic xfer(int s, int d, int n, bit stalls);
    int cyc = 0;
    seen.delete();
    stall_en = stalls;
    @(negedge clk);
    src = 32'(s); dst = 32'(d); len = 32'(n); start = 1;
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (seen.size() != n) begin failures++; $display("wrote %0d of %0d words", seen.size(), n); end
    for (int a = d; a < d + n; a++) begin
      checks++;
      if (!seen.exists(a)) failures++;
    end
    if (!stalls) begin
      checks++;
      if (cyc > n + LAT + 3) begin failures++; $display("len %0d took %0d cycles", n, cyc); end
    end
    $display("len %0d stalls %0d: %0d cycles", n, stalls, cyc);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    xfer(100, 0, 1, 0);
    xfer(5000, 17, 300, 0);
    xfer(77, 3, 1000, 1);
    xfer(9, 500, 64, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
