// pingpong_buffer: the double buffer for expert parameters (Fig. 4,
// "Double-buffering and pre-fetching"). Two banks of DEPTH words: while the
// expert unit reads one bank (rd_bank), the loader fills the other
// (wr_bank) with the next expert's weights; the MoE controller swaps the
// roles between experts. Both ports are synchronous, reads with one cycle of
// latency. Writing and reading the same bank in one cycle is a controller
// error and is flagged by an assertion.
module pingpong_buffer
  import m3vit_pkg::*;
#(
  parameter int LANES = 32,
  parameter int DEPTH = 9216,
  parameter int AW    = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic               wr_bank,
  input  logic [AW-1:0]      waddr,
  input  data_t [LANES-1:0]  wdata,
  input  logic               re,
  input  logic               rd_bank,
  input  logic [AW-1:0]      raddr,
  output data_t [LANES-1:0]  rdata
);
  data_t [LANES-1:0] rdata0, rdata1;
  logic rd_bank_q;

  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(DEPTH), .AW(AW)) u_bank0 (
    .clk, .we(we && !wr_bank), .waddr(waddr), .wdata(wdata), .re(re && !rd_bank), .raddr(raddr), .rdata(rdata0));
  buffer_ram #(.WIDTH(LANES * DATA_W), .DEPTH(DEPTH), .AW(AW)) u_bank1 (
    .clk, .we(we && wr_bank), .waddr(waddr), .wdata(wdata), .re(re && rd_bank), .raddr(raddr), .rdata(rdata1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_bank_q <= 1'b0;
    else if (re) rd_bank_q <= rd_bank;
  end
  assign rdata = rd_bank_q ? rdata1 : rdata0;

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
                                  (we && re) |-> (wr_bank != rd_bank));
endmodule
