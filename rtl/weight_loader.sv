// weight_loader: the "Load Weights" / "Load Expert" / "Load Parameters" step
// of Fig. 1 and Fig. 3. It copies len consecutive words of LANES values from
// off-chip memory, starting at word src, into an on-chip buffer starting at
// word dst.
//
// Off-chip read port: the loader raises rd_req with rd_addr for one word per
// cycle while rd_gnt is high (a request is taken in a cycle with
// rd_req && rd_gnt); the memory returns the words in request order on
// rd_valid/rd_data after any latency. Each returned word is written to the
// buffer on buf_we/buf_waddr/buf_wdata in the same cycle. done pulses once
// the last word has been written. The word width of the memory beat is this
// design's choice; the paper does not describe the memory interface.
module weight_loader
  import m3vit_pkg::*;
#(
  parameter int LANES = 32,
  parameter int BAW   = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        src,
  input  logic [BAW-1:0]     dst,
  input  logic [31:0]        len,
  output logic               busy,
  output logic               done,
  // off-chip memory
  output logic               rd_req,
  output logic [31:0]        rd_addr,
  input  logic               rd_gnt,
  input  logic               rd_valid,
  input  data_t [LANES-1:0]  rd_data,
  // on-chip buffer
  output logic               buf_we,
  output logic [BAW-1:0]     buf_waddr,
  output data_t [LANES-1:0]  buf_wdata
);
  logic [31:0] issued_q, recv_q, len_q;
  logic [BAW-1:0] wptr_q;

  assign rd_req    = busy && (issued_q != len_q);
  assign buf_we    = busy && rd_valid;
  assign buf_waddr = wptr_q;
  assign buf_wdata = rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; issued_q <= '0; recv_q <= '0; len_q <= '0;
      rd_addr <= '0; wptr_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (len != 0); done <= (len == 0);
        issued_q <= '0; recv_q <= '0; len_q <= len; rd_addr <= src; wptr_q <= dst;
      end else if (busy) begin
        if (rd_req && rd_gnt) begin
          issued_q <= issued_q + 1'b1;
          rd_addr  <= rd_addr + 1'b1;
        end
        if (rd_valid) begin
          recv_q <= recv_q + 1'b1;
          wptr_q <= wptr_q + 1'b1;
          if (recv_q + 1'b1 == len_q) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end

  // a word can only come back for a request that was taken
  a_no_extra: assert property (@(posedge clk) disable iff (!rst_n)
                               rd_valid |-> (busy && recv_q < issued_q));
endmodule
