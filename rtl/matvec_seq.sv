// matvec_seq: sequential matrix-vector engine shared by every linear layer of
// the accelerator (QKV, Q x K^T, P x V, projection, MLP, router, patch
// embedding).
//
// For each row r in 0..n_rows-1 it computes the exact dot product of the
// input vector x with row r of a matrix held in an external buffer, LANES
// products per cycle. Row r occupies the in_chunks consecutive buffer words
// starting at base + r*in_chunks, each word holding LANES elements. The
// buffer is read through a synchronous port with one cycle of latency
// (w_re/w_raddr, then w_rdata), so the engine issues one read per cycle and a
// row takes in_chunks cycles. Each finished row appears for one cycle on
// res_valid/res_row/res_acc (accumulator with 2*FRAC fraction bits); done
// pulses with the last row. x must stay constant while busy. The lane count
// is this design's choice; the paper gives no parallelism figures.
module matvec_seq
  import m3vit_pkg::*;
#(
  parameter int IN_MAX = 384,   // longest input vector (multiple of LANES)
  parameter int LANES  = 32,
  parameter int AW     = 16,
  parameter int RW     = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [RW-1:0]           n_rows,
  input  logic [RW-1:0]           in_chunks,
  input  logic [AW-1:0]           base,
  input  data_t [IN_MAX-1:0]      x,
  output logic                    w_re,
  output logic [AW-1:0]           w_raddr,
  input  data_t [LANES-1:0]       w_rdata,
  output logic                    res_valid,
  output logic [RW-1:0]           res_row,
  output acc_t                    res_acc,
  output logic                    busy,
  output logic                    done
);
  localparam int NCH = IN_MAX / LANES;

  logic          run_q;
  logic [RW-1:0] row_q, chunk_q;
  logic [AW-1:0] addr_q;

  logic          v1_q, last1_q, fin1_q;
  logic [RW-1:0] row1_q, chunk1_q;
  acc_t          acc_q;

  wire row_end = (chunk_q == in_chunks - 1'b1);
  wire all_end = row_end && (row_q == n_rows - 1'b1);

  assign w_re    = run_q;
  assign w_raddr = addr_q;
  assign busy    = run_q | v1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; row_q <= '0; chunk_q <= '0; addr_q <= '0;
      v1_q <= 1'b0; last1_q <= 1'b0; fin1_q <= 1'b0; row1_q <= '0; chunk1_q <= '0;
    end else begin
      v1_q     <= run_q;
      last1_q  <= run_q && row_end;
      fin1_q   <= run_q && all_end;
      row1_q   <= row_q;
      chunk1_q <= chunk_q;
      if (start && !run_q) begin
        run_q <= 1'b1; row_q <= '0; chunk_q <= '0; addr_q <= base;
      end else if (run_q) begin
        addr_q <= addr_q + 1'b1;
        if (row_end) begin
          chunk_q <= '0;
          row_q   <= row_q + 1'b1;
          if (all_end) run_q <= 1'b0;
        end else begin
          chunk_q <= chunk_q + 1'b1;
        end
      end
    end
  end

  // One chunk of LANES products, summed exactly.
  acc_t dot;
  always_comb begin
    dot = '0;
    for (int l = 0; l < LANES; l++)
      dot += acc_t'(x[(int'(chunk1_q) % NCH) * LANES + l]) * acc_t'(w_rdata[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0; res_valid <= 1'b0; res_row <= '0; res_acc <= '0; done <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      done      <= 1'b0;
      if (v1_q) begin
        acc_q <= (chunk1_q == 0) ? dot : acc_q + dot;
        if (last1_q) begin
          res_valid <= 1'b1;
          res_row   <= row1_q;
          res_acc   <= (chunk1_q == 0) ? dot : acc_q + dot;
          done      <= fin1_q;
        end
      end
    end
  end
endmodule
