// dram_model: behavioural model of the off-chip memory (a DRAM behind its
// controller) for the testbenches. Word a, lane l holds wgen(a, l) from
// tb_util_pkg. A request is taken when req && gnt; gnt drops at random in
// about one cycle out of STALL_ONE_IN (0: never). The word returns LAT cycles
// after its request was taken, in order.
module dram_model
  import m3vit_pkg::*;
  import tb_util_pkg::*;
#(
  parameter int LANES        = 32,
  parameter int LAT          = 8,
  parameter int STALL_ONE_IN = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req,
  input  logic [31:0]        addr,
  output logic               gnt,
  output logic               rvalid,
  output data_t [LANES-1:0]  rdata
);
  logic [LAT-1:0]  v_pipe;
  logic [31:0]     a_pipe [LAT];
  logic            stall_q;

  assign gnt = !stall_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe <= '0; stall_q <= 1'b0;
      for (int i = 0; i < LAT; i++) a_pipe[i] <= '0;
    end else begin
      stall_q <= (STALL_ONE_IN > 0) ? (($urandom % STALL_ONE_IN) == 0) : 1'b0;
      v_pipe[0] <= req && gnt;
      a_pipe[0] <= addr;
      for (int i = 1; i < LAT; i++) begin
        v_pipe[i] <= v_pipe[i-1];
        a_pipe[i] <= a_pipe[i-1];
      end
    end
  end

  assign rvalid = v_pipe[LAT-1];
  always_comb begin
    for (int l = 0; l < LANES; l++) rdata[l] = wgen(a_pipe[LAT-1], l);
  end
endmodule
