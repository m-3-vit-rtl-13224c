// buffer_ram: on-chip buffer (a block RAM on the FPGA) with one write port
// and one read port, both synchronous. Reading has one cycle of latency:
// rdata holds mem[raddr] from the cycle after re is high. Contents are not
// reset; every buffer is written before it is read. Word width and depth are
// parameters, chosen by the unit that owns the buffer.
module buffer_ram #(
  parameter int WIDTH = 256,
  parameter int DEPTH = 1024,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
