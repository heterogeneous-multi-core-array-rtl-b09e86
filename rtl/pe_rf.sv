// pe_rf: PE-local scratch-pad register file.
//
// Each PE keeps the data it is working on in small local register files,
// one per data type (weights, ifmap, psums), as drawn in the RF inset of
// the array figure. This module is one such file: DEPTH words of WIDTH
// bits, one synchronous write port and one combinational read port, so
// the MAC can read an operand in the same cycle it uses it. The depths are
// not published; hmc_pkg sets them (KMAX, IRF, PRF).
// Nothing is reset: the controller always writes a word before reading it.
module pe_rf #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW_  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW_-1:0]   waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW_-1:0]   raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
