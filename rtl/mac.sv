// mac: multiply-accumulate unit of a processing element.
//
// The MAC is the one arithmetic operation of a PE. Each cycle with en=1 it
// computes acc_out = (clr ? 0 : acc) + a * b, registered, so the result is
// visible one cycle after the operands. clr starts a new output value
// without a separate clear cycle. Operands are signed 16-bit, the
// accumulator signed 32-bit (widths are this design's choice).
// Reset clears the accumulator.
module mac
  import hmc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  data_t a,
  input  data_t b,
  output psum_t acc,
  output psum_t acc_next
);
  psum_t prod;

  always_comb begin
    prod     = psum_t'(a) * psum_t'(b);
    acc_next = (clr ? psum_t'(0) : acc) + prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= acc_next;
  end
endmodule
