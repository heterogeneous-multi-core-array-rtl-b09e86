// global_buffer: a core's on-chip buffer, split by data type.
//
// The global buffer sits between DRAM and the PE array and has a separate
// part for each data type: input feature maps (GB_ifmap), weights and
// partial sums (GB_psum). The ifmap and psum sizes are the parameters the
// design-space study sweeps (13, 27, 54, 108, 216 KB); the weight part is
// only said to be large enough for the weights of the pass in progress.
//
// Each partition is one single-port synchronous memory (en, we, addr,
// wdata; rdata valid the cycle after a read). Sizes are in words:
// ifmap and weight words are 16 bits, psum words 32 bits, so a partition
// of B kilobytes holds B*512 or B*256 words (1 KB = 1024 bytes).
// The memories are plain arrays; a silicon build would map them to SRAM
// macros. Contents are not reset.
module global_buffer
  import hmc_pkg::*;
#(
  parameter int unsigned IF_WORDS = 27648,   // 54 KB of 16-bit words
  parameter int unsigned W_WORDS  = 2048,    // 4 KB of 16-bit words (size assumed)
  parameter int unsigned PS_WORDS = 13824    // 54 KB of 32-bit words
) (
  input  logic                  clk,
  // ifmap partition
  input  logic                  if_en,
  input  logic                  if_we,
  input  logic [GBAW-1:0]       if_addr,
  input  data_t                 if_wdata,
  output data_t                 if_rdata,
  // weight partition
  input  logic                  w_en,
  input  logic                  w_we,
  input  logic [GBAW-1:0]       w_addr,
  input  data_t                 w_wdata,
  output data_t                 w_rdata,
  // psum partition
  input  logic                  ps_en,
  input  logic                  ps_we,
  input  logic [GBAW-1:0]       ps_addr,
  input  psum_t                 ps_wdata,
  output psum_t                 ps_rdata
);
  localparam int unsigned IFA = $clog2(IF_WORDS);
  localparam int unsigned WA  = $clog2(W_WORDS);
  localparam int unsigned PSA = $clog2(PS_WORDS);

  data_t if_mem [IF_WORDS];
  data_t w_mem  [W_WORDS];
  psum_t ps_mem [PS_WORDS];

  always_ff @(posedge clk) begin
    if (if_en) begin
      if (if_we) if_mem[IFA'(if_addr)] <= if_wdata;
      else       if_rdata <= if_mem[IFA'(if_addr)];
    end
  end

  always_ff @(posedge clk) begin
    if (w_en) begin
      if (w_we) w_mem[WA'(w_addr)] <= w_wdata;
      else      w_rdata <= w_mem[WA'(w_addr)];
    end
  end

  always_ff @(posedge clk) begin
    if (ps_en) begin
      if (ps_we) ps_mem[PSA'(ps_addr)] <= ps_wdata;
      else       ps_rdata <= ps_mem[PSA'(ps_addr)];
    end
  end

  // addresses must fall inside the partition
  a_if: assert property (@(posedge clk) if_en |-> 32'(if_addr) < IF_WORDS);
  a_w:  assert property (@(posedge clk) w_en  |-> 32'(w_addr) < W_WORDS);
  a_ps: assert property (@(posedge clk) ps_en |-> 32'(ps_addr) < PS_WORDS);
endmodule
