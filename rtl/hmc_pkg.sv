// Shared types and constants of the heterogeneous multi-core accelerator.
//
// Word formats: ifmap and weight elements are 16-bit signed fixed point,
// partial sums are 32-bit signed. The DRAM side moves one 32-bit word per
// transfer; a 16-bit element occupies the low half of a DRAM word. None of
// these widths is given by the published description; they are this
// design's choice (typical of row-stationary accelerators).
//
// A core is driven by commands (core_cmd_t). One command either moves a
// block between DRAM and one global-buffer partition, or runs one
// row-stationary processing pass described by pass_t.
package hmc_pkg;

  localparam int unsigned DW      = 16;  // ifmap / weight element width
  localparam int unsigned PW      = 32;  // partial-sum width
  localparam int unsigned AW      = 32;  // DRAM word address width
  localparam int unsigned XW      = 32;  // DRAM data width
  localparam int unsigned KMAX    = 12;  // filter-row length held in a PE (weight RF entries)
  localparam int unsigned IRF     = 16;  // ifmap-strip length held in a PE (ifmap RF entries)
  localparam int unsigned PRF     = 16;  // outputs held in a PE (psum RF entries)
  localparam int unsigned GBAW    = 20;  // global-buffer address field width in commands
  localparam int unsigned TAGW    = 8;   // NoC tag field width

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [PW-1:0] psum_t;

  // Kind of payload on the global-buffer-to-array bus.
  typedef enum logic [1:0] {
    BUS_NONE   = 2'd0,
    BUS_WEIGHT = 2'd1,
    BUS_IFMAP  = 2'd2
  } bus_kind_e;

  // One element on the global-buffer-to-array bus. A weight carries the
  // physical array row it is meant for in tag_a; an ifmap element carries
  // its row group (band * channels + channel) in tag_a and its row number
  // inside the group in tag_b. elem is the element position inside the row.
  typedef struct packed {
    bus_kind_e         kind;
    logic [TAGW-1:0]   tag_a;
    logic [TAGW-1:0]   tag_b;
    logic [4:0]        elem;
    data_t             data;
  } bus_word_t;

  // One row-stationary processing pass.
  //   kh    filter rows per channel (array rows per channel)
  //   kw    filter-row length, <= KMAX
  //   s     convolution stride (horizontal and vertical)
  //   win   ifmap strip length per row, <= IRF
  //   eout  outputs per row = (win - kw) / s + 1, <= PRF
  //   nch   channels stacked in one band (their psums add inside the array)
  //   nband independent bands (sub-arrays), each a separate convolution
  //   ncol  array columns used = output rows produced per band
  //   w_base/i_base/p_base  partition base addresses
  //   acc   add the result to what the psum partition already holds
  typedef struct packed {
    logic [3:0]        kh;
    logic [3:0]        kw;
    logic [2:0]        s;
    logic [4:0]        win;
    logic [4:0]        eout;
    logic [5:0]        nch;
    logic [5:0]        nband;
    logic [6:0]        ncol;
    logic [GBAW-1:0]   w_base;
    logic [GBAW-1:0]   i_base;
    logic [GBAW-1:0]   p_base;
    logic              acc;
  } pass_t;

  typedef enum logic [2:0] {
    OP_LD_IFMAP  = 3'd0,   // DRAM -> ifmap partition
    OP_LD_WEIGHT = 3'd1,   // DRAM -> weight partition
    OP_LD_PSUM   = 3'd2,   // DRAM -> psum partition (re-read of spilled psums)
    OP_ST_PSUM   = 3'd3,   // psum partition -> DRAM (spill or layer output)
    OP_RUN       = 3'd4    // one processing pass
  } core_op_e;

  typedef struct packed {
    core_op_e          op;
    logic [AW-1:0]     dram_addr;
    logic [GBAW-1:0]   gb_addr;
    logic [GBAW-1:0]   len;
    pass_t             pass;
  } core_cmd_t;

  // Word-wide DRAM request; read data return in request order.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [AW-1:0]     addr;
    logic [XW-1:0]     wdata;
  } dram_req_t;

  typedef struct packed {
    logic              valid;
    logic [XW-1:0]     rdata;
  } dram_rsp_t;

endpackage
