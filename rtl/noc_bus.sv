// noc_bus: global-buffer-to-array data delivery bus with multicast.
//
// The global buffer feeds the array over one shared bus; every PE watches
// the bus and takes the words meant for it. Under the row-stationary
// dataflow all PEs of one array row take the same filter row, and ifmap
// rows go diagonally: the PE in row r, column c of a band needs ifmap row
// kr(r) + c*s of the channel held by row r. So one ifmap row put on the bus
// once is captured by every PE on its diagonal (multicast).
//
// Each bus word carries a tag (see hmc_pkg::bus_word_t). This block
// registers the bus word (one pipeline stage), compares its tag with each
// PE's identity and raises that PE's weight or ifmap write strobe; the
// element address and data go to all PEs in common.
//   weight: tag_a == r                                  (whole row r)
//   ifmap : tag_a == grp(r) && tag_b == kr(r) + c*s && c < ncol
// Row identities (grp, kr, act) come from pe_array. Latency: a word
// presented in cycle t is written into the PE RFs at the end of cycle t+1.
// Using tag matching for the multicast is this design's choice; the
// description only says that each PE fetches its data when it is on the
// shared bus.
module noc_bus
  import hmc_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  bus_word_t             bus_in,
  input  logic [2:0]            s,
  input  logic [6:0]            ncol,
  input  logic [TAGW-1:0]       row_grp [ROWS],
  input  logic [TAGW-1:0]       row_kr  [ROWS],
  input  logic                  row_act [ROWS],
  output logic                  w_we    [ROWS][COLS],
  output logic                  i_we    [ROWS][COLS],
  output logic [4:0]            elem,
  output data_t                 data
);
  bus_word_t q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= bus_in;
  end

  assign elem = q.elem;
  assign data = q.data;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        w_we[r][c] = row_act[r] && (q.kind == BUS_WEIGHT) &&
                     (q.tag_a == TAGW'(r));
        i_we[r][c] = row_act[r] && (q.kind == BUS_IFMAP) && (c < int'(ncol)) &&
                     (q.tag_a == row_grp[r]) &&
                     (q.tag_b == row_kr[r] + TAGW'(c) * TAGW'(s));
      end
    end
  end
endmodule
