// pe_array: ROWS x COLS processing-element array with row-stationary mapping.
//
// The array computes 2-D convolutions row by row. For one pass, each band
// (sub-array) of kh*nch consecutive rows computes one convolution: inside a
// band, rows are grouped per channel, kh rows each, and the row with index
// kr inside its channel group holds filter row kr. Column c of a band
// produces output row c. The PEs of a column add their psum rows bottom to
// top, so the top row of the band ends up holding
//     out[c][e] = sum over ch, kr, k of w[ch][kr][k] * x[ch][c*s+kr][e*s+k]
// Stacking several channels in a band is how the array uses spare rows
// ("processing capacity"); several bands let one array run independent
// convolutions side by side (the divided array of the delivery-timing
// figure). Rows past nband*kh*nch and columns past ncol sit idle.
//
// This block derives each row's identity (band, channel group, kr, top,
// chain) from the pass parameters with running counters, feeds those to
// the NoC decoder, and wires the vertical psum chains. Control:
//   start + start_band: starts every PE of that band (the controller does
//                       this once the band's last PE has its data);
//   all_done:           every active band has finished streaming;
//   rd_band/rd_col/rd_idx -> rd_data: psum word e of output row c of a
//                       band, read from the band's top PE (combinational).
module pe_array
  import hmc_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pass_t                  cfg,
  input  bus_word_t              bus_in,
  input  logic                   start,
  input  logic [5:0]             start_band,
  output logic                   all_done,
  input  logic [5:0]             rd_band,
  input  logic [6:0]             rd_col,
  input  logic [$clog2(PRF)-1:0] rd_idx,
  output psum_t                  rd_data
);
  // ---- per-row identity -------------------------------------------------
  logic [TAGW-1:0] row_grp  [ROWS];
  logic [TAGW-1:0] row_kr   [ROWS];
  logic            row_act  [ROWS];
  logic [5:0]      row_band [ROWS];
  logic            row_top  [ROWS];
  logic            row_chain[ROWS];

  always_comb begin
    logic [TAGW-1:0] kr, ch, grp;
    logic [5:0]      b;
    kr = '0; ch = '0; grp = '0; b = '0;
    for (int r = 0; r < ROWS; r++) begin
      row_act[r]  = (b < cfg.nband);
      row_kr[r]   = kr;
      row_grp[r]  = grp;
      row_band[r] = b;
      row_top[r]  = (kr == '0) && (ch == '0);
      if (kr == TAGW'(cfg.kh) - TAGW'(1)) begin
        kr  = '0;
        grp = grp + TAGW'(1);
        if (ch == TAGW'(cfg.nch) - TAGW'(1)) begin
          ch = '0;
          b  = b + 6'd1;
        end else begin
          ch = ch + TAGW'(1);
        end
      end else begin
        kr = kr + TAGW'(1);
      end
    end
    for (int r = 0; r < ROWS; r++) begin
      if (r == ROWS - 1) row_chain[r] = 1'b0;
      else               row_chain[r] = row_act[r+1] && !row_top[r+1];
    end
  end

  // ---- NoC --------------------------------------------------------------
  logic       w_we [ROWS][COLS];
  logic       i_we [ROWS][COLS];
  logic [4:0] elem;
  data_t      data;

  noc_bus #(.ROWS(ROWS), .COLS(COLS)) u_noc (
    .clk, .rst_n, .bus_in, .s(cfg.s), .ncol(cfg.ncol),
    .row_grp, .row_kr, .row_act, .w_we, .i_we, .elem, .data);

  // ---- PEs ----------------------------------------------------------------
  logic  pv   [ROWS+1][COLS];
  psum_t pd   [ROWS+1][COLS];
  logic  done [ROWS][COLS];
  psum_t rdd  [ROWS][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign pv[ROWS][c] = 1'b0;
    assign pd[ROWS][c] = '0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic row_start;
    assign row_start = start && row_act[r] && (row_band[r] == start_band);
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe u_pe (
        .clk, .rst_n,
        .kw(cfg.kw), .s(cfg.s), .eout(cfg.eout),
        .chain(row_chain[r]), .top(row_top[r]),
        .w_we(w_we[r][c]), .i_we(i_we[r][c]), .elem, .data,
        .start(row_start), .done(done[r][c]),
        .psum_in_valid(pv[r+1][c]), .psum_in(pd[r+1][c]),
        .psum_out_valid(pv[r][c]), .psum_out(pd[r][c]),
        .rd_idx, .rd_data(rdd[r][c]));
    end
  end

  // ---- completion and read-out -------------------------------------------
  always_comb begin
    all_done = 1'b1;
    rd_data  = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (row_act[r] && row_top[r] && !done[r][0]) all_done = 1'b0;
      if (row_act[r] && row_top[r] && row_band[r] == rd_band) begin
        for (int c = 0; c < COLS; c++) begin
          if (7'(c) == rd_col) rd_data = rdd[r][c];
        end
      end
    end
  end
endmodule
