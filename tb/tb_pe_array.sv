// tb_pe_array: a 6x4 array fed directly over its bus.
//   case 1: one band of two channels x three filter rows (all six rows),
//           3 output rows, stride 1: psums of both channels add in the
//           columns;
//   case 2: two bands of three rows, two independent convolutions, band 1
//           started later than band 0 (the divided-array case), stride 2;
//   case 3: one band, one channel, kh = 2, four columns.
// Outputs are read from the top PE of each band and compared with a direct
// 2-D convolution. The time from start to all_done is checked against
// 1 + eout*kw (MACs) + eout (stream) + rows-per-band - 1 (chain hops).
module tb_pe_array;
  import hmc_pkg::*;
  localparam int R = 6, C = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  pass_t cfg; bus_word_t bus_in; logic start, all_done;
  logic [5:0] start_band, rd_band; logic [6:0] rd_col; logic [3:0] rd_idx; psum_t rd_data;
  int checks = 0, failures = 0;

  pe_array #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // w[b][ch][kr][k], x[b][ch][row][col]
  int w [2][6][6][KMAX];
  int x [2][6][40][IRF];

  task automatic send(bus_kind_e kd, int ta, int tb_, int el, int d);
    @(negedge clk);
    bus_in = '0; bus_in.kind = kd; bus_in.tag_a = TAGW'(ta); bus_in.tag_b = TAGW'(tb_);
    bus_in.elem = 5'(el); bus_in.data = data_t'(d);
  endtask

  task automatic load_band(int b, int kh, int kw, int s, int win, int nch, int ncol);
    int nidx;
    nidx = kh + (ncol - 1) * s;
    for (int ch = 0; ch < nch; ch++) for (int kr = 0; kr < kh; kr++)
      for (int k = 0; k < kw; k++) send(BUS_WEIGHT, (b * nch + ch) * kh + kr, 0, k, w[b][ch][kr][k]);
    for (int ch = 0; ch < nch; ch++) for (int i = 0; i < nidx; i++)
      for (int e = 0; e < win; e++) send(BUS_IFMAP, b * nch + ch, i, e, x[b][ch][i][e]);
    @(negedge clk); bus_in = '0;
    @(negedge clk);   // bus register + RF write
  endtask

  task automatic run(int kh, int kw, int s, int win, int nch, int nband, int ncol);
    int eout, cyc;
    eout = (win - kw) / s + 1;
    cfg = '0; cfg.kh = 4'(kh); cfg.kw = 4'(kw); cfg.s = 3'(s); cfg.win = 5'(win);
    cfg.eout = 5'(eout); cfg.nch = 6'(nch); cfg.nband = 6'(nband); cfg.ncol = 7'(ncol);
    for (int b = 0; b < nband; b++) for (int ch = 0; ch < nch; ch++) begin
      for (int kr = 0; kr < kh; kr++) for (int k = 0; k < kw; k++) w[b][ch][kr][k] = $urandom_range(30) - 15;
      for (int i = 0; i < 40; i++) for (int e = 0; e < IRF; e++) x[b][ch][i][e] = $urandom_range(60) - 30;
    end
    for (int b = 0; b < nband; b++) begin
      load_band(b, kh, kw, s, win, nch, ncol);
      start = 1; start_band = 6'(b);
      @(negedge clk); start = 0; cyc = 1;
    end
    while (!all_done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 1 + eout * kw + eout + kh * nch - 1) begin
      failures++; $display("latency %0d exp %0d", cyc, 1 + eout * kw + eout + kh * nch - 1);
    end
    for (int b = 0; b < nband; b++) for (int c = 0; c < ncol; c++) for (int e = 0; e < eout; e++) begin
      int ref_v;
      ref_v = 0;
      for (int ch = 0; ch < nch; ch++) for (int kr = 0; kr < kh; kr++) for (int k = 0; k < kw; k++)
        ref_v += w[b][ch][kr][k] * x[b][ch][c * s + kr][e * s + k];
      rd_band = 6'(b); rd_col = 7'(c); rd_idx = 4'(e); #1;
      checks++;
      if (rd_data !== psum_t'(ref_v)) begin
        failures++;
        if (failures < 8) $display("b%0d c%0d e%0d got %0d exp %0d", b, c, e, rd_data, ref_v);
      end
    end
  endtask

  initial begin
    bus_in = '0; start = 0; start_band = 0; rd_band = 0; rd_col = 0; rd_idx = 0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(3, 3, 1, 8, 2, 1, 3);
    run(3, 3, 2, 11, 1, 2, 4);
    run(2, 4, 1, 16, 1, 1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
