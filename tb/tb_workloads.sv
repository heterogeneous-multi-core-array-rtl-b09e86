// tb_workloads: layer shapes from the evaluated networks, run on the two
// core types at their full array and buffer sizes. Each case is a tile of
// a real layer (one strip of the ifmap width), checked against a direct
// convolution after it has been stored to DRAM:
//   type A (32x32, 54/54 KB):
//     AlexNet conv1   11x11 filter, stride 4, 3 input channels: two
//                     channels stacked (22 rows) in one pass, the third
//                     accumulated by a second pass (acc=1); 32 output rows;
//     ResNet50 3x3    stride 1, ten channels stacked (30 rows);
//     FC slice        a fully-connected layer as 1x1 filters on 1-wide
//                     rows: 32 inputs stacked as channels, one neuron's
//                     dot product for a batch of 32 samples (one column
//                     per sample);
//   type B (12x14, 216/54 KB):
//     VGG16 conv3x3   stride 1, four channels stacked (12 rows), 14 output rows;
//     MobileNet dw3x3 depthwise, stride 2: four channels as four bands,
//                     each its own convolution;
//     MobileNet pw1x1 pointwise, twelve channels stacked (12 rows),
//                     14 output rows.
module tb_workloads;
  import hmc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic cv [2]; logic cr [2]; core_cmd_t cm [2]; logic cd [2];
  dram_req_t dq [2]; logic dr [2]; dram_rsp_t ds [2];
  int checks = 0, failures = 0;

  array_core u_a (.clk, .rst_n, .cmd_valid(cv[0]), .cmd_ready(cr[0]), .cmd(cm[0]), .cmd_done(cd[0]),
                  .dram_req(dq[0]), .dram_req_ready(dr[0]), .dram_rsp(ds[0]));
  array_core #(.ROWS(12), .COLS(14), .PS_WORDS(55296)) u_b (
                  .clk, .rst_n, .cmd_valid(cv[1]), .cmd_ready(cr[1]), .cmd(cm[1]), .cmd_done(cd[1]),
                  .dram_req(dq[1]), .dram_req_ready(dr[1]), .dram_rsp(ds[1]));
  dram_model #(.WORDS(1 << 18), .LAT(6), .STALL_PCT(10)) u_da (.clk, .rst_n, .req(dq[0]), .ready(dr[0]), .rsp(ds[0]));
  dram_model #(.WORDS(1 << 18), .LAT(6), .STALL_PCT(10)) u_db (.clk, .rst_n, .req(dq[1]), .ready(dr[1]), .rsp(ds[1]));

  always #5 clk = ~clk;
  initial begin repeat (2000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int wf [2][]; int xf [2][]; int expv [2][];

  task automatic do_cmd(int k, core_op_e op, int da, int ga, int len, pass_t p);
    @(negedge clk);
    while (!cr[k]) @(negedge clk);
    cm[k] = '0; cm[k].op = op; cm[k].dram_addr = AW'(da); cm[k].gb_addr = GBAW'(ga);
    cm[k].len = GBAW'(len); cm[k].pass = p; cv[k] = 1;
    @(negedge clk); cv[k] = 0;
    while (!cd[k]) @(negedge clk);
  endtask

  task automatic mem_wr(int k, int a, int v);
    if (k == 0) u_da.mem[a] = 32'(v); else u_db.mem[a] = 32'(v);
  endtask
  function automatic int mem_rd(int k, int a);
    return (k == 0) ? int'($signed(u_da.mem[a])) : int'($signed(u_db.mem[a]));
  endfunction

  task automatic layer(int k, int kh, int kw, int s, int win, int nch, int nband, int ncol, bit acc);
    int nidx, eout, nw, ni;
    pass_t p;
    nidx = kh + (ncol - 1) * s; eout = (win - kw) / s + 1;
    nw = nband * nch * kh * kw; ni = nband * nch * nidx * win;
    wf[k] = new[nw]; xf[k] = new[ni];
    for (int i = 0; i < nw; i++) begin wf[k][i] = $urandom_range(30) - 15; mem_wr(k, 'h1000 + i, wf[k][i]); end
    for (int i = 0; i < ni; i++) begin xf[k][i] = $urandom_range(100) - 50; mem_wr(k, 'h10000 + i, xf[k][i]); end
    do_cmd(k, OP_LD_WEIGHT, 'h1000, 0, nw, '0);
    do_cmd(k, OP_LD_IFMAP, 'h10000, 0, ni, '0);
    p = '0; p.kh = 4'(kh); p.kw = 4'(kw); p.s = 3'(s); p.win = 5'(win); p.eout = 5'(eout);
    p.nch = 6'(nch); p.nband = 6'(nband); p.ncol = 7'(ncol); p.acc = acc;
    do_cmd(k, OP_RUN, 0, 0, 0, p);
    if (!acc) expv[k] = new[nband * ncol * eout];
    for (int b = 0; b < nband; b++) for (int c = 0; c < ncol; c++) for (int e = 0; e < eout; e++) begin
      int v;
      v = 0;
      for (int ch = 0; ch < nch; ch++) for (int kr = 0; kr < kh; kr++) for (int kk = 0; kk < kw; kk++)
        v += wf[k][((b * nch + ch) * kh + kr) * kw + kk] * xf[k][((b * nch + ch) * nidx + c * s + kr) * win + e * s + kk];
      if (acc) expv[k][(b * ncol + c) * eout + e] += v; else expv[k][(b * ncol + c) * eout + e] = v;
    end
  endtask

  task automatic store_check(int k, string what);
    int n;
    n = expv[k].size();
    do_cmd(k, OP_ST_PSUM, 'h30000, 0, n, '0);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (mem_rd(k, 'h30000 + i) != expv[k][i]) begin
        failures++;
        if (failures < 10) $display("%s word %0d: %0d exp %0d", what, i, mem_rd(k, 'h30000 + i), expv[k][i]);
      end
    end
    $display("%s: %0d outputs checked", what, n);
  endtask

  initial begin
    cv[0] = 0; cv[1] = 0; cm[0] = '0; cm[1] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      begin
        layer(0, 11, 11, 4, 15, 2, 1, 32, 0);   // AlexNet conv1, channels 0-1
        layer(0, 11, 11, 4, 15, 1, 1, 32, 1);   // channel 2, accumulated
        store_check(0, "AlexNet conv1 tile");
        layer(0, 3, 3, 1, 16, 10, 1, 32, 0);    // ResNet50 3x3 tile
        store_check(0, "ResNet50 3x3 tile");
        layer(0, 1, 1, 1, 1, 32, 1, 32, 0);     // fully-connected slice
        store_check(0, "FC slice");
      end
      begin
        layer(1, 3, 3, 1, 16, 4, 1, 14, 0);     // VGG16 3x3 tile
        store_check(1, "VGG16 3x3 tile");
        layer(1, 3, 3, 2, 15, 1, 4, 14, 0);     // MobileNet depthwise, stride 2
        store_check(1, "MobileNet dw tile");
        layer(1, 1, 1, 1, 16, 12, 1, 14, 0);    // MobileNet pointwise
        store_check(1, "MobileNet pw tile");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
