// tb_array_core: one core (6x4 array, small buffers) with a DRAM model,
// driven by commands the way a host schedule would drive it.
//   1. load weights and ifmaps from DRAM, run a pass with two channels
//      stacked in one band, store the psums to DRAM, compare with a direct
//      convolution;
//   2. run a second pass on new channels with acc=1 into the same psum
//      words (accumulation across passes in the global buffer);
//   3. spill: store the psums to DRAM, reload them at another psum address
//      and accumulate a third pass on top (psum re-read from DRAM);
//   4. a pass with two bands (two convolutions side by side), stride 2.
// The cycle count of a pass is checked against the controller's schedule:
// 1 + nband*(rows*kw + nch*nidx*win + 3) + compute of the last band
// (eout*kw + eout + rows - 1) + 1 + drain (ncol*eout*nband words, 1 or 2
// cycles each) + 1.
module tb_array_core;
  import hmc_pkg::*;
  localparam int R = 6, C = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic cmd_valid, cmd_ready, cmd_done; core_cmd_t cmd;
  dram_req_t dram_req; logic dram_req_ready; dram_rsp_t dram_rsp;
  int checks = 0, failures = 0;

  array_core #(.ROWS(R), .COLS(C), .IF_WORDS(1024), .W_WORDS(256), .PS_WORDS(256)) dut (.*);
  dram_model #(.WORDS(65536), .LAT(4), .STALL_PCT(20)) u_dram (
    .clk, .rst_n, .req(dram_req), .ready(dram_req_ready), .rsp(dram_rsp));

  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int WB = 'h1000, IB = 'h2000, OB = 'h4000, OB2 = 'h5000;
  int wf [512]; int xf [2048]; int expv [256];
  int run_cycles;

  task automatic do_cmd(core_op_e op, int da, int ga, int len, pass_t p);
    int cyc;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = '0; cmd.op = op; cmd.dram_addr = AW'(da); cmd.gb_addr = GBAW'(ga);
    cmd.len = GBAW'(len); cmd.pass = p; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!cmd_done) begin @(negedge clk); cyc++; end
    run_cycles = cyc;
  endtask

  // Make one layer's data, put it in DRAM, load it, run it; returns the pass.
  task automatic layer(int kh, int kw, int s, int win, int nch, int nband, int ncol,
                       bit acc, int pbase, output pass_t p);
    int nidx, eout, nw, ni, exp_cyc;
    nidx = kh + (ncol - 1) * s;
    eout = (win - kw) / s + 1;
    nw = nband * nch * kh * kw;
    ni = nband * nch * nidx * win;
    for (int i = 0; i < nw; i++) begin wf[i] = $urandom_range(40) - 20; u_dram.mem[WB + i] = 32'(wf[i]); end
    for (int i = 0; i < ni; i++) begin xf[i] = $urandom_range(60) - 30; u_dram.mem[IB + i] = 32'(xf[i]); end
    do_cmd(OP_LD_WEIGHT, WB, 0, nw, '0);
    do_cmd(OP_LD_IFMAP, IB, 0, ni, '0);
    p = '0; p.kh = 4'(kh); p.kw = 4'(kw); p.s = 3'(s); p.win = 5'(win); p.eout = 5'(eout);
    p.nch = 6'(nch); p.nband = 6'(nband); p.ncol = 7'(ncol); p.p_base = GBAW'(pbase); p.acc = acc;
    do_cmd(OP_RUN, 0, 0, 0, p);
    exp_cyc = 1 + nband * (nch * kh * kw + nch * nidx * win + 3) + eout * kw + eout + nch * kh - 1
              + 1 + ncol * eout * nband * (acc ? 2 : 1) + 1;
    checks++;
    if (run_cycles != exp_cyc) begin failures++; $display("pass cycles %0d exp %0d", run_cycles, exp_cyc); end
    for (int b = 0; b < nband; b++) for (int c = 0; c < ncol; c++) for (int e = 0; e < eout; e++) begin
      int v;
      v = 0;
      for (int ch = 0; ch < nch; ch++) for (int kr = 0; kr < kh; kr++) for (int k = 0; k < kw; k++)
        v += wf[((b * nch + ch) * kh + kr) * kw + k] *
             xf[((b * nch + ch) * nidx + c * s + kr) * win + e * s + k];
      if (acc) expv[(b * ncol + c) * eout + e] += v;
      else     expv[(b * ncol + c) * eout + e] = v;
    end
  endtask

  task automatic check_dram(int base, int n, string what);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (u_dram.mem[base + i] !== 32'(expv[i])) begin
        failures++;
        if (failures < 10) $display("%s word %0d: %0d exp %0d", what, i, $signed(u_dram.mem[base + i]), expv[i]);
      end
    end
  endtask

  initial begin
    pass_t p;
    int n;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // 1
    layer(3, 3, 1, 8, 2, 1, 3, 0, 0, p);
    n = 3 * 6;
    do_cmd(OP_ST_PSUM, OB, 0, n, '0);
    check_dram(OB, n, "pass");
    // 2
    layer(3, 3, 1, 8, 2, 1, 3, 1, 0, p);
    do_cmd(OP_ST_PSUM, OB, 0, n, '0);
    check_dram(OB, n, "acc");
    // 3: spill and re-read at psum address 100
    do_cmd(OP_LD_PSUM, OB, 100, n, '0);
    layer(3, 3, 1, 8, 2, 1, 3, 1, 100, p);
    do_cmd(OP_ST_PSUM, OB2, 100, n, '0);
    check_dram(OB2, n, "spill");
    // 4: two bands, stride 2
    layer(3, 3, 2, 11, 1, 2, 4, 0, 0, p);
    n = 2 * 4 * 5;
    do_cmd(OP_ST_PSUM, OB, 0, n, '0);
    check_dram(OB, n, "bands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
