// tb_hmc_top_full: end-to-end test of the heterogeneous chip with every parameter at its
// default (3 cores of 32x32, 4 cores of 12x14, 54/216 KB buffers).
//
// Both core groups work at the same time, each on its own DRAM channel:
//   A0 -> A1  pipelined model parallelism: A0 runs layer 1 (channels stacked
//             in its array) and writes the output to DRAM; A1 then reads that
//             output as its ifmap and runs layer 2;
//   A2        a pass with two bands (two convolutions side by side, stride
//             2), then a second pass accumulated in the psum buffer, then a
//             spill of the psums to DRAM, reload and a third accumulated pass;
//   B0..B3    one layer each on the other core type (B3 with a 5-wide
//             filter and stride 2).
// Every result that reaches DRAM is compared with a direct convolution.
// Mechanisms counted, each must occur: channel stacking, bands, psum
// accumulation, spill/reload, layer hand-over between cores, contention
// for a group's DRAM channel, DRAM back-pressure, runs on both core types.
module tb_hmc_top_full;
  import hmc_pkg::*;
  localparam int A_ROWS = 32, A_COLS = 32, B_ROWS = 12, B_COLS = 14;
  localparam int NA = 3, NB = 4, NC = NA + NB;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic       a_cmd_valid [NA]; logic a_cmd_ready [NA]; core_cmd_t a_cmd [NA]; logic a_cmd_done [NA];
  logic       b_cmd_valid [NB]; logic b_cmd_ready [NB]; core_cmd_t b_cmd [NB]; logic b_cmd_done [NB];
  dram_req_t  a_dram_req, b_dram_req; logic a_dram_req_ready, b_dram_req_ready;
  dram_rsp_t  a_dram_rsp, b_dram_rsp;
  int checks = 0, failures = 0;

  hmc_top dut (
    .clk, .rst_n,
    .a_cmd_valid, .a_cmd_ready, .a_cmd, .a_cmd_done,
    .b_cmd_valid, .b_cmd_ready, .b_cmd, .b_cmd_done,
    .a_dram_req, .a_dram_req_ready, .a_dram_rsp,
    .b_dram_req, .b_dram_req_ready, .b_dram_rsp);

  dram_model #(.WORDS(1 << 20), .LAT(6), .STALL_PCT(15)) u_dram_a (
    .clk, .rst_n, .req(a_dram_req), .ready(a_dram_req_ready), .rsp(a_dram_rsp));
  dram_model #(.WORDS(1 << 20), .LAT(6), .STALL_PCT(15)) u_dram_b (
    .clk, .rst_n, .req(b_dram_req), .ready(b_dram_req_ready), .rsp(b_dram_rsp));

  always #5 clk = ~clk;
  initial begin repeat (2000000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---- mechanism counters ----
  int n_stack = 0, n_bands = 0, n_acc = 0, n_spill = 0, n_handover = 0;
  int n_cont_a = 0, n_cont_b = 0, n_stall = 0, n_run_a = 0, n_run_b = 0;

  always @(negedge clk) if (rst_n) begin
    int va, vb;
    va = int'(dut.g_a[0].u_core.dram_req.valid) + int'(dut.g_a[1].u_core.dram_req.valid) +
         int'(dut.g_a[2].u_core.dram_req.valid);
    vb = int'(dut.g_b[0].u_core.dram_req.valid) + int'(dut.g_b[1].u_core.dram_req.valid) +
         int'(dut.g_b[2].u_core.dram_req.valid) + int'(dut.g_b[3].u_core.dram_req.valid);
    if (va > 1) n_cont_a++;
    if (vb > 1) n_cont_b++;
    if ((a_dram_req.valid && !a_dram_req_ready) || (b_dram_req.valid && !b_dram_req_ready)) n_stall++;
  end

  // ---- per-core data (core k: 0..2 group A, 3..6 group B) ----
  int wf   [NC][];
  int xf   [NC][];
  int expv [NC][];

  function automatic int dbase(int k); return (k % 4) * 'h40000; endfunction

  task automatic do_cmd(int k, core_op_e op, int da, int ga, int len, pass_t p);
    core_cmd_t cm;
    cm = '0; cm.op = op; cm.dram_addr = AW'(da); cm.gb_addr = GBAW'(ga); cm.len = GBAW'(len); cm.pass = p;
    @(negedge clk);
    if (k < NA) begin
      while (!a_cmd_ready[k]) @(negedge clk);
      a_cmd[k] = cm; a_cmd_valid[k] = 1; @(negedge clk); a_cmd_valid[k] = 0;
      while (!a_cmd_done[k]) @(negedge clk);
    end else begin
      while (!b_cmd_ready[k-NA]) @(negedge clk);
      b_cmd[k-NA] = cm; b_cmd_valid[k-NA] = 1; @(negedge clk); b_cmd_valid[k-NA] = 0;
      while (!b_cmd_done[k-NA]) @(negedge clk);
    end
  endtask

  task automatic dram_wr(int k, int addr, int v);
    if (k < NA) u_dram_a.mem[addr] = 32'(v); else u_dram_b.mem[addr] = 32'(v);
  endtask
  function automatic int dram_rd(int k, int addr);
    if (k < NA) return int'($signed(u_dram_a.mem[addr]));
    return int'($signed(u_dram_b.mem[addr]));
  endfunction

  // One layer on core k. from_k >= 0: the ifmap is core from_k's output
  // already in DRAM at dbase(from_k)+'h30000 (hand-over between cores).
  task automatic layer(int k, int kh, int kw, int s, int win, int nch, int nband, int ncol,
                       bit acc, int pbase, int from_k);
    int nidx, eout, nw, ni, wb, ib;
    pass_t p;
    nidx = kh + (ncol - 1) * s;
    eout = (win - kw) / s + 1;
    nw = nband * nch * kh * kw;
    ni = nband * nch * nidx * win;
    wb = dbase(k) + 'h10000;
    ib = (from_k >= 0) ? dbase(from_k) + 'h30000 : dbase(k) + 'h20000;
    wf[k] = new[nw];
    xf[k] = new[ni];
    for (int i = 0; i < nw; i++) begin wf[k][i] = $urandom_range(6) - 3; dram_wr(k, wb + i, wf[k][i]); end
    for (int i = 0; i < ni; i++) begin
      if (from_k >= 0) xf[k][i] = dram_rd(k, ib + i);
      else begin xf[k][i] = $urandom_range(16) - 8; dram_wr(k, ib + i, xf[k][i]); end
    end
    do_cmd(k, OP_LD_WEIGHT, wb, 0, nw, '0);
    do_cmd(k, OP_LD_IFMAP, ib, 0, ni, '0);
    p = '0; p.kh = 4'(kh); p.kw = 4'(kw); p.s = 3'(s); p.win = 5'(win); p.eout = 5'(eout);
    p.nch = 6'(nch); p.nband = 6'(nband); p.ncol = 7'(ncol); p.p_base = GBAW'(pbase); p.acc = acc;
    do_cmd(k, OP_RUN, 0, 0, 0, p);
    if (k < NA) n_run_a++; else n_run_b++;
    if (nch > 1) n_stack++;
    if (nband > 1) n_bands++;
    if (acc) n_acc++;
    if (from_k >= 0) n_handover++;
    if (!acc) expv[k] = new[nband * ncol * eout];
    for (int b = 0; b < nband; b++) for (int c = 0; c < ncol; c++) for (int e = 0; e < eout; e++) begin
      int v;
      v = 0;
      for (int ch = 0; ch < nch; ch++) for (int kr = 0; kr < kh; kr++) for (int kk = 0; kk < kw; kk++)
        v += wf[k][((b * nch + ch) * kh + kr) * kw + kk] *
             xf[k][((b * nch + ch) * nidx + c * s + kr) * win + e * s + kk];
      if (acc) expv[k][(b * ncol + c) * eout + e] += v;
      else     expv[k][(b * ncol + c) * eout + e] = v;
    end
  endtask

  task automatic store_check(int k, int gb, string what);
    int ob, n;
    ob = dbase(k) + 'h30000;
    n = expv[k].size();
    do_cmd(k, OP_ST_PSUM, ob, gb, n, '0);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (dram_rd(k, ob + i) != expv[k][i]) begin
        failures++;
        if (failures < 10) $display("core %0d %s word %0d: %0d exp %0d", k, what, i, dram_rd(k, ob + i), expv[k][i]);
      end
    end
  endtask

  event l1_done;

  initial begin
    for (int n = 0; n < NA; n++) begin a_cmd_valid[n] = 0; a_cmd[n] = '0; end
    for (int n = 0; n < NB; n++) begin b_cmd_valid[n] = 0; b_cmd[n] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      begin   // A0: layer 1, channels stacked over the array rows
        layer(0, 3, 3, 1, 8, A_ROWS / 3, 1, A_COLS, 0, 0, -1);
        store_check(0, 0, "layer1");
        -> l1_done;
      end
      begin   // A1: layer 2 on A0's output (ncol chosen so nidx = A0's ncol)
        wait (l1_done.triggered);
        layer(1, 3, 3, 1, 6, 1, 1, A_COLS - 2, 0, 0, 0);
        store_check(1, 0, "layer2");
      end
      begin   // A2: bands, accumulation, spill and reload
        layer(2, 3, 3, 2, 11, 1, 2, A_COLS, 0, 0, -1);
        layer(2, 3, 3, 2, 11, 1, 2, A_COLS, 1, 0, -1);
        store_check(2, 0, "acc");
        do_cmd(2, OP_LD_PSUM, dbase(2) + 'h30000, 512, expv[2].size(), '0);
        n_spill++;
        layer(2, 3, 3, 2, 11, 1, 2, A_COLS, 1, 512, -1);
        store_check(2, 512, "spill");
      end
      begin layer(3, 3, 3, 1, 8, B_ROWS / 3, 1, B_COLS, 0, 0, -1); store_check(3, 0, "B0"); end
      begin layer(4, 3, 3, 1, 8, B_ROWS / 3, 1, B_COLS, 0, 0, -1); store_check(4, 0, "B1"); end
      begin layer(5, 2, 3, 1, 10, B_ROWS / 2, 1, B_COLS, 0, 0, -1); store_check(5, 0, "B2"); end
      begin layer(6, 3, 5, 2, 15, 1, 2, B_COLS, 0, 0, -1); store_check(6, 0, "B3"); end
    join
    checks += 10;
    if (n_stack == 0)    begin failures++; $display("no channel stacking"); end
    if (n_bands == 0)    begin failures++; $display("no multi-band pass"); end
    if (n_acc == 0)      begin failures++; $display("no accumulated pass"); end
    if (n_spill == 0)    begin failures++; $display("no spill"); end
    if (n_handover == 0) begin failures++; $display("no hand-over"); end
    if (n_cont_a == 0)   begin failures++; $display("no contention in group A"); end
    if (n_cont_b == 0)   begin failures++; $display("no contention in group B"); end
    if (n_stall == 0)    begin failures++; $display("no DRAM back-pressure"); end
    if (n_run_a == 0)    begin failures++; $display("no run on core type A"); end
    if (n_run_b == 0)    begin failures++; $display("no run on core type B"); end
    $display("stack=%0d bands=%0d acc=%0d spill=%0d handover=%0d contA=%0d contB=%0d stall=%0d runA=%0d runB=%0d",
             n_stack, n_bands, n_acc, n_spill, n_handover, n_cont_a, n_cont_b, n_stall, n_run_a, n_run_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
