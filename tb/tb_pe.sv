// tb_pe: loads a filter row and an ifmap row into one PE, runs the 1-D
// convolution and checks (1) the psum row read back from the PE, (2) the
// outgoing psum stream, and (3) the latency of eout*kw MAC cycles plus
// eout stream cycles. A second phase runs the PE as a chained, top PE and
// feeds a psum stream from below: it must add the stream to its own row
// and keep the totals. Stride 1 and stride 2 are both run.
module tb_pe;
  import hmc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  logic [3:0] kw; logic [2:0] s; logic [4:0] eout;
  logic chain, top, w_we, i_we, start, done, psum_in_valid, psum_out_valid;
  logic [4:0] elem; data_t data; psum_t psum_in, psum_out, rd_data;
  logic [3:0] rd_idx;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;
  initial begin repeat (500000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  data_t w [KMAX]; data_t x [IRF]; psum_t ref_row [PRF]; psum_t inj [PRF];
  psum_t got [PRF]; int ngot;

  // collect the outgoing stream
  always @(posedge clk) if (psum_out_valid && ngot < PRF) begin got[ngot] <= psum_out; ngot <= ngot + 1; end

  task automatic run(input int kw_i, input int s_i, input int win, input bit chained);
    int e_n, cyc;
    e_n = (win - kw_i) / s_i + 1;
    kw = 4'(kw_i); s = 3'(s_i); eout = 5'(e_n); chain = chained; top = 1;
    for (int k = 0; k < kw_i; k++) w[k] = data_t'($urandom_range(255)) - 16'sd128;
    for (int i = 0; i < win; i++) x[i] = data_t'($urandom_range(255)) - 16'sd128;
    for (int e = 0; e < e_n; e++) begin
      ref_row[e] = 0;
      for (int k = 0; k < kw_i; k++) ref_row[e] += psum_t'(w[k]) * psum_t'(x[e*s_i + k]);
      inj[e] = chained ? psum_t'($urandom_range(100000)) : 0;
    end
    for (int k = 0; k < kw_i; k++) begin
      @(negedge clk); w_we = 1; elem = 5'(k); data = w[k];
    end
    @(negedge clk); w_we = 0;
    for (int i = 0; i < win; i++) begin
      @(negedge clk); i_we = 1; elem = 5'(i); data = x[i];
    end
    @(negedge clk); i_we = 0; ngot = 0; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    if (chained) begin
      // stream from below starts when this PE has finished its MACs
      repeat (e_n * kw_i) @(negedge clk);
      for (int e = 0; e < e_n; e++) begin
        psum_in_valid = 1; psum_in = inj[e]; @(negedge clk);
        psum_in_valid = 0; if (e % 2 == 1) @(negedge clk);   // gaps in the stream
      end
    end else begin
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != e_n * kw_i + e_n + 1) begin   // +1: the cycle that takes start
        failures++; $display("latency %0d expected %0d", cyc, e_n * kw_i + e_n + 1);
      end
    end
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (ngot != e_n) begin failures++; $display("stream length %0d exp %0d", ngot, e_n); end
    for (int e = 0; e < e_n; e++) begin
      rd_idx = 4'(e); #1;
      checks++;
      if (rd_data !== ref_row[e] + inj[e]) begin failures++; $display("psum[%0d] %0d exp %0d", e, rd_data, ref_row[e] + inj[e]); end
      checks++;
      if (got[e] !== ref_row[e] + inj[e]) begin failures++; $display("stream[%0d] %0d exp %0d", e, got[e], ref_row[e] + inj[e]); end
    end
  endtask

  initial begin
    {w_we, i_we, start, psum_in_valid, chain, top} = '0; elem = 0; data = 0; psum_in = 0; rd_idx = 0;
    kw = 3; s = 1; eout = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    run(3, 1, 8, 0);
    run(5, 2, 15, 0);
    run(12, 1, 16, 0);
    run(3, 1, 10, 1);
    run(4, 2, 12, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
