// tb_group_ctrl: three requesters share one DRAM channel through the
// controller. Each issues random reads and writes to its own address
// region, holding a request until it is accepted. Every read response must
// reach the requester that issued it, in order, with the data last written
// there. Also checked: every request is served, the DRAM sees exactly the
// sum of all requests, and every requester wins the channel while the
// others are also asking (round-robin fairness).
module tb_group_ctrl;
  import hmc_pkg::*;
  localparam int N = 3, NREQ = 300;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  dram_req_t core_req [N]; logic core_ready [N]; dram_rsp_t core_rsp [N];
  dram_req_t dram_req; logic dram_req_ready; dram_rsp_t dram_rsp;
  int checks = 0, failures = 0;
  int served [N]; bit fin [N]; int contended_wins [N]; int rsp_cnt [N]; int rd_issued [N];
  logic [31:0] model [N][64];
  logic [31:0] expq [N][$];

  group_ctrl #(.NCORES(N), .RD_FIFO(8)) dut (.*);
  dram_model #(.WORDS(4096), .LAT(5), .STALL_PCT(30)) u_dram (
    .clk, .rst_n, .req(dram_req), .ready(dram_req_ready), .rsp(dram_rsp));

  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // response checking
  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) if (core_rsp[n].valid) begin
      checks++;
      rsp_cnt[n]++;
      if (expq[n].size() == 0) begin failures++; $display("core %0d: unexpected response", n); end
      else begin
        logic [31:0] e;
        e = expq[n].pop_front();
        if (core_rsp[n].rdata !== e) begin failures++; $display("core %0d: got %h exp %h", n, core_rsp[n].rdata, e); end
      end
    end
  end

  // contention accounting
  always @(negedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int n = 0; n < N; n++) nv += int'(core_req[n].valid);
    for (int n = 0; n < N; n++) if (core_req[n].valid && core_ready[n] && nv > 1) contended_wins[n]++;
  end

  // hold the request until a clock edge at which it was accepted
  task automatic accept(int g);
    bit acc;
    forever begin
      #1 acc = core_ready[g];
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    served[g]++;
  endtask

  for (genvar g = 0; g < N; g++) begin : g_req
    initial begin
      core_req[g] = '0; fin[g] = 0; served[g] = 0; rsp_cnt[g] = 0; rd_issued[g] = 0; contended_wins[g] = 0;
      for (int a = 0; a < 64; a++) model[g][a] = 0;
      wait (rst_n);
      // initialise own region
      for (int a = 0; a < 64; a++) begin
        @(negedge clk);
        core_req[g].valid = 1; core_req[g].we = 1; core_req[g].addr = 32'(g * 1024 + a);
        core_req[g].wdata = {8'(g), 24'($urandom)}; model[g][a] = core_req[g].wdata;
        accept(g);
      end
      for (int n = 0; n < NREQ; n++) begin
        int a;
        @(negedge clk);
        a = $urandom_range(63);
        core_req[g].valid = ($urandom_range(3) != 0);
        core_req[g].addr = 32'(g * 1024 + a);
        core_req[g].we = ($urandom_range(1) == 0);
        core_req[g].wdata = {8'(g), 24'($urandom)};
        if (core_req[g].valid) begin
          if (core_req[g].we) model[g][a] = core_req[g].wdata;
          else begin expq[g].push_back(model[g][a]); rd_issued[g]++; end
          accept(g);
        end
      end
      @(negedge clk); core_req[g] = '0; fin[g] = 1;
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (20) @(negedge clk);
    wait (fin[0] && fin[1] && fin[2]);
    repeat (50) @(negedge clk);
    for (int n = 0; n < N; n++) begin
      checks++;
      if (rsp_cnt[n] != rd_issued[n] || expq[n].size() != 0) begin
        failures++; $display("core %0d: %0d responses for %0d reads", n, rsp_cnt[n], rd_issued[n]);
      end
      checks++;
      if (contended_wins[n] == 0) begin failures++; $display("core %0d never won under contention", n); end
    end
    checks++;
    if (int'(u_dram.reads + u_dram.writes) != served[0] + served[1] + served[2]) begin
      failures++; $display("DRAM saw %0d requests, %0d served", u_dram.reads + u_dram.writes, served[0] + served[1] + served[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
