// tb_global_buffer: writes random words into the three partitions at
// random addresses, then reads them back (one-cycle read latency) and
// compares with a model; also checks that reads see the last write and
// that the partitions do not alias one another.
module tb_global_buffer;
  import hmc_pkg::*;
  localparam int IFW = 256, WW = 64, PSW = 128;
  logic clk = 0;
  logic if_en, if_we, w_en, w_we, ps_en, ps_we;
  logic [GBAW-1:0] if_addr, w_addr, ps_addr;
  data_t if_wdata, w_wdata, if_rdata, w_rdata;
  psum_t ps_wdata, ps_rdata;
  data_t mi [IFW]; data_t mw [WW]; psum_t mp [PSW];
  int checks = 0, failures = 0;

  global_buffer #(.IF_WORDS(IFW), .W_WORDS(WW), .PS_WORDS(PSW)) dut (.*);

  always #5 clk = ~clk;
  initial begin repeat (500000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    {if_en, if_we, w_en, w_we, ps_en, ps_we} = '0;
    if_addr = 0; w_addr = 0; ps_addr = 0; if_wdata = 0; w_wdata = 0; ps_wdata = 0;
    // fill all three (same addresses, different data: no aliasing)
    for (int a = 0; a < IFW; a++) begin
      @(negedge clk);
      if_en = 1; if_we = 1; if_addr = GBAW'(a); if_wdata = data_t'($urandom); mi[a] = if_wdata;
      w_en = (a < WW); w_we = 1; w_addr = GBAW'(a % WW); w_wdata = data_t'($urandom); if (a < WW) mw[a] = w_wdata;
      ps_en = (a < PSW); ps_we = 1; ps_addr = GBAW'(a % PSW); ps_wdata = psum_t'($urandom); if (a < PSW) mp[a] = ps_wdata;
    end
    @(negedge clk); {if_en, if_we, w_en, w_we, ps_en, ps_we} = '0;
    for (int n = 0; n < 600; n++) begin
      int ai, aw, ap;
      ai = $urandom_range(IFW-1); aw = $urandom_range(WW-1); ap = $urandom_range(PSW-1);
      @(negedge clk);
      if (n % 5 == 4) begin   // overwrite, then read the same word next
        if_en = 1; if_we = 1; if_addr = GBAW'(ai); if_wdata = data_t'($urandom); mi[ai] = if_wdata;
        ps_en = 1; ps_we = 1; ps_addr = GBAW'(ap); ps_wdata = psum_t'($urandom); mp[ap] = ps_wdata;
        @(negedge clk);
      end
      if_en = 1; if_we = 0; if_addr = GBAW'(ai);
      w_en = 1; w_we = 0; w_addr = GBAW'(aw);
      ps_en = 1; ps_we = 0; ps_addr = GBAW'(ap);
      @(negedge clk);
      {if_en, if_we, w_en, w_we, ps_en, ps_we} = '0;
      checks += 3;
      if (if_rdata !== mi[ai]) failures++;
      if (w_rdata !== mw[aw]) failures++;
      if (ps_rdata !== mp[ap]) failures++;
      // output holds while not read
      @(negedge clk);
      checks++; if (if_rdata !== mi[ai]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
