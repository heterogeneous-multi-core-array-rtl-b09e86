// tb_mac: random signed operands with random enable and clear; the
// accumulator is compared every cycle with a reference sum.
module tb_mac;
  import hmc_pkg::*;
  logic clk = 0, rst_n = 0, en, clr;
  data_t a, b;
  psum_t acc, acc_next;
  longint ref_acc;
  int checks = 0, failures = 0;

  mac dut (.*);

  always #5 clk = ~clk;
  initial begin repeat (200000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    en = 0; clr = 0; a = 0; b = 0; ref_acc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en  = ($urandom_range(3) != 0);
      clr = ($urandom_range(7) == 0);
      a   = data_t'($urandom);
      b   = data_t'($urandom);
      if (n < 10) begin a = 16'sh7fff; b = 16'sh8000; end   // extreme operands
      if (en) ref_acc = (clr ? 0 : ref_acc) + longint'(a) * longint'(b);
      ref_acc = longint'(psum_t'(ref_acc));                 // 32-bit wrap
      @(posedge clk); #1;
      checks++;
      if (acc !== psum_t'(ref_acc)) begin
        failures++;
        if (failures < 5) $display("mac mismatch n=%0d got %0d exp %0d", n, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
