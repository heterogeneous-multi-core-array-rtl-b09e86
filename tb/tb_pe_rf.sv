// tb_pe_rf: fills the register file with random words and reads every
// address back, comparing with a model array; also checks that a write
// to one address leaves the others alone.
module tb_pe_rf;
  localparam int W = 16, D = 16;
  logic clk = 0, we;
  logic [3:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  pe_rf #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin repeat (100000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; waddr = 4'(a); wdata = W'($urandom); model[a] = wdata;
      end
      @(negedge clk); we = 0;
      for (int a = 0; a < D; a++) begin
        raddr = 4'(a); #1;
        checks++; if (rdata !== model[a]) begin failures++; $display("rf mismatch a=%0d %h/%h", a, rdata, model[a]); end
      end
      // single write, neighbours unchanged
      @(negedge clk); we = 1; waddr = 4'(rep * 3); wdata = 16'hA5A5 ^ W'(rep); model[rep*3] = wdata;
      @(negedge clk); we = 0;
      for (int a = 0; a < D; a++) begin
        raddr = 4'(a); #1;
        checks++; if (rdata !== model[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
