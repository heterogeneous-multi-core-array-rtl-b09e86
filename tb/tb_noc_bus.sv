// tb_noc_bus: drives random tagged weight and ifmap words onto the bus of a
// 6x4 array with a two-band mapping and checks, one cycle later, which PEs
// raise a write strobe: weights go to exactly the PEs of the tagged row;
// an ifmap row goes to the PEs on its diagonal (row id kr, column c with
// kr + c*s equal to the row number) among the used columns.
module tb_noc_bus;
  import hmc_pkg::*;
  localparam int R = 6, C = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  bus_word_t bus_in; logic [2:0] s; logic [6:0] ncol;
  logic [TAGW-1:0] row_grp [R]; logic [TAGW-1:0] row_kr [R]; logic row_act [R];
  logic w_we [R][C]; logic i_we [R][C]; logic [4:0] elem; data_t data;
  int checks = 0, failures = 0;

  noc_bus #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  initial begin repeat (200000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    bus_word_t sent;
    int hits;
    bus_in = '0; s = 1; ncol = 3;
    // rows 0-2: group 0, kr 0..2; rows 3-4: group 1, kr 0..1; row 5 idle
    for (int r = 0; r < R; r++) begin
      row_grp[r] = (r < 3) ? 0 : 1;
      row_kr[r]  = (r < 3) ? TAGW'(r) : TAGW'(r - 3);
      row_act[r] = (r < 5);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      if (n == 200) s = 2;
      sent = '0;
      sent.kind  = bus_kind_e'($urandom_range(2));
      sent.tag_a = TAGW'($urandom_range(R));
      sent.tag_b = TAGW'($urandom_range(8));
      sent.elem  = 5'($urandom_range(31));
      sent.data  = data_t'($urandom);
      bus_in = sent;
      @(negedge clk);
      bus_in = '0;
      hits = 0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        bit ew, ei;
        ew = (sent.kind == BUS_WEIGHT) && (int'(sent.tag_a) == r) && (r < 5);
        ei = (sent.kind == BUS_IFMAP) && (r < 5) && (c < 3) &&
             (int'(sent.tag_a) == ((r < 3) ? 0 : 1)) &&
             (int'(sent.tag_b) == ((r < 3) ? r : r - 3) + c * int'(s));
        checks++;
        if (w_we[r][c] !== ew || i_we[r][c] !== ei) begin
          failures++;
          if (failures < 5) $display("n=%0d r=%0d c=%0d w %0b/%0b i %0b/%0b", n, r, c, w_we[r][c], ew, i_we[r][c], ei);
        end
        hits += int'(w_we[r][c]) + int'(i_we[r][c]);
      end
      checks++;
      if (elem !== sent.elem || data !== sent.data) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
