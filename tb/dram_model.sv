// dram_model: behavioural model of an off-chip DRAM channel (testbench only).
//
// Word-addressed memory of WORDS 32-bit words (the address wraps). It
// accepts one request per cycle when ready is high; ready is dropped at
// random (about one cycle in STALL_PCT percent) to exercise back-pressure.
// Read data come back in request order exactly LAT cycles after the request
// was accepted. Writes take effect when accepted.
module dram_model
  import hmc_pkg::*;
#(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dram_req_t req,
  output logic      ready,
  output dram_rsp_t rsp
);
  logic [XW-1:0] mem [WORDS];
  logic          pv [LAT];
  logic [XW-1:0] pd [LAT];
  int unsigned   reads, writes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready  <= 1'b0;
      reads  <= 0;
      writes <= 0;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      ready <= ($urandom_range(99) >= STALL_PCT);
      for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= 1'b0;
      if (req.valid && ready) begin
        if (req.we) begin
          mem[req.addr % WORDS] <= req.wdata;
          writes <= writes + 1;
        end else begin
          pv[0] <= 1'b1;
          pd[0] <= mem[req.addr % WORDS];
          reads <= reads + 1;
        end
      end
    end
  end

  assign rsp.valid = pv[LAT-1];
  assign rsp.rdata = pd[LAT-1];
endmodule
