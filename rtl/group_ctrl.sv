// group_ctrl: controller of one group of identical cores.
//
// In the multi-core chip, the cores of one type form a group that shares
// one controller and one DRAM channel; each core moves its data to and from
// DRAM through its own global buffer. This block is that shared access
// point: it arbitrates the cores' word requests onto the DRAM port and
// routes read data back to the core that asked for it. Because layers of
// one network are spread over the cores of a group (model parallelism),
// one core's output written to DRAM is the next core's input; the shared
// port is what makes that hand-over possible.
//
// Only the controller's position in the chip is published; how it works
// is this design's choice:
//   * round-robin arbitration among requesting cores, one word per grant;
//     a grant is held while the DRAM port keeps ready low, so the request
//     the DRAM sees stays stable;
//   * DRAM read data return in request order, so a FIFO of requester
//     numbers (RD_FIFO entries) routes each response; reads stop being
//     granted while that FIFO is full.
// Each core's request side is valid/ready; its response is a valid pulse.
// The read data word itself is broadcast: every core's rsp.rdata is wired
// straight to dram_rsp.rdata, and only the valid bit says whose it is.
module group_ctrl
  import hmc_pkg::*;
#(
  parameter int unsigned NCORES  = 3,
  parameter int unsigned RD_FIFO = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  dram_req_t  core_req   [NCORES],
  output logic       core_ready [NCORES],
  output dram_rsp_t  core_rsp   [NCORES],
  output dram_req_t  dram_req,
  input  logic       dram_req_ready,
  input  dram_rsp_t  dram_rsp
);
  localparam int unsigned IW = (NCORES > 1) ? $clog2(NCORES) : 1;
  localparam int unsigned FW = $clog2(RD_FIFO);

  logic [IW-1:0] ptr;          // round-robin start point
  logic [IW-1:0] gnt;          // granted core
  logic          gnt_v;
  logic          locked;
  logic [IW-1:0] lock_id;

  // read-ID FIFO
  logic [IW-1:0] fifo [RD_FIFO];
  logic [FW:0]   cnt;
  logic [FW-1:0] wp, rp;
  logic          full;
  assign full = (cnt == (FW+1)'(RD_FIFO));

  // arbitration
  always_comb begin
    int unsigned id;
    id    = 0;
    gnt   = lock_id;
    gnt_v = 1'b0;
    if (locked) begin
      gnt_v = 1'b1;
    end else begin
      for (int n = NCORES - 1; n >= 0; n--) begin
        id = (int'(ptr) + n) % NCORES;
        if (core_req[id].valid && (core_req[id].we || !full)) begin
          gnt   = IW'(id);
          gnt_v = 1'b1;
        end
      end
    end
  end

  always_comb begin
    dram_req = '0;
    if (gnt_v) dram_req = core_req[gnt];
    for (int n = 0; n < NCORES; n++) begin
      core_ready[n]     = gnt_v && (IW'(n) == gnt) && dram_req_ready;
      core_rsp[n].valid = dram_rsp.valid && (fifo[rp] == IW'(n)) && (cnt != '0);
      core_rsp[n].rdata = dram_rsp.rdata;
    end
  end

  logic push, pop;
  assign push = dram_req.valid && dram_req_ready && !dram_req.we;
  assign pop  = dram_rsp.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr     <= '0;
      locked  <= 1'b0;
      lock_id <= '0;
      cnt     <= '0;
      wp      <= '0;
      rp      <= '0;
    end else begin
      if (dram_req.valid && !dram_req_ready) begin
        locked  <= 1'b1;
        lock_id <= gnt;
      end else begin
        locked  <= 1'b0;
      end
      if (dram_req.valid && dram_req_ready)
        ptr <= (gnt == IW'(NCORES - 1)) ? '0 : gnt + 1'b1;
      if (push) begin
        fifo[wp] <= gnt;
        wp       <= (wp == FW'(RD_FIFO - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == FW'(RD_FIFO - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  a_no_orphan_rsp: assert property (@(posedge clk) disable iff (!rst_n)
                                    dram_rsp.valid |-> cnt != '0);
endmodule
