// hmc_top: heterogeneous multi-core DNN accelerator.
//
// No single array configuration is near-optimal in energy-delay product for
// every network, so the chip carries two kinds of array-based core and runs
// each network on the kind that suits it:
//   group A: NA = 3 cores with a 32x32 PE array, 54 KB psum buffer and
//            54 KB ifmap buffer (AlexNet, DenseNet and ResNet families);
//   group B: NB = 4 cores with a 12x14 PE array, 216 KB psum buffer and
//            54 KB ifmap buffer (VGG, MobileNet, NASNet, Xception).
// Inception networks are near-optimal on either kind. Within a group the
// layers of one network are split into consecutive runs, one run per core
// (pipelined model parallelism); each core writes its layer outputs to
// DRAM and the next core reads them from there. The layer split is worked
// out off-chip.
//
// Each group has its own controller (group_ctrl) and its own DRAM channel.
// The cores' command ports are brought out as arrays; a host or sequencer
// outside this block issues the commands. The weight buffer size (W_WORDS)
// is this design's choice; the other sizes are the published ones.
module hmc_top
  import hmc_pkg::*;
#(
  parameter int unsigned NA         = 3,
  parameter int unsigned A_ROWS     = 32,
  parameter int unsigned A_COLS     = 32,
  parameter int unsigned A_IF_WORDS = 27648,   // 54 KB / 2 B
  parameter int unsigned A_PS_WORDS = 13824,   // 54 KB / 4 B
  parameter int unsigned NB         = 4,
  parameter int unsigned B_ROWS     = 12,
  parameter int unsigned B_COLS     = 14,
  parameter int unsigned B_IF_WORDS = 27648,   // 54 KB / 2 B
  parameter int unsigned B_PS_WORDS = 55296,   // 216 KB / 4 B
  parameter int unsigned W_WORDS    = 2048     // 4 KB / 2 B (assumed)
) (
  input  logic       clk,
  input  logic       rst_n,
  // group A commands
  input  logic       a_cmd_valid [NA],
  output logic       a_cmd_ready [NA],
  input  core_cmd_t  a_cmd       [NA],
  output logic       a_cmd_done  [NA],
  // group B commands
  input  logic       b_cmd_valid [NB],
  output logic       b_cmd_ready [NB],
  input  core_cmd_t  b_cmd       [NB],
  output logic       b_cmd_done  [NB],
  // DRAM channel of group A
  output dram_req_t  a_dram_req,
  input  logic       a_dram_req_ready,
  input  dram_rsp_t  a_dram_rsp,
  // DRAM channel of group B
  output dram_req_t  b_dram_req,
  input  logic       b_dram_req_ready,
  input  dram_rsp_t  b_dram_rsp
);
  dram_req_t a_req [NA];
  logic      a_rdy [NA];
  dram_rsp_t a_rsp [NA];
  dram_req_t b_req [NB];
  logic      b_rdy [NB];
  dram_rsp_t b_rsp [NB];

  for (genvar n = 0; n < NA; n++) begin : g_a
    array_core #(.ROWS(A_ROWS), .COLS(A_COLS), .IF_WORDS(A_IF_WORDS),
                 .W_WORDS(W_WORDS), .PS_WORDS(A_PS_WORDS)) u_core (
      .clk, .rst_n,
      .cmd_valid(a_cmd_valid[n]), .cmd_ready(a_cmd_ready[n]), .cmd(a_cmd[n]),
      .cmd_done(a_cmd_done[n]),
      .dram_req(a_req[n]), .dram_req_ready(a_rdy[n]), .dram_rsp(a_rsp[n]));
  end

  for (genvar n = 0; n < NB; n++) begin : g_b
    array_core #(.ROWS(B_ROWS), .COLS(B_COLS), .IF_WORDS(B_IF_WORDS),
                 .W_WORDS(W_WORDS), .PS_WORDS(B_PS_WORDS)) u_core (
      .clk, .rst_n,
      .cmd_valid(b_cmd_valid[n]), .cmd_ready(b_cmd_ready[n]), .cmd(b_cmd[n]),
      .cmd_done(b_cmd_done[n]),
      .dram_req(b_req[n]), .dram_req_ready(b_rdy[n]), .dram_rsp(b_rsp[n]));
  end

  group_ctrl #(.NCORES(NA)) u_ctrl_a (
    .clk, .rst_n, .core_req(a_req), .core_ready(a_rdy), .core_rsp(a_rsp),
    .dram_req(a_dram_req), .dram_req_ready(a_dram_req_ready), .dram_rsp(a_dram_rsp));

  group_ctrl #(.NCORES(NB)) u_ctrl_b (
    .clk, .rst_n, .core_req(b_req), .core_ready(b_rdy), .core_rsp(b_rsp),
    .dram_req(b_dram_req), .dram_req_ready(b_dram_req_ready), .dram_rsp(b_dram_rsp));
endmodule
