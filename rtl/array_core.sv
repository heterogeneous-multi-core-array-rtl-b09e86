// array_core: one array-based processing core with its global buffer.
//
// A core is the unit the heterogeneous chip is built from: a PE array, a
// global buffer split into ifmap / weight / psum parts, the bus between
// them and a dataflow controller. It reads its inputs from DRAM and writes
// its outputs to DRAM through its own global buffer. Cores differ only in
// their parameters (array size and buffer sizes).
//
// The controller executes one command at a time (hmc_pkg::core_cmd_t,
// valid/ready handshake on cmd_*; cmd_done pulses when it has finished):
//   OP_LD_IFMAP / OP_LD_WEIGHT / OP_LD_PSUM
//       copy len words from DRAM address dram_addr to the partition at
//       gb_addr. Reads are pipelined: requests keep going out while the
//       responses come back in order.
//   OP_ST_PSUM
//       copy len psum words from gb_addr to DRAM (spilling psums that do
//       not fit the psum buffer, or writing a finished layer).
//   OP_RUN (one pass, see hmc_pkg::pass_t), band by band:
//       1. put the band's filter rows on the bus, one weight per cycle,
//          from w_base onward (row-major: row of the band, then element);
//       2. put the band's ifmap rows on the bus, one element per cycle,
//          from i_base onward (channel group, then row, then element);
//          each group has kh + (ncol-1)*s rows of win elements;
//       3. start the band only when all its data is in its PEs, and go on
//          loading the next band while it computes;
//       when every band has finished, read the outputs from the top PE of
//       each band (band, column, element order) into the psum buffer from
//       p_base onward; with acc=1 each output is added to the word already
//       there (read-modify-write, two cycles per word, otherwise one).
// The split of work into passes and commands (tiling, and which psums to
// spill) is decided off-chip by the schedule; the core only executes it.
module array_core
  import hmc_pkg::*;
#(
  parameter int unsigned ROWS     = 32,
  parameter int unsigned COLS     = 32,
  parameter int unsigned IF_WORDS = 27648,
  parameter int unsigned W_WORDS  = 2048,
  parameter int unsigned PS_WORDS = 13824
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  core_cmd_t  cmd,
  output logic       cmd_done,
  output dram_req_t  dram_req,
  input  logic       dram_req_ready,
  input  dram_rsp_t  dram_rsp
);
  typedef enum logic [3:0] {
    C_IDLE, C_LOAD, C_ST_RD, C_ST_WR, C_LD_W, C_LD_I, C_BAND_WAIT,
    C_WAIT_DONE, C_DR_RD, C_DR_WR, C_FINISH
  } cstate_e;

  cstate_e          st;
  core_cmd_t        c;
  pass_t            p;
  logic [GBAW-1:0]  rq, rs, i;          // DMA counters
  logic [GBAW-1:0]  wptr, iptr, gaddr;  // running weight / ifmap / psum offsets
  logic [GBAW-1:0]  rpb;                // rows per band
  logic [TAGW-1:0]  nidx;               // ifmap rows per channel group
  logic [5:0]       band;
  logic [TAGW-1:0]  row, brow, grp, bgrp, idx;
  logic [4:0]       el;
  logic [1:0]       wait_cnt;
  logic [6:0]       dcol;
  logic [4:0]       dix;
  logic             started;

  // ---- global buffer ------------------------------------------------------
  logic            if_en, if_we, w_en, w_we, ps_en, ps_we;
  logic [GBAW-1:0] if_addr, w_addr, ps_addr;
  data_t           if_wdata, w_wdata, if_rdata, w_rdata;
  psum_t           ps_wdata, ps_rdata;

  global_buffer #(.IF_WORDS(IF_WORDS), .W_WORDS(W_WORDS), .PS_WORDS(PS_WORDS)) u_gb (
    .clk,
    .if_en, .if_we, .if_addr, .if_wdata, .if_rdata,
    .w_en,  .w_we,  .w_addr,  .w_wdata,  .w_rdata,
    .ps_en, .ps_we, .ps_addr, .ps_wdata, .ps_rdata);

  // ---- array ----------------------------------------------------------------
  bus_word_t bus;
  logic      arr_start, all_done;
  psum_t     arr_rd;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .cfg(p), .bus_in(bus), .start(arr_start), .start_band(band),
    .all_done, .rd_band(band), .rd_col(dcol), .rd_idx(dix[$clog2(PRF)-1:0]),
    .rd_data(arr_rd));

  // bus word of the GB read issued last cycle
  logic            rd_w_q, rd_i_q;
  logic [TAGW-1:0] tag_a_q, tag_b_q;
  logic [4:0]      el_q;

  always_comb begin
    bus = '0;
    if (rd_w_q) begin
      bus.kind  = BUS_WEIGHT;
      bus.tag_a = tag_a_q;
      bus.elem  = el_q;
      bus.data  = w_rdata;
    end else if (rd_i_q) begin
      bus.kind  = BUS_IFMAP;
      bus.tag_a = tag_a_q;
      bus.tag_b = tag_b_q;
      bus.elem  = el_q;
      bus.data  = if_rdata;
    end
  end

  // ---- datapath control (combinational) --------------------------------------
  logic last_w, last_i, last_el_w, last_el_i;
  assign last_el_w = (el == 5'(p.kw) - 5'd1);
  assign last_el_i = (el == p.win - 5'd1);
  assign last_w    = last_el_w && (brow == TAGW'(rpb) - TAGW'(1));
  assign last_i    = last_el_i && (idx == nidx - TAGW'(1)) &&
                     (bgrp == TAGW'(p.nch) - TAGW'(1));

  always_comb begin
    if_en = 1'b0; if_we = 1'b0; if_addr = '0; if_wdata = '0;
    w_en  = 1'b0; w_we  = 1'b0; w_addr  = '0; w_wdata  = '0;
    ps_en = 1'b0; ps_we = 1'b0; ps_addr = '0; ps_wdata = '0;
    dram_req  = '0;
    arr_start = 1'b0;
    unique case (st)
      C_LOAD: begin
        dram_req.valid = (rq < c.len);
        dram_req.addr  = c.dram_addr + AW'(rq);
        if (dram_rsp.valid) begin
          unique case (c.op)
            OP_LD_IFMAP:  begin if_en = 1'b1; if_we = 1'b1; if_addr = c.gb_addr + rs;
                                if_wdata = data_t'(dram_rsp.rdata[DW-1:0]); end
            OP_LD_WEIGHT: begin w_en  = 1'b1; w_we  = 1'b1; w_addr  = c.gb_addr + rs;
                                w_wdata  = data_t'(dram_rsp.rdata[DW-1:0]); end
            default:      begin ps_en = 1'b1; ps_we = 1'b1; ps_addr = c.gb_addr + rs;
                                ps_wdata = psum_t'(dram_rsp.rdata); end
          endcase
        end
      end
      C_ST_RD: begin
        ps_en   = 1'b1;
        ps_addr = c.gb_addr + i;
      end
      C_ST_WR: begin
        dram_req.valid = 1'b1;
        dram_req.we    = 1'b1;
        dram_req.addr  = c.dram_addr + AW'(i);
        dram_req.wdata = XW'(ps_rdata);
      end
      C_LD_W: begin
        w_en   = 1'b1;
        w_addr = p.w_base + wptr;
      end
      C_LD_I: begin
        if_en   = 1'b1;
        if_addr = p.i_base + iptr;
      end
      C_BAND_WAIT: arr_start = (wait_cnt == 2'd0);
      C_DR_RD: begin
        ps_en   = 1'b1;
        ps_addr = p.p_base + gaddr;
      end
      C_DR_WR: begin
        ps_en    = 1'b1;
        ps_we    = 1'b1;
        ps_addr  = p.p_base + gaddr;
        ps_wdata = p.acc ? ps_rdata + arr_rd : arr_rd;
      end
      default: ;
    endcase
  end

  assign cmd_ready = (st == C_IDLE);

  // ---- sequencing --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE;
      c <= '0; p <= '0;
      rq <= '0; rs <= '0; i <= '0; gaddr <= '0; wptr <= '0; iptr <= '0; rpb <= '0; nidx <= '0;
      band <= '0; row <= '0; brow <= '0; grp <= '0; bgrp <= '0; idx <= '0;
      el <= '0; wait_cnt <= '0; dcol <= '0; dix <= '0; started <= 1'b0;
      rd_w_q <= 1'b0; rd_i_q <= 1'b0; tag_a_q <= '0; tag_b_q <= '0; el_q <= '0;
      cmd_done <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      rd_w_q   <= (st == C_LD_W);
      rd_i_q   <= (st == C_LD_I);
      tag_a_q  <= (st == C_LD_W) ? row : grp;
      tag_b_q  <= idx;
      el_q     <= el;
      unique case (st)
        C_IDLE: if (cmd_valid) begin
          c  <= cmd;
          p  <= cmd.pass;
          rq <= '0; rs <= '0; i <= '0;
          unique case (cmd.op)
            OP_ST_PSUM: st <= (cmd.len == '0) ? C_FINISH : C_ST_RD;
            OP_RUN: begin
              rpb   <= GBAW'(cmd.pass.kh) * GBAW'(cmd.pass.nch);
              nidx  <= TAGW'(cmd.pass.kh) + TAGW'(cmd.pass.ncol - 7'd1) * TAGW'(cmd.pass.s);
              band  <= '0; row <= '0; brow <= '0; grp <= '0; bgrp <= '0;
              idx   <= '0; el <= '0; wptr <= '0; iptr <= '0;
              st    <= C_LD_W;
            end
            default: st <= (cmd.len == '0) ? C_FINISH : C_LOAD;
          endcase
        end
        C_LOAD: begin
          if (dram_req.valid && dram_req_ready) rq <= rq + 1'b1;
          if (dram_rsp.valid) begin
            rs <= rs + 1'b1;
            if (rs == c.len - 1'b1) st <= C_FINISH;
          end
        end
        C_ST_RD: st <= C_ST_WR;
        C_ST_WR: if (dram_req_ready) begin
          i  <= i + 1'b1;
          st <= (i == c.len - 1'b1) ? C_FINISH : C_ST_RD;
        end
        C_LD_W: begin
          wptr <= wptr + 1'b1;
          if (last_el_w) begin
            el   <= '0;
            row  <= row + 1'b1;
            brow <= brow + 1'b1;
            if (last_w) begin
              brow <= '0;
              st   <= C_LD_I;
            end
          end else begin
            el <= el + 5'd1;
          end
        end
        C_LD_I: begin
          iptr <= iptr + 1'b1;
          if (last_el_i) begin
            el <= '0;
            if (idx == nidx - TAGW'(1)) begin
              idx  <= '0;
              grp  <= grp + 1'b1;
              bgrp <= bgrp + 1'b1;
              if (last_i) begin
                bgrp     <= '0;
                wait_cnt <= 2'd2;
                st       <= C_BAND_WAIT;
              end
            end else begin
              idx <= idx + 1'b1;
            end
          end else begin
            el <= el + 5'd1;
          end
        end
        C_BAND_WAIT: begin
          if (wait_cnt != 2'd0) begin
            wait_cnt <= wait_cnt - 2'd1;
          end else begin
            if (band == p.nband - 6'd1) begin
              st      <= C_WAIT_DONE;
              started <= 1'b0;
            end else begin
              band <= band + 6'd1;
              st   <= C_LD_W;
            end
          end
        end
        C_WAIT_DONE: begin
          started <= 1'b1;               // one cycle for the start to clear done
          if (started && all_done) begin
            band  <= '0; dcol <= '0; dix <= '0; gaddr <= '0;
            st    <= p.acc ? C_DR_RD : C_DR_WR;
          end
        end
        C_DR_RD: st <= C_DR_WR;
        C_DR_WR: begin
          gaddr <= gaddr + 1'b1;
          st    <= p.acc ? C_DR_RD : C_DR_WR;
          if (dix == p.eout - 5'd1) begin
            dix <= '0;
            if (dcol == p.ncol - 7'd1) begin
              dcol <= '0;
              if (band == p.nband - 6'd1) st <= C_FINISH;
              else                        band <= band + 6'd1;
            end else begin
              dcol <= dcol + 7'd1;
            end
          end else begin
            dix <= dix + 5'd1;
          end
        end
        C_FINISH: begin
          cmd_done <= 1'b1;
          st       <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // DRAM request must hold while it waits for ready
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
      dram_req.valid && !dram_req_ready |=> dram_req.valid &&
      $stable(dram_req.addr) && $stable(dram_req.we) && $stable(dram_req.wdata));
endmodule
