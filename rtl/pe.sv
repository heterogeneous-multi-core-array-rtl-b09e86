// pe: row-stationary processing element.
//
// Under the row-stationary dataflow a PE holds one filter row and one ifmap
// row in its scratch pads and computes their 1-D convolution, a row of
// partial sums. The PEs of one array column then add their psum rows
// together, which yields one output row of a 2-D convolution (summed over
// all channels stacked in the column's band).
//
// Operation (this design's choice of sequencing; the description gives only
// the dataflow):
//   load     w_we / i_we write the weight and ifmap RFs at address elem.
//   compute  after start, for e = 0..eout-1 and k = 0..kw-1:
//              psum[e] += w[k] * x[e*s + k]
//            one MAC per cycle, so it takes eout*kw cycles.
//   stream   the PE then sends its psum row upward, one element per cycle.
//            A PE with chain=0 (bottom row of its band) sends psum[j]; a PE
//            with chain=1 waits for the stream from the PE below and sends
//            psum_in + psum[j]. A PE with top=1 (top row of its band) also
//            writes the sum back into its own psum RF, where the
//            controller later reads it through rd_idx / rd_data.
//   done     goes high when the stream has passed and stays high until the
//            next start.
// rd_idx selects the psum RF word while the PE is not streaming.
module pe
  import hmc_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // pass configuration (held stable during a pass)
  input  logic [3:0]              kw,
  input  logic [2:0]              s,
  input  logic [4:0]              eout,
  input  logic                    chain,
  input  logic                    top,
  // load from the NoC
  input  logic                    w_we,
  input  logic                    i_we,
  input  logic [4:0]              elem,     // RF address (bit 4 unused: RFs hold <= 16 words)
  input  data_t                   data,
  // control
  input  logic                    start,
  output logic                    done,
  // vertical psum stream
  input  logic                    psum_in_valid,
  input  psum_t                   psum_in,
  output logic                    psum_out_valid,
  output psum_t                   psum_out,
  // psum RF read-out for the controller
  input  logic [$clog2(PRF)-1:0]  rd_idx,
  output psum_t                   rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_MAC, S_STREAM} state_e;
  state_e state;

  logic [3:0] k;
  logic [4:0] e, xb, j;

  // scratch pads
  data_t w_rd, x_rd;
  psum_t p_rd, p_wdata;
  logic  p_we;
  logic [$clog2(PRF)-1:0] p_waddr, p_raddr;
  logic [4:0] x_addr;

  assign x_addr = xb + 5'(k);

  pe_rf #(.WIDTH(DW), .DEPTH(KMAX)) u_wrf (
    .clk, .we(w_we), .waddr(elem[$clog2(KMAX)-1:0]), .wdata(data),
    .raddr(k[$clog2(KMAX)-1:0]), .rdata(w_rd));
  pe_rf #(.WIDTH(DW), .DEPTH(IRF)) u_irf (
    .clk, .we(i_we), .waddr(elem[$clog2(IRF)-1:0]), .wdata(data),
    .raddr(x_addr[$clog2(IRF)-1:0]), .rdata(x_rd));
  pe_rf #(.WIDTH(PW), .DEPTH(PRF)) u_prf (
    .clk, .we(p_we), .waddr(p_waddr), .wdata(p_wdata),
    .raddr(p_raddr), .rdata(p_rd));

  // MAC
  logic  mac_en, mac_clr;
  psum_t acc, acc_next;
  assign mac_en  = (state == S_MAC);
  assign mac_clr = (k == 4'd0);
  mac u_mac (.clk, .rst_n, .en(mac_en), .clr(mac_clr), .a(w_rd), .b(x_rd),
             .acc, .acc_next);

  // stream step: a bottom PE steps every cycle, a chained PE on psum_in_valid
  logic  step;
  psum_t sum;
  assign step = (state == S_STREAM) && (!chain || psum_in_valid);
  assign sum  = (chain ? psum_in : psum_t'(0)) + p_rd;

  always_comb begin
    p_raddr = (state == S_STREAM) ? j[$clog2(PRF)-1:0] : rd_idx;
    p_we    = 1'b0;
    p_waddr = e[$clog2(PRF)-1:0];
    p_wdata = acc_next;
    if (state == S_MAC && k == kw - 4'd1) begin
      p_we = 1'b1;                       // last MAC of output e
    end else if (step && top) begin
      p_we    = 1'b1;                    // band total back into the top PE
      p_waddr = j[$clog2(PRF)-1:0];
      p_wdata = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      k              <= '0;
      e              <= '0;
      xb             <= '0;
      j              <= '0;
      done           <= 1'b0;
      psum_out_valid <= 1'b0;
      psum_out       <= '0;
    end else begin
      psum_out_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_MAC;
            k     <= '0;
            e     <= '0;
            xb    <= '0;
            done  <= 1'b0;
          end
        end
        S_MAC: begin
          if (k == kw - 4'd1) begin
            k  <= '0;
            e  <= e + 5'd1;
            xb <= xb + 5'(s);
            if (e == eout - 5'd1) begin
              state <= S_STREAM;
              j     <= '0;
            end
          end else begin
            k <= k + 4'd1;
          end
        end
        S_STREAM: begin
          if (step) begin
            psum_out_valid <= 1'b1;
            psum_out       <= sum;
            j              <= j + 5'd1;
            if (j == eout - 5'd1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rd_data = p_rd;

  // configuration limits of one pass
  a_kw:   assert property (@(posedge clk) disable iff (!rst_n)
                           start |-> (kw != 0 && 32'(kw) <= KMAX));
  a_eout: assert property (@(posedge clk) disable iff (!rst_n)
                           start |-> (eout != 0 && 32'(eout) <= PRF));
endmodule
