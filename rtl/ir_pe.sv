// ir_pe: processing element of the input-reuse accelerator, the consumer side
// of the broadcasting bus.
//
// When the checking engine puts a channel group on the bus, the PE takes it
// (bus_ready is high only while the PE is idle) and walks its local kernels
// k = 0 .. kpp-1, one per cycle. For each kernel it reads one weight word (the
// 3x3 taps of that kernel for this channel group) and updates the nine
// reuse-buffer entries of the kernel in parallel:
//  * STAGE I (full): P += 2*popcount(XNOR(x, w)) - CG, starting from 0 on the
//    pixel's first group: the usual XNOR/popcount dot product.
//  * STAGE II (difference): only the channels in the mask changed, each by
//    +-2 with the sign of its new bit, so
//      P += sum_{c in mask} 2 * (x_c == w_c ? +1 : -1)
//         = 4*popcount(mask & XNOR(x, w)) - 2*popcount(mask).
//    This is the paper's Fig. 2 update (for instance +4, -4, +0 there).
// The nine taps in parallel are the paper's "extended to 3x3 kernels using
// parallelism"; the one-kernel-per-cycle schedule is this design's choice.
//
// Timing: a word is accepted in one cycle, then kpp weight reads are issued
// on consecutive cycles; each result is written one cycle after its read, and
// bus_ready returns once the last write is done: kpp + 2 cycles per word.
// bit_ops counts the XNOR bit operations actually done (9*CG per kernel in
// STAGE I, 9*popcount(mask) in STAGE II); clr_count clears it.
module ir_pe
  import bnn_pkg::*;
#(
  parameter int unsigned KPP_MAX = 64,
  parameter int unsigned KW      = $clog2(KPP_MAX),
  parameter int unsigned WB_AW   = $clog2(KPP_MAX * CGRP_MAX)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [KPP_W-1:0]                 kpp,
  input  logic                             bus_valid,
  input  bcast_t                           bus,
  output logic                             bus_ready,
  output logic                             wb_rd_en,
  output logic [WB_AW-1:0]                 wb_rd_addr,
  input  logic [WB_W-1:0]                  wb_rd_data,
  output logic [KW-1:0]                    rb_rd_k,
  input  logic signed [NTAP-1:0][RB_W-1:0] rb_rd_data,
  output logic                             rb_we,
  output logic [KW-1:0]                    rb_wk,
  output logic signed [NTAP-1:0][RB_W-1:0] rb_wdata,
  input  logic                             clr_count,
  output logic [CNT_W-1:0]                 bit_ops
);
  typedef enum logic [1:0] {P_IDLE, P_RUN, P_DRAIN} state_e;
  state_e      state;
  bcast_t      cur;
  logic [KW:0] k;
  logic [KW-1:0] k_d;
  logic        v_d;
  localparam int unsigned PCW = $clog2(CG + 1);
  logic [PCW-1:0] pop_mask;

  assign bus_ready  = (state == P_IDLE);
  assign wb_rd_en   = (state == P_RUN);
  assign wb_rd_addr = WB_AW'({k[KW-1:0], cur.grp[$clog2(CGRP_MAX)-1:0]});
  assign rb_rd_k    = k_d;
  assign rb_we      = v_d;
  assign rb_wk      = k_d;
  assign pop_mask   = popcount_cg(cur.mask);

  logic [CG-1:0]          eq   [NTAP];
  logic signed [RB_W-1:0] base [NTAP];

  always_comb begin
    for (int j = 0; j < NTAP; j++) begin
      eq[j]   = ~(cur.data ^ wb_rd_data[j*CG +: CG]);
      base[j] = (cur.full && cur.first) ? '0 : rb_rd_data[j];
      if (cur.full)
        rb_wdata[j] = base[j] + RB_W'(2 * popcount_cg(eq[j])) - RB_W'(CG);
      else
        rb_wdata[j] = base[j] + RB_W'(4 * popcount_cg(cur.mask & eq[j]))
                              - RB_W'(2 * pop_mask);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= P_IDLE;
      cur     <= '0;
      k       <= '0;
      k_d     <= '0;
      v_d     <= 1'b0;
      bit_ops <= '0;
    end else begin
      v_d <= 1'b0;
      if (clr_count) bit_ops <= '0;
      else if (v_d)  bit_ops <= bit_ops + (cur.full ? CNT_W'(NTAP * CG)
                                                    : CNT_W'(NTAP * pop_mask));
      unique case (state)
        P_IDLE: if (bus_valid) begin
          cur   <= bus;
          k     <= '0;
          state <= (kpp == '0) ? P_IDLE : P_RUN;
        end
        P_RUN: begin
          k_d <= k[KW-1:0];
          v_d <= 1'b1;
          k   <= k + 1'b1;
          if (k + 1'b1 >= (KW+1)'(kpp)) state <= P_DRAIN;
        end
        P_DRAIN: state <= P_IDLE;
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
