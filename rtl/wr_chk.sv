// wr_chk: checking engine (Chk) of the weight-reuse accelerator, with the
// weight base.
//
// Kernels are processed in an offline-optimized order. The first kernel is
// stored in the weight buffer with its real +-1 bits; every later kernel is
// stored as a same (0) / different (1) mask against the kernel before it in
// the order. The engine keeps the real bits
// of the latest kernel, the weight base, one 144-bit word (9 taps x CG
// channels) per channel group. For each kernel slot it walks the channel
// groups:
//  * first kernel (full_i): the word is broadcast as is (full = 1)
//    and becomes the base;
//  * later kernels: an all-zero mask word is skipped (no broadcast, no PE
//    work); otherwise the new weights base ^ mask and the mask itself are
//    broadcast (full = 0) and the base is updated.
// Because the masks are precomputed offline the engine needs no subtraction,
// only the XOR that recovers the real weights; both follow the paper. The
// group-wise skip and the bus format are this design's choices.
//
// Bus handshake: bus_valid / bus_ready, word held while not accepted
// (asserted). done pulses when the last group of the slot is sent or skipped.
// Timing: 2 cycles per skipped group, 2 cycles plus the PEs' wait per sent one.
module wr_chk
  import bnn_pkg::*;
#(
  parameter int unsigned WB_AW = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             full_i,
  input  logic [WB_AW-1:0] base_i,
  input  logic [GRP_W-1:0] cgrp_i,
  output logic             wb_rd_en,
  output logic [WB_AW-1:0] wb_rd_addr,
  input  logic [WB_W-1:0]  wb_rd_data,
  output logic             bus_valid,
  output wbcast_t          bus,
  input  logic             bus_ready,
  output logic             done,
  output logic             ev_full,
  output logic             ev_diff,
  output logic             ev_skip
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_EV, S_SEND} state_e;
  state_e           state;
  logic [WB_W-1:0]  wbase [CGRP_MAX];
  logic [GRP_W-1:0] g, cgrp;
  logic [WB_AW-1:0] base;
  logic             full;
  logic             last_g;
  logic [$clog2(CGRP_MAX)-1:0] gi;

  assign gi         = g[$clog2(CGRP_MAX)-1:0];
  assign last_g     = (g == cgrp - 1'b1);
  assign wb_rd_en   = (state == S_RD);
  assign wb_rd_addr = base + WB_AW'(g);
  assign bus_valid  = (state == S_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      g       <= '0;
      cgrp    <= '0;
      base    <= '0;
      full    <= 1'b0;
      bus     <= '0;
      done    <= 1'b0;
      ev_full <= 1'b0;
      ev_diff <= 1'b0;
      ev_skip <= 1'b0;
      for (int i = 0; i < CGRP_MAX; i++) wbase[i] <= '0;
    end else begin
      done    <= 1'b0;
      ev_full <= 1'b0;
      ev_diff <= 1'b0;
      ev_skip <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          g     <= '0;
          cgrp  <= cgrp_i;
          base  <= base_i;
          full  <= full_i;
          state <= S_RD;
        end
        S_RD: state <= S_EV;
        S_EV: begin
          if (full || wb_rd_data != '0) begin
            wbase[gi] <= full ? wb_rd_data : (wbase[gi] ^ wb_rd_data);
            bus.full  <= full;
            bus.first <= (g == '0);
            bus.grp   <= g;
            bus.data  <= full ? wb_rd_data : (wbase[gi] ^ wb_rd_data);
            bus.mask  <= full ? '1 : wb_rd_data;
            ev_full   <= full;
            ev_diff   <= !full;
            state     <= S_SEND;
          end else begin
            ev_skip <= 1'b1;
            if (last_g) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              g     <= g + 1'b1;
              state <= S_RD;
            end
          end
        end
        S_SEND: if (bus_ready) begin
          if (last_g) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            g     <= g + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_bus_stable: assert property (@(posedge clk) disable iff (!rst_n)
    bus_valid && !bus_ready |=> bus_valid && $stable(bus));
endmodule
