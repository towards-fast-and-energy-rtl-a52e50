// ir_chk: checking engine (Chk) of the input-reuse accelerator, the producer
// side of the broadcasting bus.
//
// For each input pixel the controller starts it once. The engine walks the
// pixel's channel groups (CG channels each), reads each group from the data
// buffer and compares it bit by bit with the same group of the previous pixel
// of the row, which it keeps in a register file. Comparing +-1 values for
// equality is the paper's "C-by-C subtraction": a differing channel has
// difference +2 or -2, whose sign is given by the new bit, so the bus carries
// the new bits plus a mask of differing channels.
//  * STAGE I (full_i = 1, first pixel of a row): every group is broadcast with
//    full = 1 and the PEs compute the dot products with XNOR/popcount.
//  * STAGE II (full_i = 0): a group whose mask is all zero is skipped: no bus
//    transfer, no weight read, no PE cycle. Other groups go out with full = 0.
// The per-group skip and the mask are this design's reading of the paper's
// "once the checking is failed, the Chk will broadcast the subtraction result".
//
// Bus handshake: bus_valid / bus_ready; the word is held stable while
// bus_valid is high and bus_ready low (asserted below). done pulses once all
// groups of the pixel have been sent or skipped.
// Timing: 2 cycles per skipped group, 2 cycles plus the PEs' wait per sent one.
module ir_chk
  import bnn_pkg::*;
#(
  parameter int unsigned DB_AW = 13
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             full_i,
  input  logic [DB_AW-1:0] base_i,
  input  logic [GRP_W-1:0] cgrp_i,
  output logic             db_rd_en,
  output logic [DB_AW-1:0] db_rd_addr,
  input  logic [CG-1:0]    db_rd_data,
  output logic             bus_valid,
  output bcast_t           bus,
  input  logic             bus_ready,
  output logic             done,
  output logic             ev_full,
  output logic             ev_diff,
  output logic             ev_skip
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_EV, S_SEND} state_e;
  state_e           state;
  logic [CG-1:0]    prev [CGRP_MAX];
  logic [GRP_W-1:0] g, cgrp;
  logic [DB_AW-1:0] base;
  logic             full;
  logic [CG-1:0]    mask;
  logic             last_g;

  assign mask       = full ? '1 : (db_rd_data ^ prev[g[$clog2(CGRP_MAX)-1:0]]);
  assign last_g     = (g == cgrp - 1'b1);
  assign db_rd_en   = (state == S_RD);
  assign db_rd_addr = base + DB_AW'(g);
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
      for (int i = 0; i < CGRP_MAX; i++) prev[i] <= '0;
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
          prev[g[$clog2(CGRP_MAX)-1:0]] <= db_rd_data;
          if (full || mask != '0) begin
            bus.full  <= full;
            bus.first <= (g == '0);
            bus.grp   <= g;
            bus.data  <= db_rd_data;
            bus.mask  <= mask;
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

  // The bus word may not change while it waits for the PEs.
  a_bus_stable: assert property (@(posedge clk) disable iff (!rst_n)
    bus_valid && !bus_ready |=> bus_valid && $stable(bus));
endmodule
