// wr_pe: processing element of the weight-reuse accelerator.
//
// The PE holds some rows of the input map in its own data buffers. When the
// checking engine broadcasts a channel group of the current kernel (real
// weights for all nine taps, plus the mask of weights that changed from the
// previous kernel), the PE walks its npix local pixels, one per cycle: it
// reads the pixel's CG input bits and updates the pixel's nine reuse-buffer
// entries (one per tap (r, s)) in parallel:
//  * full word (first kernel of the layer): P = [0 on the first group] + P
//    + 2*popcount(XNOR(x, w_tap)) - CG;
//  * difference word: only masked weights changed sign, so
//    P += 4*popcount(mask_tap & XNOR(x, w_tap)) - 2*popcount(mask_tap).
// This is the input-reuse update with the roles of input and weight swapped,
// as the paper describes the weight-reuse accelerator ("a symmetric version").
//
// Local pixel p is row p / W, column p % W of the PE's rows; its group g is at
// data-buffer address p * cgrp + g. Timing: accept, npix reads on consecutive
// cycles, last write, then idle again: npix + 2 cycles per word.
// bit_ops counts XNOR bit operations actually done.
module wr_pe
  import bnn_pkg::*;
#(
  parameter int unsigned NPIX_MAX = 128,
  parameter int unsigned PW_      = $clog2(NPIX_MAX),
  parameter int unsigned DB_AW    = 10
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [PW_:0]                     npix,
  input  logic [GRP_W-1:0]                 cgrp,
  input  logic                             bus_valid,
  input  wbcast_t                          bus,
  output logic                             bus_ready,
  output logic                             db_rd_en,
  output logic [DB_AW-1:0]                 db_rd_addr,
  input  logic [CG-1:0]                    db_rd_data,
  output logic [PW_-1:0]                   rb_rd_k,
  input  logic signed [NTAP-1:0][RB_W-1:0] rb_rd_data,
  output logic                             rb_we,
  output logic [PW_-1:0]                   rb_wk,
  output logic signed [NTAP-1:0][RB_W-1:0] rb_wdata,
  input  logic                             clr_count,
  output logic [CNT_W-1:0]                 bit_ops
);
  typedef enum logic [1:0] {P_IDLE, P_RUN, P_DRAIN} state_e;
  state_e         state;
  wbcast_t        cur;
  logic [PW_:0]   p;
  logic [PW_-1:0] p_d;
  logic           v_d;
  logic [DB_AW-1:0] addr;
  localparam int unsigned PCW = $clog2(CG + 1);

  logic [CG-1:0]          eq    [NTAP];
  logic [PCW-1:0]         pm    [NTAP];
  logic signed [RB_W-1:0] basev [NTAP];
  logic [CNT_W-1:0]       ops_diff;

  assign bus_ready  = (state == P_IDLE);
  assign db_rd_en   = (state == P_RUN);
  assign db_rd_addr = addr;
  assign rb_rd_k    = p_d;
  assign rb_we      = v_d;
  assign rb_wk      = p_d;

  always_comb begin
    ops_diff = '0;
    for (int j = 0; j < NTAP; j++) begin
      eq[j]    = ~(db_rd_data ^ cur.data[j*CG +: CG]);
      pm[j]    = popcount_cg(cur.mask[j*CG +: CG]);
      basev[j] = (cur.full && cur.first) ? '0 : rb_rd_data[j];
      ops_diff += CNT_W'(pm[j]);
      if (cur.full)
        rb_wdata[j] = basev[j] + RB_W'(2 * popcount_cg(eq[j])) - RB_W'(CG);
      else
        rb_wdata[j] = basev[j] + RB_W'(4 * popcount_cg(cur.mask[j*CG +: CG] & eq[j]))
                               - RB_W'(2 * pm[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= P_IDLE;
      cur     <= '0;
      p       <= '0;
      p_d     <= '0;
      v_d     <= 1'b0;
      addr    <= '0;
      bit_ops <= '0;
    end else begin
      v_d <= 1'b0;
      if (clr_count) bit_ops <= '0;
      else if (v_d)  bit_ops <= bit_ops + (cur.full ? CNT_W'(NTAP * CG) : ops_diff);
      unique case (state)
        P_IDLE: if (bus_valid) begin
          cur   <= bus;
          p     <= '0;
          addr  <= DB_AW'(bus.grp);
          state <= (npix == '0) ? P_IDLE : P_RUN;
        end
        P_RUN: begin
          p_d  <= p[PW_-1:0];
          v_d  <= 1'b1;
          p    <= p + 1'b1;
          addr <= addr + DB_AW'(cgrp);
          if (p + 1'b1 >= npix) state <= P_DRAIN;
        end
        P_DRAIN: state <= P_IDLE;
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
