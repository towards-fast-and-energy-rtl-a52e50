// bnn_accel: top level holding both binarized-convolution accelerators of the
// design, the input-reuse one (bnn_ir_accel) and the weight-reuse one
// (bnn_wr_accel), behind one load / run / read-back interface.
//
// The paper presents the two data-reuse strategies as two accelerators that
// share the checking-engine / broadcasting-bus / PE structure. Here both are
// built side by side and the host picks one per layer with the mode input
// (0 = input reuse, 1 = weight reuse), held from before start until done.
// Loads, start and read-backs go only to the selected accelerator; busy,
// done, rd_data and stats come from it. Having both in one top, and the mode
// switch, are this design's own choices. The host lays out data for the
// selected one (see the two accelerators' interface notes); data does not
// move between them.
//
// Ports: plain signals and the bnn_pkg structs. Timing as in the two
// accelerators: rd_data one cycle after rd_en.
module bnn_accel
  import bnn_pkg::*;
#(
  parameter int unsigned NPE  = 8,
  parameter int unsigned PE_W = $clog2(NPE)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mode,
  input  logic              ld_en,
  input  ld_tgt_e           ld_tgt,
  input  logic [PE_W-1:0]   ld_pe,
  input  logic [LD_AW-1:0]  ld_addr,
  input  logic [WB_W-1:0]   ld_data,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  input  logic              rd_en,
  input  logic              rd_buf,
  input  logic [PE_W-1:0]   rd_pe,
  input  logic [LD_AW-1:0]  rd_addr,
  output logic [CG-1:0]     rd_data,
  output stats_t            stats
);
  logic          ir_busy, ir_done, wr_busy, wr_done, rd_sel;
  logic [CG-1:0] ir_rd_data, wr_rd_data;
  stats_t        ir_stats, wr_stats;

  bnn_ir_accel #(.NPE(NPE), .PE_W(PE_W)) u_ir (
    .clk, .rst_n, .ld_en(ld_en && !mode), .ld_tgt, .ld_pe, .ld_addr, .ld_data,
    .start(start && !mode), .cfg, .busy(ir_busy), .done(ir_done),
    .rd_en(rd_en && !mode), .rd_buf, .rd_addr, .rd_data(ir_rd_data), .stats(ir_stats)
  );

  bnn_wr_accel #(.NPE(NPE), .PE_W(PE_W)) u_wr (
    .clk, .rst_n, .ld_en(ld_en && mode), .ld_tgt, .ld_pe, .ld_addr, .ld_data,
    .start(start && mode), .cfg, .busy(wr_busy), .done(wr_done),
    .rd_en(rd_en && mode), .rd_buf, .rd_pe, .rd_addr, .rd_data(wr_rd_data),
    .stats(wr_stats)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_sel <= 1'b0;
    else if (rd_en) rd_sel <= mode;
  end

  assign busy    = mode ? wr_busy  : ir_busy;
  assign done    = mode ? wr_done  : ir_done;
  assign stats   = mode ? wr_stats : ir_stats;
  assign rd_data = rd_sel ? wr_rd_data : ir_rd_data;

  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (ir_busy || wr_busy) |-> $stable(mode));
endmodule
