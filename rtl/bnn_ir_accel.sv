// bnn_ir_accel: input-reuse accelerator for binarized 3x3 convolution layers.
//
// Adjacent pixels of a binarized feature map are mostly equal, so the dot
// products of pixel (h, w) with every kernel tap differ from those of pixel
// (h, w-1) only by the channels that changed. The checking engine compares
// each pixel with its left neighbour and broadcasts only the changed channel
// groups to NPE processing elements; each PE owns K/NPE kernels (weight bank,
// reuse buffer of 9 partial sums per kernel, OA bank) and corrects its stored
// partial sums from the difference instead of recomputing them. After each
// pixel a shared address generator scatters the nine partial sums of every
// kernel into the ofmap positions they belong to, where the OA banks
// accumulate them. At the end of the layer the batch-normalization engine
// binarizes (threshold compare), optionally 2x2-pools (AND), and writes the
// next layer's input into the second data buffer (ping-pong A/B).
//
// Interfaces (plain signals in place of the AXI data mover and host CPU):
//  * load port: ld_en, ld_tgt (data buffer A, data buffer B, weight bank of
//    PE ld_pe, threshold table), ld_addr, ld_data. Data buffer words use bits
//    [CG-1:0]; thresholds bits [ACC_W-1:0] at address k.
//  * run: start with cfg (layer_cfg_t) held until done. cfg.src picks the
//    buffer read; the result goes to the other one.
//  * read-back: rd_en/rd_buf/rd_addr, rd_data the next cycle (only while
//    idle), to fetch results as the write-back to DRAM would.
//  * stats: per-run counters (cycles, pixels, broadcast/skipped groups, weight
//    bank reads, XNOR bit operations), cleared by start.
// Defaults: 8 PEs, the configuration evaluated in the paper; memories sized
// for the BinaryNet CIFAR-10 conv layers (see bnn_pkg).
module bnn_ir_accel
  import bnn_pkg::*;
#(
  parameter int unsigned NPE      = 8,
  parameter int unsigned DB_DEPTH = HW_MAX * HW_MAX * K_BIGMAP / CG,
  parameter int unsigned KPP_MAX  = K_MAX / NPE,
  parameter int unsigned WB_DEPTH = KPP_MAX * CGRP_MAX,
  parameter int unsigned OA_DEPTH = HW_MAX * HW_MAX * K_BIGMAP / NPE,
  parameter int unsigned PE_W     = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load port
  input  logic              ld_en,
  input  ld_tgt_e           ld_tgt,
  input  logic [PE_W-1:0]   ld_pe,
  input  logic [LD_AW-1:0]  ld_addr,
  input  logic [WB_W-1:0]   ld_data,
  // run control
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // read-back of the data buffers
  input  logic              rd_en,
  input  logic              rd_buf,
  input  logic [LD_AW-1:0]  rd_addr,
  output logic [CG-1:0]     rd_data,
  // event counters
  output stats_t            stats
);
  localparam int unsigned DB_AW = $clog2(DB_DEPTH);
  localparam int unsigned WB_AW = $clog2(WB_DEPTH);
  localparam int unsigned OA_AW = $clog2(OA_DEPTH);
  localparam int unsigned KW    = $clog2(KPP_MAX);

  // ---------------- controller ----------------
  logic             clr_start, clr_busy_any, chk_start, chk_full, chk_done;
  logic             pes_idle, ag_start, ag_done, bn_start, bn_done, bn_busy;
  logic [OA_AW:0]   clr_len;
  logic [DB_AW-1:0] chk_base;
  logic [DIM_W-1:0] out_h, out_w, ag_h, ag_w;
  logic [CNT_W-1:0] pixels;

  ir_ctrl #(.DB_AW(DB_AW), .OA_AW(OA_AW)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .out_h, .out_w,
    .clr_start, .clr_len, .clr_busy(clr_busy_any),
    .chk_start, .chk_full, .chk_base, .chk_done, .pes_idle,
    .ag_start, .ag_h, .ag_w, .ag_done,
    .bn_start, .bn_done, .pixels
  );

  // ---------------- data buffers A / B ----------------
  logic             db_rd_en  [2];
  logic [DB_AW-1:0] db_rd_addr[2];
  logic [CG-1:0]    db_rd_data[2];
  logic             db_wr_en  [2];
  logic [DB_AW-1:0] db_wr_addr[2];
  logic [CG-1:0]    db_wr_data[2];

  logic             chk_rd_en, bn_wr_en;
  logic [DB_AW-1:0] chk_rd_addr, bn_wr_addr;
  logic [CG-1:0]    bn_wr_data;
  logic             rd_buf_q;

  for (genvar b = 0; b < 2; b++) begin : g_db
    always_comb begin
      if (busy) begin
        db_rd_en[b]   = chk_rd_en && (cfg.src == 1'(b));
        db_rd_addr[b] = chk_rd_addr;
      end else begin
        db_rd_en[b]   = rd_en && (rd_buf == 1'(b));
        db_rd_addr[b] = DB_AW'(rd_addr);
      end
      if (bn_wr_en && (cfg.src != 1'(b))) begin
        db_wr_en[b]   = 1'b1;
        db_wr_addr[b] = bn_wr_addr;
        db_wr_data[b] = bn_wr_data;
      end else begin
        db_wr_en[b]   = ld_en && (ld_tgt == ((b == 0) ? LD_DBUF_A : LD_DBUF_B));
        db_wr_addr[b] = DB_AW'(ld_addr);
        db_wr_data[b] = ld_data[CG-1:0];
      end
    end
    data_buffer #(.DEPTH(DB_DEPTH), .WIDTH(CG)) u_db (
      .clk,
      .rd_en(db_rd_en[b]), .rd_addr(db_rd_addr[b]), .rd_data(db_rd_data[b]),
      .wr_en(db_wr_en[b]), .wr_addr(db_wr_addr[b]), .wr_data(db_wr_data[b])
    );
  end

  always_ff @(posedge clk) if (rd_en) rd_buf_q <= rd_buf;
  assign rd_data = db_rd_data[rd_buf_q];

  // ---------------- checking engine and broadcasting bus ----------------
  logic   bus_valid;
  bcast_t bus;
  logic   ev_full, ev_diff, ev_skip;

  ir_chk #(.DB_AW(DB_AW)) u_chk (
    .clk, .rst_n, .start(chk_start), .full_i(chk_full), .base_i(chk_base),
    .cgrp_i(cfg.cgrp),
    .db_rd_en(chk_rd_en), .db_rd_addr(chk_rd_addr), .db_rd_data(db_rd_data[cfg.src]),
    .bus_valid, .bus, .bus_ready(pes_idle), .done(chk_done),
    .ev_full, .ev_diff, .ev_skip
  );

  // ---------------- shared address generator ----------------
  logic             ag_step, ag_in_range;
  logic [KW-1:0]    ag_k;
  logic [TAP_W-1:0] ag_tap;
  logic [OA_AW-1:0] ag_addr;

  addr_gen #(.KPP_MAX(KPP_MAX), .OA_AW(OA_AW)) u_ag (
    .clk, .rst_n, .start(ag_start), .h(ag_h), .w(ag_w), .pad(cfg.pad), .kpp(cfg.kpp),
    .out_h, .out_w, .step(ag_step), .k(ag_k), .tap(ag_tap), .in_range(ag_in_range),
    .oa_addr(ag_addr), .done(ag_done)
  );

  // ---------------- processing elements ----------------
  logic [NPE-1:0]          pe_ready, clr_busy;
  logic [CNT_W-1:0]        pe_ops   [NPE];
  logic [CNT_W-1:0]        wb_cnt   [NPE];
  logic signed [ACC_W-1:0] oa_rdata [NPE];
  logic                    oa_rd_en;
  logic [OA_AW-1:0]        oa_rd_addr;

  assign pes_idle     = &pe_ready;
  assign clr_busy_any = |clr_busy;

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    logic                             wb_rd_en;
    logic [WB_AW-1:0]                 wb_rd_addr;
    logic [WB_W-1:0]                  wb_rd_data;
    logic [KW-1:0]                    rb_a_k, rb_w_k;
    logic signed [NTAP-1:0][RB_W-1:0] rb_a_data, rb_b_data, rb_w_data;
    logic                             rb_we;

    wbank #(.DEPTH(WB_DEPTH), .WIDTH(WB_W), .CW(CNT_W)) u_wb (
      .clk, .rst_n, .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data),
      .wr_en(ld_en && (ld_tgt == LD_WBANK) && (ld_pe == PE_W'(i))),
      .wr_addr(WB_AW'(ld_addr)), .wr_data(ld_data),
      .clr_count(start), .rd_count(wb_cnt[i])
    );

    ir_pe #(.KPP_MAX(KPP_MAX), .WB_AW(WB_AW)) u_pe (
      .clk, .rst_n, .kpp(cfg.kpp),
      .bus_valid(bus_valid && pes_idle), .bus, .bus_ready(pe_ready[i]),
      .wb_rd_en, .wb_rd_addr, .wb_rd_data,
      .rb_rd_k(rb_a_k), .rb_rd_data(rb_a_data),
      .rb_we, .rb_wk(rb_w_k), .rb_wdata(rb_w_data),
      .clr_count(start), .bit_ops(pe_ops[i])
    );

    reuse_buffer #(.KPP_MAX(KPP_MAX)) u_rb (
      .clk, .rst_n, .a_k(rb_a_k), .a_data(rb_a_data), .b_k(ag_k), .b_data(rb_b_data),
      .we(rb_we), .w_k(rb_w_k), .w_data(rb_w_data)
    );

    oa_bank #(.DEPTH(OA_DEPTH)) u_oa (
      .clk, .rst_n, .clear_start(clr_start), .clear_len(clr_len), .clear_busy(clr_busy[i]),
      .acc_valid(ag_step && ag_in_range), .acc_addr(ag_addr), .acc_val(rb_b_data[ag_tap]),
      .rd_en(oa_rd_en), .rd_addr(oa_rd_addr), .rd_data(oa_rdata[i])
    );
  end

  // ---------------- batch normalization / binarize / pool ----------------
  bn_engine #(.NPE(NPE), .KPP_MAX(KPP_MAX), .OA_AW(OA_AW), .DB_AW(DB_AW)) u_bn (
    .clk, .rst_n, .start(bn_start), .out_h, .out_w, .kpp(cfg.kpp), .pool(cfg.pool),
    .thr_we(ld_en && (ld_tgt == LD_THR)), .thr_addr(ld_addr[$clog2(K_MAX)-1:0]),
    .thr_data(ld_data[ACC_W-1:0]),
    .oa_rd_en, .oa_rd_addr, .oa_rd_data(oa_rdata),
    .db_wr_en(bn_wr_en), .db_wr_addr(bn_wr_addr), .db_wr_data(bn_wr_data),
    .busy(bn_busy), .done(bn_done)
  );

  // ---------------- event counters ----------------
  always_comb begin
    stats.pixels   = pixels;
    stats.wb_reads = '0;
    stats.bit_ops  = '0;
    for (int i = 0; i < NPE; i++) begin
      stats.wb_reads += wb_cnt[i];
      stats.bit_ops  += pe_ops[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats.cycles   <= '0;
      stats.grp_full <= '0;
      stats.grp_diff <= '0;
      stats.grp_skip <= '0;
    end else if (start && !busy) begin
      stats.cycles   <= '0;
      stats.grp_full <= '0;
      stats.grp_diff <= '0;
      stats.grp_skip <= '0;
    end else begin
      if (busy)    stats.cycles   <= stats.cycles + 1'b1;
      if (ev_full) stats.grp_full <= stats.grp_full + 1'b1;
      if (ev_diff) stats.grp_diff <= stats.grp_diff + 1'b1;
      if (ev_skip) stats.grp_skip <= stats.grp_skip + 1'b1;
    end
  end

  // The load and read-back ports are for an idle accelerator only.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !ld_en);
endmodule
