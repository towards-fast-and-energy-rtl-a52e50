// bnn_wr_accel: weight-reuse binarized-convolution accelerator.
//
// The symmetric version of the input-reuse design: kernels, not pixels, are
// streamed. The kernels of a layer are stored in an offline-optimized order
// (reordered inside sets of 64 kernels; the first kernel holds real weights,
// each later one the same/different mask against its predecessor in the
// order) in one weight buffer. For every kernel slot:
//   CHECK  - the checking engine (wr_chk) broadcasts the slot's channel
//            groups: real weights for the first kernel, otherwise new
//            weights plus change mask, skipping groups that did not change;
//            every PE updates, for each of its local input pixels, the nine
//            per-tap partial sums in its reuse buffer (wr_pe);
//   ACCUM  - the sequence table gives the slot's original kernel index
//            (the paper's reverting step, so the ofmap channel order is
//            restored), and the address generator (wr_addr_gen) scatters the
//            reuse-buffer entries into each PE's OA bank.
// Finally wr_bn sums the partial sums of neighbouring PEs, binarizes, pools
// and writes the next layer's input, row-distributed, into the other data
// buffer of each PE. The paper gives the overall structure (checking engine
// with weight base, PEs with local input, reverting by the sequence table,
// data buffers A/B, OA banks); the row-band split of the input map over the
// PEs (rpp rows each, host-chosen, rpp = ceil(H / NPE)), the halo rows in the
// OA banks and the cross-PE reduction are this design's choices.
//
// Interface (same as bnn_ir_accel plus rd_pe):
//  * load: ld_tgt LD_DBUF_A/B (PE ld_pe, address local pixel * cgrp + group),
//    LD_WBANK (weight buffer, address slot * cgrp + group, 144-bit word),
//    LD_THR (threshold of original kernel ld_addr), LD_SEQ (original kernel
//    index of slot ld_addr, in ld_data);
//  * run: start with cfg held until done; cfg.kpp = K / NPE, cfg.rpp and
//    cfg.rpp_o are the input / output rows per PE;
//  * read-back of PE rd_pe's buffer, data the next cycle (only while idle).
// stats.pixels counts kernel slots here. Loads are not allowed while busy.
module bnn_wr_accel
  import bnn_pkg::*;
#(
  parameter int unsigned NPE        = 8,
  parameter int unsigned RPP_MAX    = HW_MAX / NPE,               // 4
  parameter int unsigned DB_DEPTH   = RPP_MAX * HW_MAX * K_BIGMAP / CG, // 1024
  parameter int unsigned WBUF_DEPTH = K_MAX * CGRP_MAX,           // 16384
  parameter int unsigned OA_DEPTH   = (RPP_MAX + 2) * HW_MAX * K_BIGMAP, // 24576
  parameter int unsigned PE_W       = $clog2(NPE)
) (
  input  logic              clk,
  input  logic              rst_n,
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
  localparam int unsigned DB_AW    = $clog2(DB_DEPTH);
  localparam int unsigned WB_AW    = $clog2(WBUF_DEPTH);
  localparam int unsigned OA_AW    = $clog2(OA_DEPTH);
  localparam int unsigned NPIX_MAX = RPP_MAX * HW_MAX;
  localparam int unsigned PX_W     = $clog2(NPIX_MAX);
  localparam int unsigned K_W      = $clog2(K_MAX);

  // ---------------- layer geometry ----------------
  logic [DIM_W-1:0] out_h, out_w;
  logic [K_W:0]     kcount;
  assign out_h  = cfg.in_h + (cfg.pad ? DIM_W'(2) : DIM_W'(0)) - DIM_W'(2);
  assign out_w  = cfg.in_w + (cfg.pad ? DIM_W'(2) : DIM_W'(0)) - DIM_W'(2);
  assign kcount = (K_W+1)'(32'(cfg.kpp) * NPE);

  // ---------------- sequence table (reverting) ----------------
  logic [K_W-1:0] seq [K_MAX];
  always_ff @(posedge clk) begin
    if (ld_en && ld_tgt == LD_SEQ) seq[ld_addr[K_W-1:0]] <= ld_data[K_W-1:0];
  end

  // ---------------- controller ----------------
  typedef enum logic [3:0] {
    C_IDLE, C_CLR, C_CLRW, C_SLOT, C_CHKW, C_PEW, C_ACC, C_ACCW, C_DRAIN, C_BN, C_BNW
  } state_e;
  state_e         state;
  logic [K_W:0]   slot;
  logic [K_W-1:0] k_orig;
  logic [1:0]     dcnt;
  logic           clr_start, chk_start, ag_start, bn_start;
  logic           clr_busy_any, chk_done, pes_idle, ag_done, bn_done;
  logic [OA_AW:0] clr_len;

  assign clr_len = (OA_AW+1)'((32'(cfg.rpp) + 2) * 32'(out_w) * 32'(kcount));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; slot <= '0; k_orig <= '0; dcnt <= '0;
      busy <= 1'b0; done <= 1'b0;
      clr_start <= 1'b0; chk_start <= 1'b0; ag_start <= 1'b0; bn_start <= 1'b0;
    end else begin
      done <= 1'b0; clr_start <= 1'b0; chk_start <= 1'b0;
      ag_start <= 1'b0; bn_start <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          busy <= 1'b1; slot <= '0;
          clr_start <= 1'b1; state <= C_CLR;
        end
        C_CLR:  state <= C_CLRW;
        C_CLRW: if (!clr_busy_any) state <= (kcount == '0) ? C_BN : C_SLOT;
        C_SLOT: begin chk_start <= 1'b1; state <= C_CHKW; end
        C_CHKW: if (chk_done) state <= C_PEW;
        C_PEW:  if (pes_idle) begin
          k_orig <= seq[slot[K_W-1:0]];
          state  <= C_ACC;
        end
        C_ACC:  begin ag_start <= 1'b1; state <= C_ACCW; end
        C_ACCW: if (ag_done) begin dcnt <= '0; state <= C_DRAIN; end
        C_DRAIN: if (dcnt == 2'd3) begin
          slot   <= slot + 1'b1;
          state  <= (slot + 1'b1 == kcount) ? C_BN : C_SLOT;
        end else dcnt <= dcnt + 1'b1;
        C_BN:  begin bn_start <= 1'b1; state <= C_BNW; end
        C_BNW: if (bn_done) begin busy <= 1'b0; done <= 1'b1; state <= C_IDLE; end
        default: state <= C_IDLE;
      endcase
    end
  end

  // ---------------- weight buffer and checking engine ----------------
  logic             wb_rd_en;
  logic [WB_AW-1:0] wb_rd_addr;
  logic [WB_W-1:0]  wb_rd_data;
  logic [CNT_W-1:0] wb_cnt;
  logic             bus_valid, bus_ready;
  wbcast_t          bus;
  logic             ev_full, ev_diff, ev_skip;

  wbank #(.DEPTH(WBUF_DEPTH), .WIDTH(WB_W), .CW(CNT_W)) u_wbuf (
    .clk, .rst_n, .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data),
    .wr_en(ld_en && (ld_tgt == LD_WBANK)), .wr_addr(WB_AW'(ld_addr)), .wr_data(ld_data),
    .clr_count(start && !busy), .rd_count(wb_cnt)
  );

  wr_chk #(.WB_AW(WB_AW)) u_chk (
    .clk, .rst_n, .start(chk_start), .full_i(slot == '0),
    .base_i(WB_AW'(32'(slot) * 32'(cfg.cgrp))), .cgrp_i(cfg.cgrp),
    .wb_rd_en, .wb_rd_addr, .wb_rd_data,
    .bus_valid, .bus, .bus_ready, .done(chk_done),
    .ev_full, .ev_diff, .ev_skip
  );

  // ---------------- address generator ----------------
  logic                    ag_step, ag_wo_ok;
  logic [PX_W-1:0]         ag_pix;
  logic [TAP_W-1:0]        ag_tap;
  logic signed [DIM_W+1:0] ag_hrel;
  logic [2:0]              ag_hloc;
  logic [OA_AW-1:0]        ag_addr;

  wr_addr_gen #(.RPP_MAX(RPP_MAX), .PW_(PX_W), .OA_AW(OA_AW), .K_W(K_W)) u_ag (
    .clk, .rst_n, .start(ag_start), .rpp(cfg.rpp), .in_w(cfg.in_w), .pad(cfg.pad),
    .kcount, .k(k_orig), .out_w, .step(ag_step), .pix(ag_pix), .tap(ag_tap),
    .hrel(ag_hrel), .h_loc(ag_hloc), .wo_ok(ag_wo_ok), .oa_addr(ag_addr), .done(ag_done)
  );

  // ---------------- batch-normalization engine ----------------
  logic                    oa_rd_en;
  logic [OA_AW-1:0]        oa_rd_addr [NPE];
  logic signed [ACC_W-1:0] oa_rdata   [NPE];
  logic                    bn_wr_en;
  logic [PE_W-1:0]         bn_wr_pe;
  logic [DB_AW-1:0]        bn_wr_addr;
  logic [CG-1:0]           bn_wr_data;

  wr_bn #(.NPE(NPE), .OA_AW(OA_AW), .DB_AW(DB_AW), .K_W(K_W), .PE_W(PE_W)) u_bn (
    .clk, .rst_n, .start(bn_start), .out_h, .out_w, .kcount, .pool(cfg.pool),
    .pad(cfg.pad), .rpp(cfg.rpp), .rpp_o(cfg.rpp_o),
    .thr_we(ld_en && (ld_tgt == LD_THR)), .thr_addr(ld_addr[K_W-1:0]),
    .thr_data(ld_data[ACC_W-1:0]),
    .oa_rd_en, .oa_rd_addr, .oa_rd_data(oa_rdata),
    .db_wr_en(bn_wr_en), .db_wr_pe(bn_wr_pe), .db_wr_addr(bn_wr_addr),
    .db_wr_data(bn_wr_data), .busy(), .done(bn_done)
  );

  // ---------------- processing elements ----------------
  logic [NPE-1:0]   pe_ready, clr_busy;
  logic [CNT_W-1:0] pe_ops [NPE];
  logic [CG-1:0]    pe_rdata [NPE];
  logic             rd_buf_q;
  logic [PE_W-1:0]  rd_pe_q;

  assign bus_ready    = &pe_ready;
  assign pes_idle     = &pe_ready && !bus_valid;
  assign clr_busy_any = |clr_busy;

  always_ff @(posedge clk) if (rd_en) begin rd_buf_q <= rd_buf; rd_pe_q <= rd_pe; end
  assign rd_data = pe_rdata[rd_pe_q];

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    logic [2:0]       rows;
    logic [PX_W:0]    npix;
    logic             pe_db_rd_en;
    logic [DB_AW-1:0] pe_db_rd_addr;
    logic [CG-1:0]    db_rdata [2];
    logic [PX_W-1:0]  rb_a_k, rb_wk;
    logic signed [NTAP-1:0][RB_W-1:0] rb_a_data, rb_b_data, rb_wdata;
    logic             rb_we;
    logic signed [DIM_W+3:0] ho_g;
    logic             in_range;

    // Rows this PE holds: min(rpp, max(0, H - i * rpp)).
    always_comb begin
      if (32'(cfg.in_h) <= i * 32'(cfg.rpp))
        rows = '0;
      else if (32'(cfg.in_h) - i * 32'(cfg.rpp) >= 32'(cfg.rpp))
        rows = cfg.rpp;
      else
        rows = 3'(32'(cfg.in_h) - i * 32'(cfg.rpp));
    end
    assign npix = (PX_W+1)'(32'(rows) * 32'(cfg.in_w));

    for (genvar b = 0; b < 2; b++) begin : g_db
      logic             re, we;
      logic [DB_AW-1:0] ra, wa;
      logic [CG-1:0]    wd;
      always_comb begin
        re = 1'b0; ra = '0; we = 1'b0; wa = '0; wd = '0;
        if (busy) begin
          re = pe_db_rd_en && (cfg.src == 1'(b));
          ra = pe_db_rd_addr;
          we = bn_wr_en && (bn_wr_pe == PE_W'(i)) && (cfg.src != 1'(b));
          wa = bn_wr_addr;
          wd = bn_wr_data;
        end else begin
          re = rd_en && (rd_buf == 1'(b)) && (rd_pe == PE_W'(i));
          ra = DB_AW'(rd_addr);
          we = ld_en && (ld_pe == PE_W'(i)) &&
               (ld_tgt == ((b == 0) ? LD_DBUF_A : LD_DBUF_B));
          wa = DB_AW'(ld_addr);
          wd = ld_data[CG-1:0];
        end
      end
      data_buffer #(.DEPTH(DB_DEPTH), .WIDTH(CG)) u_db (
        .clk, .rd_en(re), .rd_addr(ra), .rd_data(db_rdata[b]),
        .wr_en(we), .wr_addr(wa), .wr_data(wd)
      );
    end
    assign pe_rdata[i] = db_rdata[rd_buf_q];

    wr_pe #(.NPIX_MAX(NPIX_MAX), .PW_(PX_W), .DB_AW(DB_AW)) u_pe (
      .clk, .rst_n, .npix, .cgrp(cfg.cgrp),
      .bus_valid(bus_valid && bus_ready), .bus, .bus_ready(pe_ready[i]),
      .db_rd_en(pe_db_rd_en), .db_rd_addr(pe_db_rd_addr), .db_rd_data(db_rdata[cfg.src]),
      .rb_rd_k(rb_a_k), .rb_rd_data(rb_a_data), .rb_we, .rb_wk, .rb_wdata,
      .clr_count(start && !busy), .bit_ops(pe_ops[i])
    );

    reuse_buffer #(.KPP_MAX(NPIX_MAX), .KW(PX_W)) u_rb (
      .clk, .rst_n, .a_k(rb_a_k), .a_data(rb_a_data), .b_k(ag_pix), .b_data(rb_b_data),
      .we(rb_we), .w_k(rb_wk), .w_data(rb_wdata)
    );

    assign ho_g = $signed((DIM_W+4)'(i * 32'(cfg.rpp))) + (DIM_W+4)'(ag_hrel);
    assign in_range = ag_wo_ok && (ag_hloc < rows) && (ho_g >= 0) &&
                      (ho_g < $signed((DIM_W+4)'(out_h)));

    oa_bank #(.DEPTH(OA_DEPTH), .AW(OA_AW)) u_oa (
      .clk, .rst_n, .clear_start(clr_start), .clear_len(clr_len), .clear_busy(clr_busy[i]),
      .acc_valid(ag_step && in_range), .acc_addr(ag_addr), .acc_val(rb_b_data[ag_tap]),
      .rd_en(oa_rd_en), .rd_addr(oa_rd_addr[i]), .rd_data(oa_rdata[i])
    );
  end

  // ---------------- statistics ----------------
  logic [CNT_W-1:0] ops_sum;
  always_comb begin
    ops_sum = '0;
    for (int i = 0; i < NPE; i++) ops_sum += pe_ops[i];
  end
  assign stats.wb_reads = wb_cnt;
  assign stats.bit_ops  = ops_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats.cycles <= '0; stats.pixels <= '0;
      stats.grp_full <= '0; stats.grp_diff <= '0; stats.grp_skip <= '0;
    end else if (start && !busy) begin
      stats.cycles <= '0; stats.pixels <= '0;
      stats.grp_full <= '0; stats.grp_diff <= '0; stats.grp_skip <= '0;
    end else begin
      if (busy) stats.cycles <= stats.cycles + 1'b1;
      if (chk_start) stats.pixels <= stats.pixels + 1'b1;
      if (ev_full) stats.grp_full <= stats.grp_full + 1'b1;
      if (ev_diff) stats.grp_diff <= stats.grp_diff + 1'b1;
      if (ev_skip) stats.grp_skip <= stats.grp_skip + 1'b1;
    end
  end

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !ld_en);
endmodule
