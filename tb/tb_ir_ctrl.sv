// tb_ir_ctrl: surrounds the layer sequencer with models of the OA clear, the
// checking engine, the PEs, the address generator and the batch-normalization
// engine, each answering after a random delay, and checks the order of
// events: a clear of out_h * out_w * kpp words first; then for every pixel in
// row-major order a checking start with the right base address and STAGE I
// flag only at w = 0, an accumulation start for the same pixel only after the
// checking engine is done and the PEs are idle; then one BN start; then done,
// with the pixel counter at H * W.
module tb_ir_ctrl;
  import bnn_pkg::*;
  localparam int DB_AW = 13, OA_AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  layer_cfg_t cfg = '0;
  logic busy, done, clr_start, clr_busy = 0, chk_start, chk_full, chk_done = 0;
  logic pes_idle = 1, ag_start, ag_done = 0, bn_start, bn_done = 0;
  logic [DIM_W-1:0] out_h, out_w, ag_h, ag_w;
  logic [OA_AW:0] clr_len;
  logic [DB_AW-1:0] chk_base;
  logic [CNT_W-1:0] pixels;
  int checks = 0, failures = 0;

  ir_ctrl dut (.*);

  // event log: 0 clear, 1 chk, 2 acc, 3 bn
  int ev_kind[$], ev_h[$], ev_w[$], ev_full[$], ev_base[$];
  int clr_seen_len = -1;
  bit chk_busy = 0;
  int chk_wait = 0, pe_wait = 0, ag_wait = 0, bn_wait = 0;

  always @(posedge clk) if (rst_n) begin
    chk_done <= 0; ag_done <= 0; bn_done <= 0;
    if (clr_start) begin ev_kind.push_back(0); ev_h.push_back(0); ev_w.push_back(0);
      ev_full.push_back(0); ev_base.push_back(0); clr_seen_len = int'(clr_len); clr_busy <= 1; end
    else if (clr_busy && $urandom_range(3) == 0) clr_busy <= 0;
    if (chk_start) begin
      ev_kind.push_back(1); ev_h.push_back(int'(ag_h)); ev_w.push_back(int'(ag_w));
      ev_full.push_back(int'(chk_full)); ev_base.push_back(int'(chk_base));
      chk_wait <= $urandom_range(1, 6); pes_idle <= 0; pe_wait <= $urandom_range(1, 8);
    end else if (chk_wait > 0) begin
      chk_wait <= chk_wait - 1;
      if (chk_wait == 1) chk_done <= 1;
    end else if (!pes_idle) begin
      pe_wait <= pe_wait - 1;
      if (pe_wait <= 1) pes_idle <= 1;
    end
    if (ag_start) begin
      ev_kind.push_back(2); ev_h.push_back(int'(ag_h)); ev_w.push_back(int'(ag_w));
      ev_full.push_back(0); ev_base.push_back(0);
      checks++;
      if (!pes_idle || chk_wait != 0) begin failures++; $display("FAIL accumulation before PEs idle"); end
      ag_wait <= $urandom_range(1, 9);
    end else if (ag_wait > 0) begin
      ag_wait <= ag_wait - 1;
      if (ag_wait == 1) ag_done <= 1;
    end
    if (bn_start) begin
      ev_kind.push_back(3); ev_h.push_back(0); ev_w.push_back(0); ev_full.push_back(0); ev_base.push_back(0);
      bn_wait <= 5;
    end else if (bn_wait > 0) begin
      bn_wait <= bn_wait - 1;
      if (bn_wait == 1) bn_done <= 1;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int H, input int W, input int cg, input int kpp, input bit pad);
    int i, oh, ow;
    cfg.in_h = DIM_W'(H); cfg.in_w = DIM_W'(W); cfg.cgrp = GRP_W'(cg);
    cfg.kpp = KPP_W'(kpp); cfg.pad = pad; cfg.pool = 0; cfg.src = 0;
    ev_kind.delete(); ev_h.delete(); ev_w.delete(); ev_full.delete(); ev_base.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    oh = H + 2*pad - 2; ow = W + 2*pad - 2;
    checks++;
    if (int'(out_h) != oh || int'(out_w) != ow || clr_seen_len != oh*ow*kpp) begin
      failures++; $display("FAIL dims %0d x %0d clear %0d", out_h, out_w, clr_seen_len);
    end
    checks++;
    if (ev_kind.size() != 2 + 2*H*W || ev_kind[0] != 0 || ev_kind[ev_kind.size()-1] != 3) begin
      failures++; $display("FAIL %0d events", ev_kind.size());
    end else begin
      i = 1;
      for (int h = 0; h < H; h++)
        for (int w = 0; w < W; w++) begin
          checks++;
          if (ev_kind[i] != 1 || ev_h[i] != h || ev_w[i] != w || ev_full[i] != (w == 0) ||
              ev_base[i] != (h*W + w)*cg || ev_kind[i+1] != 2 || ev_h[i+1] != h || ev_w[i+1] != w) begin
            failures++; $display("FAIL pixel %0d,%0d events", h, w);
          end
          i += 2;
        end
    end
    checks++;
    if (pixels != CNT_W'(H*W)) begin failures++; $display("FAIL pixels %0d", pixels); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 5, 3, 2, 1);
    run(6, 3, 8, 16, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
