// tb_ir_chk: drives the checking engine with rows of pixels from a model data
// buffer (one-cycle read latency) and a randomly stalling consumer, and
// compares every bus word with the expected sequence: in a row's first pixel
// every group goes out whole (full = 1, mask all ones); in later pixels only
// groups that differ from the left neighbour go out, with the new bits and the
// mask of differing channels; unchanged groups are counted as skipped.
module tb_ir_chk;
  import bnn_pkg::*;
  localparam int DB_AW = 13;
  localparam int NG = 4, W = 6, H = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, full_i = 0;
  logic [DB_AW-1:0] base_i = 0;
  logic [GRP_W-1:0] cgrp_i = GRP_W'(NG);
  logic db_rd_en;
  logic [DB_AW-1:0] db_rd_addr;
  logic [CG-1:0] db_rd_data;
  logic bus_valid, bus_ready = 0, done, ev_full, ev_diff, ev_skip;
  bcast_t bus;
  int checks = 0, failures = 0;

  ir_chk dut (.*);

  logic [CG-1:0] mem [H*W*NG];
  always_ff @(posedge clk) if (db_rd_en) db_rd_data <= mem[db_rd_addr];

  bcast_t exp_q[$];
  int n_skip_exp = 0, n_skip = 0, n_full = 0, n_diff = 0;

  always @(posedge clk) begin
    bus_ready <= ($urandom_range(3) == 0);
    if (rst_n && ev_skip) n_skip++;
    if (rst_n && ev_full) n_full++;
    if (rst_n && ev_diff) n_diff++;
    if (bus_valid && bus_ready) begin
      bcast_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected word"); end
      else begin
        e = exp_q.pop_front();
        if (bus !== e) begin
          failures++;
          $display("FAIL grp %0d: got full=%0d first=%0d data=%h mask=%h, exp full=%0d first=%0d grp=%0d data=%h mask=%h",
                   bus.grp, bus.full, bus.first, bus.data, bus.mask, e.full, e.first, e.grp, e.data, e.mask);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bcast_t e;
    int a;
    for (int h = 0; h < H; h++)
      for (int w = 0; w < W; w++)
        for (int g = 0; g < NG; g++) begin
          a = (h*W + w)*NG + g;
          if (w == 0 || $urandom_range(2) == 0) mem[a] = CG'($urandom);
          else mem[a] = mem[a - NG];
        end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int h = 0; h < H; h++)
      for (int w = 0; w < W; w++) begin
        for (int g = 0; g < NG; g++) begin
          a = (h*W + w)*NG + g;
          e.full = (w == 0); e.first = (g == 0); e.grp = GRP_W'(g); e.data = mem[a];
          e.mask = (w == 0) ? '1 : (mem[a] ^ mem[a - NG]);
          if (e.full || e.mask != 0) exp_q.push_back(e); else n_skip_exp++;
        end
        @(negedge clk);
        start = 1; full_i = (w == 0); base_i = DB_AW'((h*W + w)*NG);
        @(negedge clk);
        start = 0;
        while (!done) @(negedge clk);
        checks++;
        if (exp_q.size() != 0) begin failures++; $display("FAIL pixel %0d,%0d left %0d words", h, w, exp_q.size()); exp_q.delete(); end
      end
    repeat (3) @(negedge clk);
    checks++;
    if (n_skip != n_skip_exp || n_skip == 0) begin failures++; $display("FAIL skips %0d exp %0d", n_skip, n_skip_exp); end
    checks++;
    if (n_full != H*NG) begin failures++; $display("FAIL full events %0d", n_full); end
    $display("skipped %0d, diff %0d, full %0d", n_skip, n_diff, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
