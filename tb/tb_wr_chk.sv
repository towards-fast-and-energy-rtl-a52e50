// tb_wr_chk: drives the weight-reuse checking engine with kernel slots from a
// model weight buffer (one-cycle read latency) and a randomly stalling
// consumer. Slots 0 and 5 start a kernel set (stored as real weights); the
// others are stored as same/different masks against the previous slot, with
// about a third of the groups unchanged. Every bus word is compared with the
// expected one: the slot's real weights (recovered through the weight base)
// and the mask (all ones for the first slot of a set); unchanged groups must
// be skipped and counted.
module tb_wr_chk;
  import bnn_pkg::*;
  localparam int WB_AW = 14;
  localparam int NG = 4, NS = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, full_i = 0;
  logic [WB_AW-1:0] base_i = 0;
  logic [GRP_W-1:0] cgrp_i = GRP_W'(NG);
  logic wb_rd_en;
  logic [WB_AW-1:0] wb_rd_addr;
  logic [WB_W-1:0] wb_rd_data = '0;
  logic bus_valid, bus_ready = 0, done, ev_full, ev_diff, ev_skip;
  wbcast_t bus;
  int checks = 0, failures = 0;

  wr_chk dut (.*);

  logic [WB_W-1:0] mem  [NS*NG];
  logic [WB_W-1:0] real_w [NS][NG];
  always_ff @(posedge clk) if (wb_rd_en) wb_rd_data <= mem[wb_rd_addr];

  wbcast_t exp_q[$];
  int n_skip_exp = 0, n_skip = 0, n_full = 0, n_diff = 0;

  always @(posedge clk) begin
    bus_ready <= ($urandom_range(3) == 0);
    if (rst_n && ev_skip) n_skip++;
    if (rst_n && ev_full) n_full++;
    if (rst_n && ev_diff) n_diff++;
    if (bus_valid && bus_ready) begin
      wbcast_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected word"); end
      else begin
        e = exp_q.pop_front();
        if (bus !== e) begin
          failures++;
          $display("FAIL grp %0d: got full=%0d data=%h mask=%h, exp full=%0d data=%h mask=%h",
                   bus.grp, bus.full, bus.data, bus.mask, e.full, e.data, e.mask);
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

  function automatic logic [WB_W-1:0] rand_word();
    logic [WB_W-1:0] v;
    for (int i = 0; i < WB_W; i += 32) v[i +: 16] = 16'($urandom);
    for (int i = 16; i < WB_W; i += 32) v[i +: 16] = 16'($urandom);
    return v;
  endfunction

  initial begin
    wbcast_t e;
    bit fs;
    for (int j = 0; j < NS; j++)
      for (int g = 0; g < NG; g++) begin
        fs = (j % 5 == 0);
        if (fs) real_w[j][g] = rand_word();
        else if ($urandom_range(2) == 0) real_w[j][g] = real_w[j-1][g];
        else real_w[j][g] = real_w[j-1][g] ^ (WB_W'(1) << $urandom_range(WB_W - 1))
                                           ^ (WB_W'(1) << $urandom_range(WB_W - 1));
        mem[j*NG + g] = fs ? real_w[j][g] : (real_w[j][g] ^ real_w[j-1][g]);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NS; j++) begin
      fs = (j % 5 == 0);
      for (int g = 0; g < NG; g++) begin
        e.full = fs; e.first = (g == 0); e.grp = GRP_W'(g); e.data = real_w[j][g];
        e.mask = fs ? '1 : mem[j*NG + g];
        if (e.full || e.mask != 0) exp_q.push_back(e); else n_skip_exp++;
      end
      @(negedge clk);
      start = 1; full_i = fs; base_i = WB_AW'(j*NG);
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL slot %0d left %0d words", j, exp_q.size()); exp_q.delete(); end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_skip != n_skip_exp || n_skip == 0) begin failures++; $display("FAIL skips %0d exp %0d", n_skip, n_skip_exp); end
    checks++;
    if (n_full != 2*NG) begin failures++; $display("FAIL full events %0d", n_full); end
    checks++;
    if (n_diff + n_skip != (NS-2)*NG) begin failures++; $display("FAIL diff events %0d", n_diff); end
    $display("skipped %0d, diff %0d, full %0d", n_skip, n_diff, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
