// tb_ir_pe: checks the processing element's STAGE I (XNOR/popcount) and
// STAGE II (difference update) arithmetic and its timing.
//  * First the worked example of the paper's Fig. 2: input
//    (-1 -1 -1 -1 1 -1 -1 -1) then (-1 -1 -1 -1 -1 1 -1 -1) against three
//    1x1 kernels gives 2, 0, 6 and then 6, -4, 6 (updates +4, -4, +0). The
//    example has 8 channels; channels 8..15 are +1 in input and weight and
//    add +8 to every result.
//  * Then random pixels and 3x3 kernels over four channel groups: after each
//    pixel every reuse-buffer entry must equal the +-1 dot product computed
//    directly from the full pixel, although only changed groups are sent.
// Each bus word must keep bus_ready low for exactly kpp + 2 cycles - 1 after
// acceptance, and the bit-operation counter must match the mask popcounts.
module tb_ir_pe;
  import bnn_pkg::*;
  localparam int KPP_MAX = 64, KW = 6, WB_AW = 11, NG = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KPP_W-1:0] kpp = 3;
  logic bus_valid = 0, bus_ready;
  bcast_t bus = '0;
  logic wb_rd_en;
  logic [WB_AW-1:0] wb_rd_addr;
  logic [WB_W-1:0] wb_rd_data;
  logic [KW-1:0] rb_rd_k, rb_wk;
  logic signed [NTAP-1:0][RB_W-1:0] rb_rd_data, rb_wdata;
  logic rb_we, clr_count = 0;
  logic [CNT_W-1:0] bit_ops;
  int checks = 0, failures = 0;

  ir_pe dut (.*);

  logic [WB_W-1:0] wmem [2048];
  logic signed [NTAP-1:0][RB_W-1:0] rb [KPP_MAX];
  always_ff @(posedge clk) if (wb_rd_en) wb_rd_data <= wmem[wb_rd_addr];
  assign rb_rd_data = rb[rb_rd_k];
  always_ff @(posedge clk) if (rb_we) rb[rb_wk] <= rb_wdata;

  logic [CG-1:0] x [NG];       // current pixel (all groups)
  longint exp_ops = 0;

  task automatic send(input bcast_t b);
    int n;
    @(negedge clk);
    while (!bus_ready) @(negedge clk);
    bus = b; bus_valid = 1;
    @(negedge clk);
    bus_valid = 0;
    n = 1;
    while (!bus_ready) begin @(negedge clk); n++; end
    checks++;
    if (n != int'(kpp) + 2) begin failures++; $display("FAIL busy %0d cycles, expected %0d", n, kpp + 2); end
    exp_ops += b.full ? NTAP*CG*kpp : NTAP*$countones(b.mask)*kpp;
  endtask

  function automatic int dot(int k, int tap);
    int d = 0;
    for (int g = 0; g < NG; g++)
      for (int i = 0; i < CG; i++)
        d += (x[g][i] == wmem[k*CGRP_MAX + g][tap*CG + i]) ? 1 : -1;
    return d;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bcast_t b;
    logic [CG-1:0] nx;
    int fig_exp1[3] = '{10, 8, 14};
    int fig_exp2[3] = '{14, 4, 14};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- Fig. 2 example: one group, tap 0 only, bit 1 = -1 ----
    foreach (wmem[a]) wmem[a] = '0;
    wmem[0*CGRP_MAX][7:0] = 8'b1101_1101;   // W1: -1 1 -1 -1 -1 1 -1 -1 (bit0 first)
    wmem[1*CGRP_MAX][7:0] = 8'b1010_0010;   // W2:  1 -1 1 1 1 -1 1 -1
    wmem[2*CGRP_MAX][7:0] = 8'b1100_1111;   // W3: -1 -1 -1 -1 1 1 -1 -1
    b = '0; b.full = 1; b.first = 1; b.grp = 0;
    b.data = 16'h00EF; b.mask = '1;          // -1 -1 -1 -1 1 -1 -1 -1
    send(b);
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (rb[k][0] != RB_W'(fig_exp1[k])) begin failures++; $display("FAIL fig2 stage I k%0d = %0d", k, rb[k][0]); end
    end
    b.full = 0; b.data = 16'h00DF; b.mask = 16'h0030; // -1 -1 -1 -1 -1 1 -1 -1
    send(b);
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (rb[k][0] != RB_W'(fig_exp2[k])) begin failures++; $display("FAIL fig2 stage II k%0d = %0d", k, rb[k][0]); end
    end
    // ---- random 3x3 kernels, NG groups, kpp = 5 ----
    kpp = 5;
    for (int k = 0; k < 5; k++)
      for (int g = 0; g < NG; g++)
        wmem[k*CGRP_MAX + g] = {$urandom, $urandom, $urandom, $urandom, $urandom};
    for (int p = 0; p < 12; p++) begin
      for (int g = 0; g < NG; g++) begin
        if (p % 6 == 0) begin
          x[g] = CG'($urandom);
          b = '0; b.full = 1; b.first = (g == 0); b.grp = GRP_W'(g); b.data = x[g]; b.mask = '1;
          send(b);
        end else begin
          nx = x[g];
          for (int i = 0; i < CG; i++) if ($urandom_range(4) == 0) nx[i] = ~nx[i];
          if (g == 1) nx = x[g];   // an unchanged group is simply not sent
          if (nx != x[g]) begin
            b = '0; b.full = 0; b.first = (g == 0); b.grp = GRP_W'(g);
            b.data = nx; b.mask = nx ^ x[g];
            x[g] = nx;
            send(b);
          end
        end
      end
      for (int k = 0; k < 5; k++)
        for (int t = 0; t < NTAP; t++) begin
          checks++;
          if (rb[k][t] != RB_W'(dot(k, t))) begin
            failures++; $display("FAIL pixel %0d k%0d tap%0d: %0d vs %0d", p, k, t, rb[k][t], dot(k, t));
          end
        end
    end
    checks++;
    if (bit_ops != CNT_W'(exp_ops)) begin failures++; $display("FAIL bit_ops %0d exp %0d", bit_ops, exp_ops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
