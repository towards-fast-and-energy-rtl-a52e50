// tb_wr_pe: weight-reuse PE against a behavioural model. A model data buffer
// (one-cycle read latency, address pixel * cgrp + group) holds NPIX pixels of
// NG groups, and a model reuse buffer (combinational read) holds the nine
// per-tap partial sums of each pixel. Random kernels are broadcast group by
// group: the first kernel as full words, later kernels as new weights plus
// change mask (random masks, some empty). After each word every reuse-buffer
// entry is compared with the model's +-1 dot product of the pixel with the
// kernel's current weights (for the first kernel, only the groups sent so
// far; later, groups not yet sent still hold the previous kernel's weights),
// and the bit-operation counter with the expected XNOR count.
module tb_wr_pe;
  import bnn_pkg::*;
  localparam int NPIX_MAX = 128, PW_ = 7, DB_AW = 10;
  localparam int NPIX = 37, NG = 3, NK = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PW_:0]     npix = (PW_+1)'(NPIX);
  logic [GRP_W-1:0] cgrp = GRP_W'(NG);
  logic             bus_valid = 0, bus_ready;
  wbcast_t          bus = '0;
  logic             db_rd_en;
  logic [DB_AW-1:0] db_rd_addr;
  logic [CG-1:0]    db_rd_data = '0;
  logic [PW_-1:0]   rb_rd_k, rb_wk;
  logic signed [NTAP-1:0][RB_W-1:0] rb_rd_data, rb_wdata;
  logic             rb_we;
  logic             clr_count = 0;
  logic [CNT_W-1:0] bit_ops;
  int checks = 0, failures = 0;

  wr_pe #(.NPIX_MAX(NPIX_MAX), .PW_(PW_), .DB_AW(DB_AW)) dut (.*);

  logic [CG-1:0] ia [NPIX*NG];
  logic signed [NTAP-1:0][RB_W-1:0] rb [NPIX_MAX];
  always_ff @(posedge clk) if (db_rd_en) db_rd_data <= ia[db_rd_addr];
  assign rb_rd_data = rb[rb_rd_k];
  always_ff @(posedge clk) if (rb_we) rb[rb_wk] <= rb_wdata;

  logic [CG-1:0] wk [NTAP][NG];       // current kernel's real weights
  int            model [NPIX][NTAP];  // expected partial sums
  longint        ops_exp = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CG-1:0] m;
    int d;
    for (int i = 0; i < NPIX*NG; i++) ia[i] = CG'($urandom);
    for (int i = 0; i < NPIX_MAX; i++) rb[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NK; k++)
      for (int g = 0; g < NG; g++) begin
        bus = '0;
        bus.full = (k == 0); bus.first = (g == 0); bus.grp = GRP_W'(g);
        for (int t = 0; t < NTAP; t++) begin
          if (k == 0) m = '1;
          else if ($urandom_range(3) == 0) m = '0;
          else m = CG'($urandom) & CG'($urandom);
          wk[t][g] = (k == 0) ? CG'($urandom) : (wk[t][g] ^ m);
          bus.data[t*CG +: CG] = wk[t][g];
          bus.mask[t*CG +: CG] = m;
          ops_exp += NPIX * ((k == 0) ? CG : $countones(m));
        end
        // model: dot product of each pixel with the current weights of every
        // group seen so far (for the first kernel only groups 0..g exist)
        for (int p = 0; p < NPIX; p++)
          for (int t = 0; t < NTAP; t++) begin
            model[p][t] = 0;
            for (int q = 0; q < NG; q++)
              if (k > 0 || q <= g) begin
                d = CG - 2 * $countones(ia[p*NG + q] ^ wk[t][q]);
                model[p][t] += d;
              end
          end
        @(negedge clk);
        bus_valid = 1;
        while (!bus_ready) @(negedge clk);
        @(negedge clk);
        bus_valid = 0;
        while (!bus_ready) @(negedge clk);
        @(negedge clk);
        for (int p = 0; p < NPIX; p++)
          for (int t = 0; t < NTAP; t++) begin
            checks++;
            if (int'($signed(rb[p][t])) != model[p][t]) begin
              failures++;
              if (failures < 10)
                $display("FAIL kernel %0d grp %0d pixel %0d tap %0d: %0d exp %0d",
                         k, g, p, t, $signed(rb[p][t]), model[p][t]);
            end
          end
        checks++;
        if (bit_ops != CNT_W'(ops_exp)) begin
          failures++; $display("FAIL bit ops %0d exp %0d", bit_ops, ops_exp);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
