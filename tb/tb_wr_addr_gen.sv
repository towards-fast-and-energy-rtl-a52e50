// tb_wr_addr_gen: runs the weight-reuse address generator over several layer
// shapes (rows per PE 1..4, widths, with and without padding, kernel counts
// and kernel indices) and checks, entry by entry, the sequence of local pixel
// and tap, the shared OA address ((h_loc - r + 2) * out_w + wo) * K + k, the
// row offset h_loc - r + pad, the column range flag, the number of steps
// (9 * rpp * W) and the done pulse.
module tb_wr_addr_gen;
  import bnn_pkg::*;
  localparam int RPP_MAX = 4, PW_ = 7, OA_AW = 15, K_W = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [2:0] rpp = 0;
  logic [DIM_W-1:0] in_w = 0, out_w = 0;
  logic pad = 0;
  logic [K_W:0] kcount = 0;
  logic [K_W-1:0] k = 0;
  logic step, wo_ok, done;
  logic [PW_-1:0] pix;
  logic [TAP_W-1:0] tap;
  logic signed [DIM_W+1:0] hrel;
  logic [2:0] h_loc;
  logic [OA_AW-1:0] oa_addr;
  int checks = 0, failures = 0;

  wr_addr_gen #(.RPP_MAX(RPP_MAX), .PW_(PW_), .OA_AW(OA_AW), .K_W(K_W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int r_, int w_, int p_, int kc, int kk);
    int n, wo, ho_rel, e_addr;
    bit ok;
    rpp = 3'(r_); in_w = DIM_W'(w_); pad = 1'(p_); out_w = DIM_W'(w_ + 2*p_ - 2);
    kcount = (K_W+1)'(kc); k = K_W'(kk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n = 0;
    for (int hl = 0; hl < r_; hl++)
      for (int w = 0; w < w_; w++)
        for (int r = 0; r < KR; r++)
          for (int s = 0; s < KS; s++) begin
            ok = step && (int'(pix) == hl*w_ + w) && (int'(tap) == r*KS + s) &&
                 (int'(h_loc) == hl) && (int'(hrel) == hl - r + p_);
            wo = w - s + p_;
            checks++;
            if (wo_ok != (wo >= 0 && wo < w_ + 2*p_ - 2)) ok = 0;
            if (wo >= 0 && wo < w_ + 2*p_ - 2) begin
              e_addr = ((hl - r + 2) * (w_ + 2*p_ - 2) + wo) * kc + kk;
              if (int'(oa_addr) != e_addr) ok = 0;
            end
            if (!ok) begin
              failures++;
              if (failures < 10)
                $display("FAIL rpp %0d W %0d pad %0d: step %0d pix %0d tap %0d hrel %0d addr %0d exp pix %0d tap %0d",
                         r_, w_, p_, step, pix, tap, hrel, oa_addr, hl*w_ + w, r*KS + s);
            end
            n++;
            @(negedge clk);
          end
    checks++;
    if (step || !done) begin failures++; $display("FAIL end: step %0d done %0d", step, done); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1, 4, 1, 16, 3);
    run(2, 8, 0, 32, 31);
    run(3, 6, 1, 96, 50);
    run(4, 32, 1, 128, 127);
    run(1, 8, 0, 512, 511);
    for (int i = 0; i < 6; i++)
      run($urandom_range(1, 4), $urandom_range(3, 12), $urandom_range(1), 16 * $urandom_range(1, 8),
          $urandom_range(15));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
