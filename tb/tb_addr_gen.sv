// tb_addr_gen: for random pixels (h, w), padding modes, map sizes and kernel
// counts, checks that the generator steps through exactly 9 * kpp entries
// (k outer, taps row-major inner), that each entry's in_range matches the
// ofmap position (h - r + pad, w - s + pad) lying inside the map, and that
// in-range entries carry the address (ho * out_w + wo) * kpp + k. It also
// checks that done follows the last step.
module tb_addr_gen;
  import bnn_pkg::*;
  localparam int KW = 6, OA_AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, pad = 0;
  logic [DIM_W-1:0] h = 0, w = 0, out_h = 0, out_w = 0;
  logic [KPP_W-1:0] kpp = 0;
  logic step, in_range, done;
  logic [KW-1:0] k;
  logic [TAP_W-1:0] tap;
  logic [OA_AW-1:0] oa_addr;
  int checks = 0, failures = 0, n_in = 0, n_out = 0;

  addr_gen dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, ih, iw, ho, wo, r, s, kk;
    bit ok;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      ih = (it % 3 == 0) ? 32 : $urandom_range(3, 16);
      iw = (it % 3 == 0) ? 32 : $urandom_range(3, 16);
      pad = 1'($urandom_range(1));
      out_h = DIM_W'(ih + 2*pad - 2); out_w = DIM_W'(iw + 2*pad - 2);
      h = DIM_W'((it % 5 == 0) ? 0 : $urandom_range(ih - 1));
      w = DIM_W'((it % 7 == 0) ? iw - 1 : $urandom_range(iw - 1));
      kpp = KPP_W'((it % 3 == 0) ? 16 : $urandom_range(1, 64));
      if (32'(out_h) * 32'(out_w) * 32'(kpp) > 16384) kpp = KPP_W'(16384 / (32'(out_h) * 32'(out_w)));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n = 0;
      while (step) begin
        r = n % 9 / 3; s = n % 3; kk = n / 9;
        ho = int'(h) - r + int'(pad);
        wo = int'(w) - s + int'(pad);
        ok = ho >= 0 && ho < int'(out_h) && wo >= 0 && wo < int'(out_w);
        checks++;
        if (k != KW'(kk) || tap != TAP_W'(r*3 + s) || in_range != ok ||
            (ok && oa_addr != OA_AW'((ho*int'(out_w) + wo)*int'(kpp) + kk))) begin
          failures++;
          if (failures < 10) $display("FAIL it %0d entry %0d: k=%0d tap=%0d in=%0d addr=%0d", it, n, k, tap, in_range, oa_addr);
        end
        if (ok) n_in++; else n_out++;
        n++;
        @(negedge clk);
      end
      checks++;
      if (n != 9*int'(kpp)) begin failures++; $display("FAIL it %0d: %0d steps for kpp %0d", it, n, kpp); end
      checks++;
      if (!done) begin failures++; $display("FAIL it %0d: no done", it); end
    end
    checks++;
    if (n_in == 0 || n_out == 0) begin failures++; $display("FAIL coverage in %0d out %0d", n_in, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
