// tb_bn_engine: fills model OA banks of 8 PEs (one-cycle read latency) with
// random sums, loads random thresholds, runs the engine with and without
// pooling, and checks every written word against
//   bit(ho, wo, k) = sum(ho, wo, k) < thr[k],  pooled = AND over 2x2,
// with kernel k taken from PE k mod 8 at local index k / 8, and the word
// address (py * pw + px) * (K / 16) + k / 16. It also checks that one OA read
// is issued per cycle (run time = reads + a few cycles).
module tb_bn_engine;
  import bnn_pkg::*;
  localparam int NPE = 8, OA_AW = 14, DB_AW = 13, K_W = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, pool = 0, thr_we = 0;
  logic [DIM_W-1:0] out_h = 0, out_w = 0;
  logic [KPP_W-1:0] kpp = 0;
  logic [K_W-1:0] thr_addr = 0;
  logic signed [ACC_W-1:0] thr_data = 0;
  logic oa_rd_en;
  logic [OA_AW-1:0] oa_rd_addr;
  logic signed [ACC_W-1:0] oa_rd_data [NPE];
  logic db_wr_en, busy, done;
  logic [DB_AW-1:0] db_wr_addr;
  logic [CG-1:0] db_wr_data;
  int checks = 0, failures = 0;

  bn_engine dut (.*);

  int oa [NPE][4096];
  int thr [64];
  logic [CG-1:0] got [int];
  always_ff @(posedge clk)
    if (oa_rd_en) for (int p = 0; p < NPE; p++) oa_rd_data[p] <= ACC_W'(oa[p][oa_rd_addr]);
  always_ff @(posedge clk) if (db_wr_en) got[int'(db_wr_addr)] = db_wr_data;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit bitof(int ho, int wo, int k, int ow, int kp);
    return oa[k % NPE][(ho*ow + wo)*kp + k / NPE] < thr[k];
  endfunction

  task automatic run(input int oh, input int ow, input int K, input bit pl);
    int ph, pw, t0, cyc, b;
    logic [CG-1:0] e;
    out_h = DIM_W'(oh); out_w = DIM_W'(ow); kpp = KPP_W'(K / NPE); pool = pl;
    for (int p = 0; p < NPE; p++) for (int a = 0; a < 4096; a++) oa[p][a] = $urandom_range(60) - 30;
    for (int k = 0; k < K; k++) begin
      thr[k] = $urandom_range(20) - 10;
      @(negedge clk); thr_we = 1; thr_addr = K_W'(k); thr_data = ACC_W'(thr[k]);
    end
    @(negedge clk); thr_we = 0;
    got.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    ph = pl ? oh/2 : oh; pw = pl ? ow/2 : ow;
    checks++;
    if (cyc > oh*ow*K / (pl ? 1 : 1) + 4 || cyc < (pl ? 4*ph*pw : ph*pw)*K) begin
      failures++; $display("FAIL run time %0d cycles for %0d reads", cyc, (pl ? 4*ph*pw : ph*pw)*K);
    end
    checks++;
    if (got.size() != ph*pw*K/CG) begin failures++; $display("FAIL %0d words written", got.size()); end
    for (int py = 0; py < ph; py++)
      for (int px = 0; px < pw; px++)
        for (int kg = 0; kg < K/CG; kg++) begin
          for (int i = 0; i < CG; i++) begin
            int k = kg*CG + i;
            if (pl) b = bitof(2*py, 2*px, k, ow, K/NPE) & bitof(2*py, 2*px+1, k, ow, K/NPE) &
                        bitof(2*py+1, 2*px, k, ow, K/NPE) & bitof(2*py+1, 2*px+1, k, ow, K/NPE);
            else    b = bitof(py, px, k, ow, K/NPE);
            e[i] = 1'(b);
          end
          checks++;
          if (!got.exists((py*pw + px)*(K/CG) + kg) || got[(py*pw + px)*(K/CG) + kg] != e) begin
            failures++;
            if (failures < 10) $display("FAIL pool=%0d (%0d,%0d) group %0d", pl, py, px, kg);
          end
        end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(6, 6, 32, 0);
    run(8, 6, 48, 1);
    run(4, 4, 16, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
