// tb_wr_bn: weight-reuse batch-normalization engine against a model. Model
// OA banks (one-cycle read latency) of 8 PEs are filled with random partial
// sums; for several layer shapes (rows per PE 1..3, padding on/off, pooling
// on/off) the expected output bit of (ho, wo, k) is
//   (sum over PEs i whose band reaches ho of bank_i[(lr_i*out_w+wo)*K+k]) < thr[k]
// with lr_i = ho + 2 - pad - i*rpp, ANDed over 2x2 windows when pooling. Every
// write-back (PE, address, word) is captured into model data buffers and
// compared with the expectation; a missing or extra word is a failure.
module tb_wr_bn;
  import bnn_pkg::*;
  localparam int NPE = 8, OA_AW = 15, DB_AW = 10, K_W = 9;
  localparam int OAD = 1 << OA_AW, DBD = 1 << DB_AW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [DIM_W-1:0] out_h = 0, out_w = 0;
  logic [K_W:0] kcount = 0;
  logic pool = 0, pad = 0;
  logic [2:0] rpp = 0, rpp_o = 0;
  logic thr_we = 0;
  logic [K_W-1:0] thr_addr = 0;
  logic signed [ACC_W-1:0] thr_data = 0;
  logic oa_rd_en;
  logic [OA_AW-1:0] oa_rd_addr [NPE];
  logic signed [ACC_W-1:0] oa_rd_data [NPE];
  logic db_wr_en;
  logic [2:0] db_wr_pe;
  logic [DB_AW-1:0] db_wr_addr;
  logic [CG-1:0] db_wr_data;
  logic busy, done;
  int checks = 0, failures = 0;

  wr_bn #(.NPE(NPE), .OA_AW(OA_AW), .DB_AW(DB_AW), .K_W(K_W)) dut (.*);

  logic signed [ACC_W-1:0] oa [NPE][OAD];
  logic [CG-1:0] db [NPE][DBD];
  bit            dbw [NPE][DBD];
  int            thr [K_MAX];
  int            n_writes = 0;

  for (genvar i = 0; i < NPE; i++) begin : g_oa
    always_ff @(posedge clk) if (oa_rd_en) oa_rd_data[i] <= oa[i][oa_rd_addr[i]];
  end
  always @(posedge clk) if (db_wr_en) begin
    db[db_wr_pe][db_wr_addr] <= db_wr_data;
    dbw[db_wr_pe][db_wr_addr] <= 1;
    n_writes++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ebit(int ho, int wo, int K, int p, int rp, int ow, int k);
    int sum, lr;
    sum = 0;
    for (int i = 0; i < NPE; i++) begin
      lr = ho + 2 - p - i*rp;
      if (lr >= 0 && lr <= rp + 1) sum += int'(oa[i][(lr*ow + wo)*K + k]);
    end
    return sum < thr[k];
  endfunction

  task automatic run(int in_h, int in_w, int K, int p, int pl);
    int oh, ow, ph, pw, rp, rpo, pe, a, e;
    bit b;
    logic [CG-1:0] ew;
    oh = in_h + 2*p - 2; ow = in_w + 2*p - 2;
    ph = pl ? oh/2 : oh; pw = pl ? ow/2 : ow;
    rp = (in_h + NPE - 1) / NPE; rpo = (ph + NPE - 1) / NPE;
    for (int i = 0; i < NPE; i++)
      for (int j = 0; j < (rp + 2)*ow*K; j++) oa[i][j] = ACC_W'($urandom_range(40) - 20);
    for (int k = 0; k < K; k++) begin
      thr[k] = $urandom_range(40) - 20;
      @(negedge clk); thr_we = 1; thr_addr = K_W'(k); thr_data = ACC_W'(thr[k]);
    end
    @(negedge clk); thr_we = 0;
    for (int i = 0; i < NPE; i++) for (int j = 0; j < DBD; j++) dbw[i][j] = 0;
    n_writes = 0;
    out_h = DIM_W'(oh); out_w = DIM_W'(ow); kcount = (K_W+1)'(K); pool = 1'(pl); pad = 1'(p);
    rpp = 3'(rp); rpp_o = 3'(rpo);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (n_writes != ph*pw*K/CG) begin failures++; $display("FAIL writes %0d exp %0d", n_writes, ph*pw*K/CG); end
    for (int py = 0; py < ph; py++)
      for (int px = 0; px < pw; px++)
        for (int kg = 0; kg < K/CG; kg++) begin
          for (int kk = 0; kk < CG; kk++) begin
            if (pl) b = ebit(2*py, 2*px, K, p, rp, ow, kg*CG+kk) & ebit(2*py, 2*px+1, K, p, rp, ow, kg*CG+kk) &
                        ebit(2*py+1, 2*px, K, p, rp, ow, kg*CG+kk) & ebit(2*py+1, 2*px+1, K, p, rp, ow, kg*CG+kk);
            else b = ebit(py, px, K, p, rp, ow, kg*CG+kk);
            ew[kk] = b;
          end
          pe = py / rpo; a = ((py % rpo)*pw + px)*(K/CG) + kg;
          checks++;
          if (!dbw[pe][a] || db[pe][a] != ew) begin
            failures++;
            if (failures < 10)
              $display("FAIL H%0d K%0d pad %0d pool %0d (%0d,%0d,g%0d): pe %0d addr %0d got %h (written %0d) exp %h",
                       in_h, K, p, pl, py, px, kg, pe, a, db[pe][a], dbw[pe][a], ew);
          end
        end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8, 8, 16, 1, 1);
    run(16, 6, 32, 1, 0);
    run(20, 6, 32, 1, 0);
    run(14, 10, 32, 0, 1);
    run(6, 5, 16, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
