// tb_oa_bank: clears an OA bank, then streams random accumulations into a
// small address range (so consecutive adds often hit the same word, which
// exercises the read-modify-write forwarding) with gaps of random length, and
// checks every word through the read port against a model. A second clear
// must zero exactly clear_len words and leave the words above untouched.
module tb_oa_bank;
  import bnn_pkg::*;
  localparam int DEPTH = 16384, AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear_start = 0, clear_busy, acc_valid = 0, rd_en = 0;
  logic [AW:0] clear_len = 0;
  logic [AW-1:0] acc_addr = 0, rd_addr = 0;
  logic signed [RB_W-1:0] acc_val = 0;
  logic signed [ACC_W-1:0] rd_data;
  int checks = 0, failures = 0, same = 0;
  int model [64];

  oa_bank dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear(input int n);
    @(negedge clk); clear_start = 1; clear_len = (AW+1)'(n);
    @(negedge clk); clear_start = 0;
    while (clear_busy) @(negedge clk);
  endtask

  task automatic check_all(input string tag, input int upto);
    for (int a = 0; a < upto; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != ACC_W'(model[a])) begin
        failures++; $display("FAIL %s addr %0d: %0d vs %0d", tag, a, rd_data, model[a]);
      end
    end
  endtask

  initial begin
    int a, last = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear(64);
    foreach (model[i]) model[i] = 0;
    check_all("cleared", 64);
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if ($urandom_range(3) == 0) begin
        acc_valid = 0;
        last = -1;
      end else begin
        a = (last >= 0 && $urandom_range(2) == 0) ? last : $urandom_range(63);
        if (a == last) same++;
        acc_valid = 1; acc_addr = AW'(a);
        acc_val = RB_W'($urandom_range(1024) - 512);
        model[a] += int'(acc_val);
        last = a;
      end
    end
    @(negedge clk) acc_valid = 0;
    repeat (2) @(negedge clk);
    check_all("accumulated", 64);
    clear(40);
    for (int i = 0; i < 40; i++) model[i] = 0;
    check_all("partly cleared", 64);
    checks++;
    if (same == 0) begin failures++; $display("FAIL no back-to-back adds"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
