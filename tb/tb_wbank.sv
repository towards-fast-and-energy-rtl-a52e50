// tb_wbank: fills random addresses of a weight bank with random 144-bit words,
// reads them back against a shadow copy, and checks that the read counter
// counts exactly the reads issued and clears on clr_count.
module tb_wbank;
  localparam int DEPTH = 2048, WIDTH = 144, AW = 11, CW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0, clr_count = 0;
  logic [AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [WIDTH-1:0] rd_data, wr_data = 0;
  logic [CW-1:0] rd_count;
  int checks = 0, failures = 0, nreads = 0;

  wbank dut (.*);

  logic [WIDTH-1:0] shadow [int];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      a = $urandom_range(DEPTH-1);
      wr_en = 1; wr_addr = AW'(a);
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom};
      shadow[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    checks++;
    if (rd_count != 0) begin failures++; $display("FAIL count before reads"); end
    foreach (shadow[k]) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(k); nreads++;
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== shadow[k]) begin failures++; $display("FAIL addr %0d", k); end
    end
    checks++;
    if (rd_count != CW'(nreads)) begin
      failures++; $display("FAIL rd_count %0d, expected %0d", rd_count, nreads);
    end
    @(negedge clk) clr_count = 1;
    @(negedge clk) clr_count = 0;
    checks++;
    if (rd_count != 0) begin failures++; $display("FAIL count not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
