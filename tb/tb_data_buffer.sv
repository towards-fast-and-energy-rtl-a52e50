// tb_data_buffer: writes random words to random addresses of a data buffer,
// reads them back against a shadow copy, and checks that a read in the cycle
// of a write to the same address returns the old word.
module tb_data_buffer;
  localparam int DEPTH = 8192, WIDTH = 16, AW = 13;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [WIDTH-1:0] rd_data, wr_data = 0;
  int checks = 0, failures = 0;

  data_buffer dut (.*);

  logic [WIDTH-1:0] shadow [int];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    logic [WIDTH-1:0] old;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      a = $urandom_range(DEPTH-1);
      wr_en = 1; wr_addr = AW'(a); wr_data = WIDTH'($urandom);
      shadow[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    foreach (shadow[k]) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(k);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== shadow[k]) begin
        failures++; $display("FAIL addr %0d: %h vs %h", k, rd_data, shadow[k]);
      end
    end
    // read-during-write
    foreach (shadow[k]) begin
      old = shadow[k];
      @(negedge clk); rd_en = 1; rd_addr = AW'(k); wr_en = 1; wr_addr = AW'(k); wr_data = ~old;
      @(negedge clk); rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== old) begin failures++; $display("FAIL rdw addr %0d", k); end
      @(negedge clk); rd_en = 1;
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== ~old) begin failures++; $display("FAIL new addr %0d", k); end
      break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
