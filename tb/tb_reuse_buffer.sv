// tb_reuse_buffer: writes random nine-tap entries, checks both read ports
// against a shadow copy (including reset to zero), and that a write is
// visible from the next cycle.
module tb_reuse_buffer;
  import bnn_pkg::*;
  localparam int KPP_MAX = 64, KW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KW-1:0] a_k = 0, b_k = 0, w_k = 0;
  logic signed [NTAP-1:0][RB_W-1:0] a_data, b_data, w_data = '0;
  logic we = 0;
  int checks = 0, failures = 0;

  reuse_buffer dut (.*);

  logic [NTAP-1:0][RB_W-1:0] shadow [KPP_MAX];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < KPP_MAX; k++) begin
      shadow[k] = '0;
      a_k = KW'(k); b_k = KW'(KPP_MAX - 1 - k);
      #1;
      checks++;
      if (a_data !== '0 || b_data !== '0) begin failures++; $display("FAIL reset %0d", k); end
    end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      we = 1; w_k = KW'($urandom_range(KPP_MAX-1));
      for (int j = 0; j < NTAP; j++) w_data[j] = RB_W'($urandom);
      shadow[w_k] = w_data;
      @(negedge clk);
      we = 0;
      a_k = w_k; b_k = KW'($urandom_range(KPP_MAX-1));
      #1;
      checks++;
      if (a_data !== shadow[a_k] || b_data !== shadow[b_k]) begin
        failures++; $display("FAIL read %0d/%0d", a_k, b_k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
