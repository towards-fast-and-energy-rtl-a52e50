// oa_bank: output-activation (OA) bank of one PE with its accumulator.
//
// Holds the integer ofmap sums of the PE's kernels for the whole output map,
// word (ho * out_w + wo) * kpp + k_local. During the accumulation stage the
// address generator presents one reuse-buffer entry per cycle; the bank adds
// it to the word at that address (the adder drawn beside each OA bank in the
// paper's block diagram). The add is a two-stage read-modify-write (read,
// then write the sum) with forwarding, so back-to-back adds to one address
// are also correct. At the start of a layer the controller clears the first
// clear_len words, one per cycle (clear_busy is high meanwhile). After the
// layer the batch-normalization engine reads the sums through the read port.
//
// Interface: acc_valid/acc_addr/acc_val (no back-pressure), rd_en/rd_addr
// with data the next cycle, clear_start/clear_len/clear_busy.
// Default depth: 16384 = 32 x 32 positions x 128 kernels / 8 PEs (conv1).
module oa_bank
  import bnn_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear_start,
  input  logic [AW:0]             clear_len,
  output logic                    clear_busy,
  input  logic                    acc_valid,
  input  logic [AW-1:0]           acc_addr,
  input  logic signed [RB_W-1:0]  acc_val,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic signed [ACC_W-1:0] rd_data
);
  logic signed [ACC_W-1:0] mem [DEPTH];

  logic                    v1, fwd;
  logic [AW-1:0]           a1;
  logic signed [RB_W-1:0]  val1;
  logic signed [ACC_W-1:0] rd1, last_sum, sum;
  logic [AW:0]             clr_cnt, clr_len;

  assign sum = (fwd ? last_sum : rd1) + ACC_W'(val1);

  // Pipeline control.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1         <= 1'b0;
      fwd        <= 1'b0;
      a1         <= '0;
      val1       <= '0;
      last_sum   <= '0;
      clear_busy <= 1'b0;
      clr_cnt    <= '0;
      clr_len    <= '0;
    end else begin
      v1       <= acc_valid;
      a1       <= acc_addr;
      val1     <= acc_val;
      fwd      <= v1 && acc_valid && (a1 == acc_addr);
      last_sum <= sum;
      if (clear_start) begin
        clear_busy <= (clear_len != '0);
        clr_cnt    <= '0;
        clr_len    <= clear_len;
      end else if (clear_busy) begin
        clr_cnt <= clr_cnt + 1'b1;
        if (clr_cnt + 1'b1 >= clr_len) clear_busy <= 1'b0;
      end
    end
  end

  // Storage: one write port (clear or accumulate), two read ports.
  always_ff @(posedge clk) begin
    if (clear_busy)  mem[clr_cnt[AW-1:0]] <= '0;
    else if (v1)     mem[a1] <= sum;
    if (acc_valid) rd1 <= mem[acc_addr];
    if (rd_en)     rd_data <= mem[rd_addr];
  end
endmodule
