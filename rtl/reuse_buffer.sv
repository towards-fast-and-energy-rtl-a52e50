// reuse_buffer: per-PE store of the latest partial dot products.
//
// Entry k holds, for the PE's local kernel k, the nine partial results
//   P(r, s, k) = sum_c IA(h, w, c) * W(r, s, c, k)
// of the most recently processed input pixel, one per tap (r, s), as the 3x3
// grid drawn inside each reuse buffer of the paper's block diagram. The PE
// rewrites an entry when a broadcast reaches it (STAGE I: fresh value, STAGE
// II: updated from the old one), and the accumulator reads entries to scatter
// them into the OA bank. Keeping the previous pixel's values is what lets the
// next pixel be computed from its difference only.
//
// Interface: two combinational read ports (PE update port a, accumulator port
// b) and one write port; flip-flop storage, cleared at reset. A write is seen
// by the reads from the next cycle.
// Default: 64 kernels per PE (512 kernels / 8 PEs) x 9 taps x 12 bits.
module reuse_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned KPP_MAX = 64,
  parameter int unsigned KW      = $clog2(KPP_MAX)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [KW-1:0]                       a_k,
  output logic signed [NTAP-1:0][RB_W-1:0]    a_data,
  input  logic [KW-1:0]                       b_k,
  output logic signed [NTAP-1:0][RB_W-1:0]    b_data,
  input  logic                                we,
  input  logic [KW-1:0]                       w_k,
  input  logic signed [NTAP-1:0][RB_W-1:0]    w_data
);
  logic [NTAP-1:0][RB_W-1:0] mem [KPP_MAX];

  assign a_data = mem[a_k];
  assign b_data = mem[b_k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < KPP_MAX; i++) mem[i] <= '0;
    end else if (we) begin
      mem[w_k] <= w_data;
    end
  end
endmodule
