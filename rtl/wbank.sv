// wbank: weight memory bank of one processing element (PE).
//
// Kernels are split across the PEs along the kernel index k, so a PE's bank
// holds only its own kernels and its ofmaps never interleave with another
// PE's. A word holds all 3x3 taps of one kernel for one channel group of CG
// channels: bit (r*3 + s)*CG + i is W(r, s, g*CG + i, k). Kernel k_local,
// group g is stored at address k_local * 32 + g (32 = 512 / CG groups), which
// keeps the address a bit concatenation.
//
// The bank counts the words it delivers (rd_count), the "weight bank access"
// figure the input-reuse scheme reduces. rd_count clears on clr_count.
// Interface: synchronous read (data the cycle after rd_en), one write port.
// Default: 2048 words x 144 bits = 64 kernels x 512 channels x 9, i.e. the
// 2.3 Mbit conv5 weights split over 8 PEs.
module wbank #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 144,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned CW    = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             clr_count,
  output logic [CW-1:0]    rd_count
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rd_count <= '0;
    else if (clr_count) rd_count <= '0;
    else if (rd_en)     rd_count <= rd_count + 1'b1;
  end
endmodule
