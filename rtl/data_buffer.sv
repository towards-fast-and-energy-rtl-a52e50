// data_buffer: one of the two equally sized input-activation buffers (A, B).
//
// The accelerator owns two of these. During a layer one is read (by the
// checking engine) and the other is written (by the batch-normalization
// engine's write-back); the roles swap for the next layer so activations never
// leave the chip between layers. The A/B pair and the swap follow the paper;
// the word format is this design's own: one word holds CG consecutive channels
// of one pixel, and pixel (h, w) channel group g lives at
// (h * W + w) * (C / CG) + g.
//
// Interface: one synchronous read port (data valid the cycle after rd_en) and
// one write port. A read and a write in the same cycle are allowed; the read
// then returns the old word.
// Default depth: 32 x 32 pixels x 128 channels / 16 = 8192 words, the largest
// activation map of the BinaryNet layers (conv1 input).
module data_buffer #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
