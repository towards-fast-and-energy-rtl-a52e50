// addr_gen: address generator of the accumulation stage.
//
// After the last channel group of input pixel (h, w) has been broadcast, every
// reuse-buffer entry (kernel k, tap (r, s)) belongs to ofmap position
//   (h - r, w - s, k)            without padding, or
//   (h - r + 1, w - s + 1, k)    with padding,
// which is the paper's address rule. This block steps through k = 0..kpp-1
// and, for each k, the nine taps (r, s) in row-major order, one entry per
// cycle, and gives the OA bank address (ho * out_w + wo) * kpp + k of each
// entry together with in_range, which is low when the position falls outside
// the output map (the entry then adds nothing: zero padding). One generator
// serves all PEs, since every PE's OA bank has the same layout.
//
// Interface: start (with h, w, pad, kpp, out_h, out_w stable until done);
// during the 9 * kpp cycles that follow, step = 1 and k, tap, in_range and
// oa_addr describe the current entry; done pulses in the cycle after the last.
module addr_gen
  import bnn_pkg::*;
#(
  parameter int unsigned KPP_MAX = 64,
  parameter int unsigned KW      = $clog2(KPP_MAX),
  parameter int unsigned OA_AW   = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] h,
  input  logic [DIM_W-1:0] w,
  input  logic             pad,
  input  logic [KPP_W-1:0] kpp,
  input  logic [DIM_W-1:0] out_h,
  input  logic [DIM_W-1:0] out_w,
  output logic             step,
  output logic [KW-1:0]    k,
  output logic [TAP_W-1:0] tap,
  output logic             in_range,
  output logic [OA_AW-1:0] oa_addr,
  output logic             done
);
  logic [1:0] r, s;
  logic signed [DIM_W+1:0] ho, wo;
  logic [KW:0] kc;

  assign k   = kc[KW-1:0];
  assign tap = TAP_W'(r * KS + s);
  assign ho  = $signed({2'b00, h}) + $signed({{(DIM_W+1){1'b0}}, pad}) - $signed({{DIM_W{1'b0}}, r});
  assign wo  = $signed({2'b00, w}) + $signed({{(DIM_W+1){1'b0}}, pad}) - $signed({{DIM_W{1'b0}}, s});
  assign in_range = (ho >= 0) && (ho < $signed({2'b00, out_h})) &&
                    (wo >= 0) && (wo < $signed({2'b00, out_w}));
  assign oa_addr  = OA_AW'((32'(ho[DIM_W-1:0]) * 32'(out_w) + 32'(wo[DIM_W-1:0])) * 32'(kpp)
                           + 32'(kc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= 1'b0;
      r    <= '0;
      s    <= '0;
      kc   <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !step) begin
        step <= (kpp != '0);
        done <= (kpp == '0);
        r    <= '0;
        s    <= '0;
        kc   <= '0;
      end else if (step) begin
        if (s == 2'(KS - 1)) begin
          s <= '0;
          if (r == 2'(KR - 1)) begin
            r  <= '0;
            kc <= kc + 1'b1;
            if (kc + 1'b1 >= (KW+1)'(kpp)) begin
              step <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            r <= r + 1'b1;
          end
        end else begin
          s <= s + 1'b1;
        end
      end
    end
  end
endmodule
