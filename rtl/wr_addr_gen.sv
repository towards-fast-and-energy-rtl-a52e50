// wr_addr_gen: address generator of the weight-reuse accumulation stage.
//
// After the last channel group of one kernel (original index k) has been
// broadcast, reuse-buffer entry (local pixel p, tap (r, s)) of a PE belongs to
// ofmap position (h - r + pad, w - s + pad, k), where h = h0 + p / W is the
// global row (h0 = first row the PE holds) and w = p % W. Each PE keeps its own
// OA bank that covers the output rows its input rows can reach, so the
// bank-local row is lr = h_loc - r + 2 (0 .. rpp + 1), the same for every PE.
// This block steps through the local pixels p = 0 .. rpp * W - 1 and, for each,
// the nine taps, one entry per cycle, and gives:
//   oa_addr = (lr * out_w + wo) * K + k   (shared by all PEs)
//   hrel    = h_loc - r + pad             (PE adds h0 and checks 0..out_h-1)
//   wo_ok   = 0 <= wo < out_w
// The address rule follows the paper; the per-PE bank layout with two halo
// rows and the final cross-PE sum are this design's own choices.
// Interface: start with the inputs stable until done; step is high for
// 9 * rpp * in_w cycles; done pulses in the cycle after the last entry.
module wr_addr_gen
  import bnn_pkg::*;
#(
  parameter int unsigned RPP_MAX = 4,
  parameter int unsigned PW_     = $clog2(RPP_MAX * HW_MAX),
  parameter int unsigned OA_AW   = 15,
  parameter int unsigned K_W     = $clog2(K_MAX)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [2:0]              rpp,
  input  logic [DIM_W-1:0]        in_w,
  input  logic                    pad,
  input  logic [K_W:0]            kcount,
  input  logic [K_W-1:0]          k,
  input  logic [DIM_W-1:0]        out_w,
  output logic                    step,
  output logic [PW_-1:0]          pix,
  output logic [TAP_W-1:0]        tap,
  output logic signed [DIM_W+1:0] hrel,
  output logic [2:0]              h_loc,
  output logic                    wo_ok,
  output logic [OA_AW-1:0]        oa_addr,
  output logic                    done
);
  logic [1:0] r, s;
  logic [2:0] hl;
  logic [DIM_W-1:0] w;
  logic signed [DIM_W+1:0] wo;
  logic [2:0] lr;

  assign h_loc = hl;
  assign tap   = TAP_W'(r * KS + s);
  assign pix   = PW_'(32'(hl) * 32'(in_w) + 32'(w));
  assign hrel  = $signed({{(DIM_W-1){1'b0}}, hl}) + $signed({{(DIM_W+1){1'b0}}, pad})
               - $signed({{DIM_W{1'b0}}, r});
  assign wo    = $signed({2'b00, w}) + $signed({{(DIM_W+1){1'b0}}, pad})
               - $signed({{DIM_W{1'b0}}, s});
  assign wo_ok = (wo >= 0) && (wo < $signed({2'b00, out_w}));
  assign lr    = hl + 3'd2 - 3'(r);
  assign oa_addr = OA_AW'((32'(lr) * 32'(out_w) + 32'(wo[DIM_W-1:0])) * 32'(kcount)
                          + 32'(k));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= 1'b0;
      r    <= '0;
      s    <= '0;
      hl   <= '0;
      w    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !step) begin
        step <= (rpp != '0) && (in_w != '0);
        done <= (rpp == '0) || (in_w == '0);
        r    <= '0;
        s    <= '0;
        hl   <= '0;
        w    <= '0;
      end else if (step) begin
        if (s != 2'(KS - 1)) s <= s + 1'b1;
        else begin
          s <= '0;
          if (r != 2'(KR - 1)) r <= r + 1'b1;
          else begin
            r <= '0;
            if (w != in_w - 1'b1) w <= w + 1'b1;
            else begin
              w <= '0;
              if (hl != rpp - 1'b1) hl <= hl + 1'b1;
              else begin
                hl   <= '0;
                step <= 1'b0;
                done <= 1'b1;
              end
            end
          end
        end
      end
    end
  end
endmodule
