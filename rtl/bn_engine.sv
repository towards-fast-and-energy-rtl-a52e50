// bn_engine: batch-normalization, binarization and pooling engine with
// write-back.
//
// Once every input pixel of a layer has been accumulated, this engine gathers
// the ofmap sums from all PEs' OA banks (kernel k lives in PE k mod NPE at
// local index k / NPE), binarizes each by comparing it with the kernel's
// normalization threshold, optionally max-pools 2x2 windows, and packs CG
// consecutive kernels into one word that it writes to the other data buffer,
// where it is the next layer's input. Folding batch normalization and the
// sign activation into one comparison against a threshold computed offline,
// and pooling with a boolean AND, follow the paper. With the encoding
// 0 = +1, 1 = -1 the output bit is 1 when sum < thr[k], and AND of the bits
// is the max of the +-1 values. The threshold table (one signed word per
// kernel) is loaded through thr_we/thr_addr/thr_data.
//
// Order: output pixel (row-major), kernel group, kernel in group, pooling
// window position. One OA read is issued per cycle; the result is used one
// cycle later, so a layer takes about out_h * out_w * K cycles. done pulses
// after the last word is written.
// Write-back address: (py * pw + px) * (K / CG) + kernel group.
module bn_engine
  import bnn_pkg::*;
#(
  parameter int unsigned NPE     = 8,
  parameter int unsigned KPP_MAX = 64,
  parameter int unsigned OA_AW   = 14,
  parameter int unsigned DB_AW   = 13,
  parameter int unsigned K_W     = $clog2(K_MAX)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [DIM_W-1:0]        out_h,
  input  logic [DIM_W-1:0]        out_w,
  input  logic [KPP_W-1:0]        kpp,
  input  logic                    pool,
  input  logic                    thr_we,
  input  logic [K_W-1:0]          thr_addr,
  input  logic signed [ACC_W-1:0] thr_data,
  output logic                    oa_rd_en,
  output logic [OA_AW-1:0]        oa_rd_addr,
  input  logic signed [ACC_W-1:0] oa_rd_data [NPE],
  output logic                    db_wr_en,
  output logic [DB_AW-1:0]        db_wr_addr,
  output logic [CG-1:0]           db_wr_data,
  output logic                    busy,
  output logic                    done
);
  localparam int unsigned KK_W = $clog2(CG);

  logic signed [ACC_W-1:0] thr [K_MAX];

  always_ff @(posedge clk) begin
    if (thr_we) thr[thr_addr] <= thr_data;
  end

  // Issue-side counters.
  logic [DIM_W-1:0] py, px, ph, pw;
  logic [KPP_W-1:0] kg, kgrp;
  logic [KK_W-1:0]  kk;
  logic [1:0]       sub, sub_last;
  logic             issuing;
  logic [K_W-1:0]   k_i;
  logic [DIM_W-1:0] ho, wo;

  assign ph       = pool ? (out_h >> 1) : out_h;
  assign pw       = pool ? (out_w >> 1) : out_w;
  assign kgrp     = KPP_W'((32'(kpp) * NPE) / CG);
  assign sub_last = pool ? 2'd3 : 2'd0;
  assign k_i      = K_W'(32'(kg) * CG + 32'(kk));
  assign ho       = pool ? DIM_W'({py, sub[1]}) : py;
  assign wo       = pool ? DIM_W'({px, sub[0]}) : px;

  assign oa_rd_en   = issuing;
  assign oa_rd_addr = OA_AW'((32'(ho) * 32'(out_w) + 32'(wo)) * 32'(kpp)
                             + 32'(k_i / NPE));

  // Return-side state: what the data arriving this cycle belongs to.
  logic             v_d, lastsub_d, lastkk_d, lastall_d;
  logic [K_W-1:0]   k_d;
  logic [KK_W-1:0]  kk_d;
  logic [DB_AW-1:0] waddr_d;
  logic             pbit;     // AND of the window so far
  logic [CG-1:0]    word;
  logic             sub0_d;
  logic             bit_now;
  logic             win;

  assign bit_now = (oa_rd_data[32'(k_d) % NPE] < thr[k_d]);
  assign win     = sub0_d ? bit_now : (pbit & bit_now);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing    <= 1'b0;
      py <= '0; px <= '0; kg <= '0; kk <= '0; sub <= '0;
      v_d        <= 1'b0;
      lastsub_d  <= 1'b0;
      lastkk_d   <= 1'b0;
      lastall_d  <= 1'b0;
      sub0_d     <= 1'b0;
      k_d        <= '0;
      kk_d       <= '0;
      waddr_d    <= '0;
      pbit       <= 1'b0;
      word       <= '0;
      db_wr_en   <= 1'b0;
      db_wr_addr <= '0;
      db_wr_data <= '0;
      done       <= 1'b0;
      busy       <= 1'b0;
    end else begin
      done     <= 1'b0;
      db_wr_en <= 1'b0;
      // ---- issue ----
      v_d <= issuing;
      if (start && !busy) begin
        busy    <= 1'b1;
        issuing <= (ph != '0) && (pw != '0) && (kgrp != '0);
        py <= '0; px <= '0; kg <= '0; kk <= '0; sub <= '0;
        if ((ph == '0) || (pw == '0) || (kgrp == '0)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (issuing) begin
        k_d       <= k_i;
        kk_d      <= kk;
        sub0_d    <= (sub == 2'd0);
        lastsub_d <= (sub == sub_last);
        lastkk_d  <= (sub == sub_last) && (kk == KK_W'(CG - 1));
        lastall_d <= (sub == sub_last) && (kk == KK_W'(CG - 1)) &&
                     (kg == kgrp - 1'b1) && (px == pw - 1'b1) && (py == ph - 1'b1);
        waddr_d   <= DB_AW'((32'(py) * 32'(pw) + 32'(px)) * 32'(kgrp) + 32'(kg));
        if (sub != sub_last) sub <= sub + 1'b1;
        else begin
          sub <= '0;
          if (kk != KK_W'(CG - 1)) kk <= kk + 1'b1;
          else begin
            kk <= '0;
            if (kg != kgrp - 1'b1) kg <= kg + 1'b1;
            else begin
              kg <= '0;
              if (px != pw - 1'b1) px <= px + 1'b1;
              else begin
                px <= '0;
                if (py != ph - 1'b1) py <= py + 1'b1;
                else issuing <= 1'b0;
              end
            end
          end
        end
      end
      // ---- return ----
      if (v_d) begin
        pbit <= win;
        if (lastsub_d) word[kk_d] <= win;
        if (lastkk_d) begin
          db_wr_en   <= 1'b1;
          db_wr_addr <= waddr_d;
          db_wr_data <= {win, word[CG-2:0]};
        end
        if (lastall_d) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
