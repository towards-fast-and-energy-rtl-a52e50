// wr_bn: batch-normalization engine of the weight-reuse accelerator.
//
// In the weight-reuse scheme each PE holds a band of input rows, so an output
// position near a band edge receives partial sums in two neighbouring PEs'
// OA banks. This engine, for each output position and kernel, reads the OA
// bank of every PE whose band reaches that output row (bank-local row
// lr = ho + 2 - pad - i * rpp, valid for 0 .. rpp + 1), adds the partial sums,
// compares the total with the kernel's threshold (bit 1 when sum < thr[k], the
// folded batch normalization and sign of the paper), optionally ANDs 2x2
// windows (max pooling, as in the paper), and packs CG kernels into a word.
// Output row py is written to the data buffer of PE py / rpp_o at address
// ((py mod rpp_o) * pw + px) * (K / CG) + kernel group, which is the row
// distribution the next layer reads. Reduction across PEs and the row-band
// distribution are this design's own choices.
//
// Order: output pixel, kernel group, kernel, window position; one read per
// cycle into all banks, the sum is used one cycle later. done pulses after
// the last word is written. Threshold table loaded through thr_we/addr/data.
module wr_bn
  import bnn_pkg::*;
#(
  parameter int unsigned NPE   = 8,
  parameter int unsigned OA_AW = 15,
  parameter int unsigned DB_AW = 10,
  parameter int unsigned K_W   = $clog2(K_MAX),
  parameter int unsigned PE_W  = $clog2(NPE)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [DIM_W-1:0]        out_h,
  input  logic [DIM_W-1:0]        out_w,
  input  logic [K_W:0]            kcount,
  input  logic                    pool,
  input  logic                    pad,
  input  logic [2:0]              rpp,
  input  logic [2:0]              rpp_o,
  input  logic                    thr_we,
  input  logic [K_W-1:0]          thr_addr,
  input  logic signed [ACC_W-1:0] thr_data,
  output logic                    oa_rd_en,
  output logic [OA_AW-1:0]        oa_rd_addr [NPE],
  input  logic signed [ACC_W-1:0] oa_rd_data [NPE],
  output logic                    db_wr_en,
  output logic [PE_W-1:0]         db_wr_pe,
  output logic [DB_AW-1:0]        db_wr_addr,
  output logic [CG-1:0]           db_wr_data,
  output logic                    busy,
  output logic                    done
);
  localparam int unsigned KK_W = $clog2(CG);
  localparam int unsigned KG_W = K_W - KK_W + 1;

  logic signed [ACC_W-1:0] thr [K_MAX];

  always_ff @(posedge clk) begin
    if (thr_we) thr[thr_addr] <= thr_data;
  end

  logic [DIM_W-1:0] py, px, ph, pw, ho, wo;
  logic [KG_W-1:0]  kg, kgrp;
  logic [KK_W-1:0]  kk;
  logic [1:0]       sub, sub_last;
  logic             issuing;
  logic [K_W-1:0]   k_i;
  logic [2:0]       dl;
  logic [PE_W-1:0]  dpe;
  logic [NPE-1:0]   pv;
  logic signed [DIM_W+3:0] lr [NPE];

  assign ph       = pool ? (out_h >> 1) : out_h;
  assign pw       = pool ? (out_w >> 1) : out_w;
  assign kgrp     = KG_W'(kcount / CG);
  assign sub_last = pool ? 2'd3 : 2'd0;
  assign k_i      = K_W'(32'(kg) * CG + 32'(kk));
  assign ho       = pool ? DIM_W'({py, sub[1]}) : py;
  assign wo       = pool ? DIM_W'({px, sub[0]}) : px;
  assign oa_rd_en = issuing;

  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      lr[i] = $signed({4'b0000, ho}) + (DIM_W+4)'(2) - $signed((DIM_W+4)'(pad))
            - $signed((DIM_W+4)'(i * 32'(rpp)));
      pv[i] = (lr[i] >= 0) && (lr[i] <= $signed((DIM_W+4)'(rpp) + (DIM_W+4)'(1)));
      oa_rd_addr[i] = OA_AW'((32'(lr[i][2:0]) * 32'(out_w) + 32'(wo)) * 32'(kcount)
                             + 32'(k_i));
    end
  end

  // Return side.
  logic                    v_d, lastsub_d, lastkk_d, lastall_d, sub0_d;
  logic [NPE-1:0]          pv_d;
  logic [K_W-1:0]          k_d;
  logic [KK_W-1:0]         kk_d;
  logic [DB_AW-1:0]        waddr_d;
  logic [PE_W-1:0]         wpe_d;
  logic                    pbit, bit_now, win;
  logic [CG-1:0]           word;
  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NPE; i++)
      if (pv_d[i]) sum += oa_rd_data[i];
  end
  assign bit_now = (sum < thr[k_d]);
  assign win     = sub0_d ? bit_now : (pbit & bit_now);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      py <= '0; px <= '0; kg <= '0; kk <= '0; sub <= '0; dl <= '0; dpe <= '0;
      v_d <= 1'b0; lastsub_d <= 1'b0; lastkk_d <= 1'b0; lastall_d <= 1'b0;
      sub0_d <= 1'b0; pv_d <= '0; k_d <= '0; kk_d <= '0; waddr_d <= '0; wpe_d <= '0;
      pbit <= 1'b0; word <= '0;
      db_wr_en <= 1'b0; db_wr_pe <= '0; db_wr_addr <= '0; db_wr_data <= '0;
      done <= 1'b0; busy <= 1'b0;
    end else begin
      done     <= 1'b0;
      db_wr_en <= 1'b0;
      v_d      <= issuing;
      if (start && !busy) begin
        busy    <= 1'b1;
        issuing <= (ph != '0) && (pw != '0) && (kgrp != '0) && (rpp_o != '0);
        py <= '0; px <= '0; kg <= '0; kk <= '0; sub <= '0; dl <= '0; dpe <= '0;
        if ((ph == '0) || (pw == '0) || (kgrp == '0) || (rpp_o == '0)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (issuing) begin
        k_d       <= k_i;
        kk_d      <= kk;
        pv_d      <= pv;
        sub0_d    <= (sub == 2'd0);
        lastsub_d <= (sub == sub_last);
        lastkk_d  <= (sub == sub_last) && (kk == KK_W'(CG - 1));
        lastall_d <= (sub == sub_last) && (kk == KK_W'(CG - 1)) &&
                     (kg == kgrp - 1'b1) && (px == pw - 1'b1) && (py == ph - 1'b1);
        waddr_d   <= DB_AW'((32'(dl) * 32'(pw) + 32'(px)) * 32'(kgrp) + 32'(kg));
        wpe_d     <= dpe;
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
                if (dl != rpp_o - 1'b1) dl <= dl + 1'b1;
                else begin
                  dl  <= '0;
                  dpe <= dpe + 1'b1;
                end
                if (py != ph - 1'b1) py <= py + 1'b1;
                else issuing <= 1'b0;
              end
            end
          end
        end
      end
      if (v_d) begin
        pbit <= win;
        if (lastsub_d) word[kk_d] <= win;
        if (lastkk_d) begin
          db_wr_en   <= 1'b1;
          db_wr_pe   <= wpe_d;
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
