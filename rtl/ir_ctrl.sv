// ir_ctrl: layer sequencer of the input-reuse accelerator.
//
// One start runs one binarized 3x3 convolution layer over the whole input map
// held in the source data buffer:
//   1. CLEAR  - the OA banks clear out_h * out_w * kpp words.
//   2. for each input pixel (h, w), row by row:
//      CHECK  - the checking engine broadcasts the pixel's channel groups
//               (STAGE I, original values, when w = 0; STAGE II, differences
//               from pixel (h, w-1), otherwise) and the PEs update their
//               reuse buffers; the stage ends when the engine is done and
//               every PE is idle again;
//      ACCUM  - the address generator walks the reuse buffers and the OA
//               banks add the entries into the ofmap positions.
//   3. BN     - the batch-normalization engine binarizes, pools and writes
//               the result into the other data buffer.
// The paper describes the compute, accumulation and batch-normalization
// stages and the producer/consumer relation of checking engine and PEs; that
// the stages of one pixel do not overlap the next pixel, and starting STAGE I
// at the first pixel of every row (the paper's input similarity compares
// IA(h, w, c) with IA(h, w-1, c) for w > 0), are this design's reading.
//
// Interface: start with cfg stable until done; done pulses for one cycle.
// out_h = in_h + 2*pad - 2 (3x3 kernels, stride 1).
module ir_ctrl
  import bnn_pkg::*;
#(
  parameter int unsigned DB_AW = 13,
  parameter int unsigned OA_AW = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             busy,
  output logic             done,
  output logic [DIM_W-1:0] out_h,
  output logic [DIM_W-1:0] out_w,
  // OA bank clear
  output logic             clr_start,
  output logic [OA_AW:0]   clr_len,
  input  logic             clr_busy,
  // checking engine
  output logic             chk_start,
  output logic             chk_full,
  output logic [DB_AW-1:0] chk_base,
  input  logic             chk_done,
  input  logic             pes_idle,
  // address generator
  output logic             ag_start,
  output logic [DIM_W-1:0] ag_h,
  output logic [DIM_W-1:0] ag_w,
  input  logic             ag_done,
  // batch-normalization engine
  output logic             bn_start,
  input  logic             bn_done,
  output logic [CNT_W-1:0] pixels
);
  typedef enum logic [3:0] {
    C_IDLE, C_CLR, C_CLRW, C_PIX, C_CHKW, C_PEW, C_ACC, C_ACCW, C_DRAIN, C_BN, C_BNW
  } state_e;
  state_e state;
  logic [DIM_W-1:0] h, w;

  assign out_h    = cfg.in_h + (cfg.pad ? DIM_W'(2) : DIM_W'(0)) - DIM_W'(2);
  assign out_w    = cfg.in_w + (cfg.pad ? DIM_W'(2) : DIM_W'(0)) - DIM_W'(2);
  assign clr_len  = (OA_AW+1)'(32'(out_h) * 32'(out_w) * 32'(cfg.kpp));
  assign chk_full = (w == '0);
  assign chk_base = DB_AW'((32'(h) * 32'(cfg.in_w) + 32'(w)) * 32'(cfg.cgrp));
  assign ag_h     = h;
  assign ag_w     = w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      h         <= '0;
      w         <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      clr_start <= 1'b0;
      chk_start <= 1'b0;
      ag_start  <= 1'b0;
      bn_start  <= 1'b0;
      pixels    <= '0;
    end else begin
      done      <= 1'b0;
      clr_start <= 1'b0;
      chk_start <= 1'b0;
      ag_start  <= 1'b0;
      bn_start  <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          busy      <= 1'b1;
          h         <= '0;
          w         <= '0;
          pixels    <= '0;
          clr_start <= 1'b1;
          state     <= C_CLR;
        end
        C_CLR:  state <= C_CLRW;               // clear_busy rises here
        C_CLRW: if (!clr_busy) state <= C_PIX;
        C_PIX: begin
          chk_start <= 1'b1;
          state     <= C_CHKW;
        end
        C_CHKW: if (chk_done) state <= C_PEW;
        C_PEW:  if (pes_idle) begin
          ag_start <= 1'b1;
          state    <= C_ACC;
        end
        C_ACC:  state <= C_ACCW;
        C_ACCW: if (ag_done) state <= C_DRAIN;
        C_DRAIN: begin                         // last OA write lands
          pixels <= pixels + 1'b1;
          if (w == cfg.in_w - 1'b1) begin
            w <= '0;
            if (h == cfg.in_h - 1'b1) begin
              state <= C_BN;
            end else begin
              h     <= h + 1'b1;
              state <= C_PIX;
            end
          end else begin
            w     <= w + 1'b1;
            state <= C_PIX;
          end
        end
        C_BN: begin
          bn_start <= 1'b1;
          state    <= C_BNW;
        end
        C_BNW: if (bn_done) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
