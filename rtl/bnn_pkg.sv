// bnn_pkg: constants, types and helper functions shared by the input-reuse
// and weight-reuse binarized-convolution accelerators.
//
// Activation and weight bits use the encoding 0 = +1 and 1 = -1. With this
// encoding the XNOR of two bits is 1 exactly when the +-1 product is +1, and
// the 2x2 max-pooling of +-1 values is the AND of the bits, which is the
// pooling operator the accelerator uses.
//
// Sizes follow the BinaryNet CIFAR-10 convolution layers the design targets:
// feature maps up to 32x32, up to 512 input channels and 512 kernels, 3x3
// kernels. The channel-group width CG (channels the checking engine compares
// and broadcasts per step) and the accumulator widths are this design's own
// choices.
package bnn_pkg;

  // ---- network geometry (BinaryNet conv layers) ----
  localparam int unsigned KR      = 3;            // kernel rows (r)
  localparam int unsigned KS      = 3;            // kernel columns (s)
  localparam int unsigned NTAP    = KR * KS;      // 9 taps per kernel
  localparam int unsigned HW_MAX  = 32;           // largest feature map side
  localparam int unsigned C_MAX   = 512;          // largest channel count
  localparam int unsigned K_MAX   = 512;          // largest kernel count
  localparam int unsigned K_BIGMAP = 128;         // kernels of the 32x32 layer

  // ---- datapath widths (own choices) ----
  localparam int unsigned CG      = 16;           // channels per group / bus word
  localparam int unsigned CGRP_MAX = C_MAX / CG;  // 32 groups per pixel
  localparam int unsigned RB_W    = 12;           // reuse-buffer entry (|x| <= 512)
  localparam int unsigned ACC_W   = 16;           // ofmap accumulator (|x| <= 4608)
  localparam int unsigned WB_W    = NTAP * CG;    // one weight word: 9 taps x CG ch

  // ---- field widths ----
  localparam int unsigned DIM_W   = $clog2(HW_MAX + 1);     // 6
  localparam int unsigned GRP_W   = $clog2(CGRP_MAX + 1);   // 6 (count up to 32)
  localparam int unsigned KPP_W   = 7;                      // kernels per PE, up to 64
  localparam int unsigned TAP_W   = $clog2(NTAP);           // 4
  localparam int unsigned LD_AW   = 16;                     // load-port address
  localparam int unsigned CNT_W   = 32;                     // statistics counters

  // One layer as the host programs it.
  typedef struct packed {
    logic [DIM_W-1:0] in_h;     // input height H
    logic [DIM_W-1:0] in_w;     // input width W
    logic [GRP_W-1:0] cgrp;     // input channels / CG
    logic [KPP_W-1:0] kpp;      // kernels per PE = K / NPE
    logic             pad;      // 1: output (h-r+1, w-s+1), same-size map
    logic             pool;     // 1: 2x2 AND pooling after binarization
    logic             src;      // data buffer read this layer (0 = A, 1 = B)
    logic [2:0]       rpp;      // weight reuse: input rows held per PE
    logic [2:0]       rpp_o;    // weight reuse: output rows written per PE
  } layer_cfg_t;

  // Word on the broadcasting bus from the checking engine to the PEs.
  typedef struct packed {
    logic             full;     // STAGE I: data is the original input value
    logic             first;    // first group of the pixel (clears in STAGE I)
    logic [GRP_W-1:0] grp;      // channel group index
    logic [CG-1:0]    data;     // current input bits of the group
    logic [CG-1:0]    mask;     // channels that differ from the previous pixel
  } bcast_t;

  // Word on the weight-reuse broadcasting bus: one channel group of one kernel,
  // nine taps of CG channels each (tap r*3+s at bits (r*3+s)*CG).
  typedef struct packed {
    logic             full;     // first kernel of a set: data is the real weights
    logic             first;    // first group of the kernel (clears when full)
    logic [GRP_W-1:0] grp;      // channel group index
    logic [WB_W-1:0]  data;     // current weight bits of the group
    logic [WB_W-1:0]  mask;     // weights that differ from the previous kernel
  } wbcast_t;

  // Targets of the load port that stands in for the AXI data mover.
  typedef enum logic [2:0] {
    LD_DBUF_A = 3'd0,
    LD_DBUF_B = 3'd1,
    LD_WBANK  = 3'd2,   // weight banks (input reuse) / weight buffer (weight reuse)
    LD_THR    = 3'd3,
    LD_SEQ    = 3'd4    // weight reuse: kernel order (slot -> original kernel)
  } ld_tgt_e;

  // Event counters of one layer run.
  typedef struct packed {
    logic [CNT_W-1:0] cycles;      // cycles from start to done
    logic [CNT_W-1:0] pixels;      // input pixels (input reuse) or kernels
                                   // (weight reuse) processed
    logic [CNT_W-1:0] grp_full;    // groups broadcast as original values
    logic [CNT_W-1:0] grp_diff;    // groups broadcast as differences
    logic [CNT_W-1:0] grp_skip;    // groups bypassed (no difference)
    logic [CNT_W-1:0] wb_reads;    // weight bank words read, all PEs
    logic [CNT_W-1:0] bit_ops;     // XNOR bit operations, all PEs
  } stats_t;

  function automatic logic [$clog2(CG+1)-1:0] popcount_cg(input logic [CG-1:0] v);
    logic [$clog2(CG+1)-1:0] n;
    n = '0;
    for (int i = 0; i < CG; i++) n += {{($clog2(CG+1)-1){1'b0}}, v[i]};
    return n;
  endfunction

endpackage
