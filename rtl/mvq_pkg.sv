// mvq_pkg: sizes and shared types of the masked-vector-quantization (MVQ)
// accelerator. The defaults describe the 64x64 configuration: an EWS array of
// H = 64 input-channel rows and L = 64 output-channel columns, codewords of
// d = 16 signed 8-bit values, a codebook of k = 512 codewords and 4:16 pruning,
// so that each group of d output channels needs only Q = N/M*d = 4 multipliers
// per row. Register-file depth 16 follows the resource table of the sparse
// tile. The psum width, address widths and the layer-configuration record are
// choices of this implementation.
package mvq_pkg;
  // array geometry
  parameter int H         = 64;   // rows  (input channels in parallel)
  parameter int L         = 64;   // columns (output channels in parallel)
  parameter int DVEC      = 16;   // codeword length d
  parameter int NKEEP     = 4;    // N of N:M pruning
  parameter int MGRP      = 16;   // M of N:M pruning
  parameter int Q         = NKEEP * DVEC / MGRP;  // multipliers per row per tile
  parameter int NPORT     = L / DVEC;             // CRF read ports, tiles per row
  // codebook
  parameter int KCW       = 512;  // codewords k
  parameter int QC        = 8;    // codeword element bits
  parameter int IDX_W     = $clog2(KCW);
  // register files
  parameter int WRF_DEPTH = 16;
  parameter int PRF_DEPTH = 16;
  parameter int ARF_DEPTH = 16;
  // data widths
  parameter int ACT_W     = 8;
  parameter int PSUM_W    = 32;
  parameter int DMA_W     = 64;

  // number of N-of-M masks: C(M,N)
  function automatic int n_choose_k(input int n, input int k);
    int r;
    r = 1;
    for (int i = 1; i <= k; i++) r = r * (n - k + i) / i;
    return r;
  endfunction

  parameter int NCOMB   = n_choose_k(MGRP, NKEEP);
  parameter int MCODE_W = $clog2(NCOMB);

  // Configuration of one layer pass (one subset of A*B*D weights per row).
  typedef struct packed {
    logic        cb_init;    // reload the codebook RF before this pass
    logic [21:0] cb_base;    // L2 word address of codeword 0
    logic [21:0] asg_base;   // L2 word address of the first assignment row
    logic [4:0]  a;          // EWS extension A: output-channel subsets
    logic [4:0]  b;          // EWS extension B: input-channel subsets
    logic [4:0]  d;          // EWS extension D: kernel-plane positions
    logic [7:0]  oh, ow;     // ofmap height and width
    logic [7:0]  iw;         // ifmap width
    logic [3:0]  ks;         // kernel size (square)
    logic [3:0]  stride;     // convolution stride (1 = dense)
    logic [7:0]  q0;         // first kernel-plane position of this subset
    logic [7:0]  cg;         // input-channel groups (of H) per ifmap pixel
    logic [7:0]  r0;         // first input-channel group of this subset
    logic [7:0]  kg;         // output-channel groups (of L) per ofmap pixel
    logic [7:0]  kg0;        // first output-channel group of this subset
    logic [15:0] ifm_base;   // L1 ifmap word address of pixel (0,0), group 0
    logic [15:0] ofm_base;   // L1 psum word address of pixel (0,0), group 0
    logic        accumulate; // add to the psums already in L1
    logic        relu;       // apply ReLU when storing (last pass)
  } layer_cfg_t;
endpackage
