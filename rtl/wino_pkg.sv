// wino_pkg: types, constants and small functions shared by the Winograd
// deconvolution accelerator.
//
// The accelerator computes a transposed-convolution (DeConv) layer by first
// splitting each K_D x K_D DeConv filter into S^2 small K_C x K_C convolution
// filters (the TDC conversion, one filter "kind" per output sub-pixel) and then
// running every such convolution with the Winograd F(2x2,3x3) algorithm:
// n = 4 input tile, m = 2 output tile, r = 3 filter taps.
//
// Arithmetic is signed fixed-point integer. The filter transform uses 2G in
// place of G so that it stays exact; outputs therefore come out 4x too large
// and the post-PE shifts them back (cfg.out_shift). Bit growth: input
// transform +2 bits, filter transform +4 bits, products and sums are carried
// in ACC_W bits (enough for T_n <= 128 and up to 8 channel tiles).
//
// Paper vs. own choices: TDC, F(2x2,3x3) and the matrices B, G, A are the
// paper's; the paper computes in 32-bit floating point, while the fixed-point
// widths, the 2G scaling and the layer_cfg_t fields are this design's choices.
package wino_pkg;

  localparam int unsigned WN = 4;          // n: Winograd input tile size
  localparam int unsigned WM = 2;          // m: Winograd output tile size
  localparam int unsigned WR = 3;          // r: filter taps
  localparam int unsigned NELEM = WN * WN; // Winograd elements per tile (n^2)
  localparam int unsigned ELEM_W = 4;      // element index width
  localparam int unsigned LINES = WN + WM; // input line-buffer rows (n+m)

  localparam int unsigned DW  = 16;        // data / spatial weight width
  localparam int unsigned VW  = DW + 2;    // transformed input width
  localparam int unsigned WW  = DW + 4;    // transformed weight width (2G)
  localparam int unsigned ACC_W = 48;      // com-PE accumulator width
  localparam int unsigned YW  = ACC_W + 4; // inverse-transform width

  localparam int unsigned DIM_W = 6;       // height / width / tile index fields

  // Run-time description of one DeConv layer (after TDC conversion).
  typedef struct packed {
    logic [DIM_W-1:0] h_i;       // input height (multiple of m)
    logic [DIM_W-1:0] w_i;       // input width  (multiple of m)
    logic [3:0]       ct;        // channel tiles ceil(N/T_n), 1..CT_MAX
    logic [7:0]       mgroups;   // output-map groups M/T_m, >= 1
    logic [1:0]       s;         // DeConv stride: 1 or 2
    logic [1:0]       kc;        // TDC kernel size K_C: 2 or 3
    logic [5:0]       out_shift; // arithmetic right shift of the result
    logic             relu_en;   // apply ReLU after the inverse transform
  } layer_cfg_t;

  // Output index carried with every engine result: which filter kind and
  // Winograd element it is, the tile column, and whether it is the first /
  // last non-zero element of its kind (so the post-PE knows when the sparse
  // inverse transform of a tile is complete).
  typedef struct packed {
    logic [1:0]        kind;
    logic [ELEM_W-1:0] elem;
    logic [DIM_W-1:0]  tx;
    logic              first_e;
    logic              last_e;
  } res_tag_t;

  // Mask of the Winograd elements (e = row*4 + col) that are non-zero in the
  // transformed filters of one kind. A TDC filter whose first tap row/column
  // is zero gives a zero first row/column after G f G^T, because row 0 of G
  // is [1 0 0].
  //   K_C = 2       : row 0 and column 0 zero for every kind (9 of 16)
  //   K_C = 3, S = 2: kind (sy,sx) loses row 0 if sy = 1, column 0 if sx = 1
  //   K_C = 3, S = 1: dense
  function automatic logic [NELEM-1:0] kind_mask(input logic [1:0] kc,
                                                 input logic [1:0] s,
                                                 input logic [1:0] kind);
    logic zrow, zcol;
    logic [NELEM-1:0] msk;
    zrow = (kc == 2'd2) || (s == 2'd2 && kind[1]);
    zcol = (kc == 2'd2) || (s == 2'd2 && kind[0]);
    for (int e = 0; e < NELEM; e++)
      msk[e] = !((zrow && (e / WN) == 0) || (zcol && (e % WN) == 0));
    return msk;
  endfunction

  // Entry of A^T (eq. 3): A^T = [1 1 1 0; 0 1 -1 -1], returned as -1/0/+1.
  function automatic int at_coef(input int i, input int a);
    if (i == 0) return (a == 3) ? 0 : 1;
    else        return (a == 0) ? 0 : ((a == 1) ? 1 : -1);
  endfunction

endpackage
