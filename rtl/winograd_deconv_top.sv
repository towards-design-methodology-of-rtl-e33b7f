// winograd_deconv_top: Winograd deconvolution (transposed convolution)
// accelerator for GAN generators.
//
// A DeConv layer with stride S and K_D x K_D filters is computed as S^2
// ordinary convolutions with K_C x K_C (K_C = 2 or 3) filters, one per output
// sub-pixel (the TDC conversion, done when the filters are prepared), and
// each convolution is run with Winograd F(2x2,3x3). The filters of a kind
// share fixed zero rows/columns after the Winograd transform, so the engine
// skips whole element rows of the n^2 x N filter matrix.
//
// Data path:  input stream -> input_line_buffer (6 rows) -> pre_pe (window,
// B^T Z B) -> tile_matrix_buffer (ping-pong) -> accelerating_engine (T_m
// com-PEs of T_n multipliers) -> post_pe (sparse A^T Y A, ReLU) ->
// output_buffer (2 x mS rows, ping-pong) -> output stream. Filters enter as
// 3x3 TDC filters, pass filter_transform (G f G^T) and wait in weight_buffer.
// The controller runs the loop nest and the handshakes.
//
// Interface (all valid/ready streams, synchronous active-low reset):
//  * cfg + start: layer description (layer_cfg_t), sampled on start.
//  * wt_*: per map group, for map t, kind k, channel tile ci: T_n 3x3
//    filters (lane = input channel within the tile, tap u*3+v).
//  * in_*: per map group, the whole input, row by row, each row as
//    ct*W_I beats (channel tile major), one beat = one pixel of T_n channels.
//  * o_*: per map group and band, S*m rows of S*W_I beats, one beat = one
//    output pixel of the T_m maps of the group; o_last ends a band.
//  * done pulses when the layer is finished; stall_in / stall_out report
//    bands waiting for input rows / for the output stream.
// Limits of this configuration: W_I <= MAX_W, ct <= CT_MAX, ct*W_I <= DEPTH,
// H_I and W_I even, S in {1,2}. Arithmetic is signed fixed-point (DW bits).
//
// Paper vs. own choices: the block structure, T_m = 4, T_n = 128, the
// (n+m)-line input buffer and 2 x mS-line output buffer follow Fig. 7 and
// Sec. IV; the stream interfaces (standing in for DDR3), the buffer depths
// MAX_W / DEPTH / CT_MAX and fixed-point arithmetic are this design's choices.
module winograd_deconv_top
  import wino_pkg::*;
#(
  parameter int unsigned TM     = 4,
  parameter int unsigned TN     = 128,
  parameter int unsigned MAX_W  = 32,
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned CT_MAX = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  layer_cfg_t                       cfg,
  output logic                             busy,
  output logic                             done,
  input  logic                             in_valid,
  output logic                             in_ready,
  input  logic [TN-1:0][DW-1:0]            in_data,
  input  logic                             wt_valid,
  output logic                             wt_ready,
  input  logic [TN-1:0][WR*WR-1:0][DW-1:0] wt_data,
  output logic                             o_valid,
  input  logic                             o_ready,
  output logic [TM-1:0][DW-1:0]            o_data,
  output logic                             o_last,
  output logic                             stall_in,
  output logic                             stall_out
);

  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned SW  = $clog2(LINES);
  localparam int unsigned MW  = (TM > 1) ? $clog2(TM) : 1;
  localparam int unsigned VAW = $clog2(CT_MAX) + 1;
  localparam int unsigned WAW = 2 + $clog2(CT_MAX);
  localparam int unsigned OAW = 3 + $clog2(MAX_W / WM);

  layer_cfg_t cfg_q;

  // controller <-> blocks
  logic              lb_we;
  logic [SW-1:0]     lb_wslot;
  logic [AW-1:0]     lb_waddr;
  logic              wb_we;
  logic [MW-1:0]     wb_wmap;
  logic [WAW-1:0]    wb_waddr;
  logic              pre_start, pre_vhalf, pre_done;
  logic [DIM_W-1:0]  pre_tx, band, eng_tx;
  logic              eng_start, eng_vhalf, eng_ready, eng_issue_last;
  logic              ohalf, drain_start, drain_busy;

  controller #(.TM(TM), .DEPTH(DEPTH), .CT_MAX(CT_MAX)) u_ctrl (
    .clk, .rst_n, .start, .cfg_in(cfg), .cfg(cfg_q), .busy, .done,
    .in_valid, .in_ready, .lb_we, .lb_wslot, .lb_waddr,
    .wt_valid, .wt_ready, .wb_we, .wb_wmap, .wb_waddr,
    .pre_start, .pre_tx, .band, .pre_vhalf, .pre_done,
    .eng_start, .eng_tx, .eng_vhalf, .eng_ready, .eng_issue_last,
    .ohalf, .drain_start, .drain_busy, .stall_in, .stall_out
  );

  // input buffer and pre-PE
  logic                          lb_re;
  logic [AW-1:0]                 lb_raddr;
  logic [WN-1:0][SW-1:0]         lb_rslot;
  logic [WN-1:0][TN-1:0][DW-1:0] lb_rdata;

  input_line_buffer #(.TN(TN), .DEPTH(DEPTH)) u_ibuf (
    .clk, .we(lb_we), .wslot(lb_wslot), .waddr(lb_waddr), .wdata(in_data),
    .re(lb_re), .raddr(lb_raddr), .rslot(lb_rslot), .rdata(lb_rdata)
  );

  logic                             vm_we;
  logic [VAW-1:0]                   vm_waddr;
  logic [NELEM-1:0][TN-1:0][VW-1:0] vm_wdata;

  pre_pe #(.TN(TN), .DEPTH(DEPTH), .CT_MAX(CT_MAX)) u_pre (
    .clk, .rst_n, .cfg(cfg_q), .start(pre_start), .tx(pre_tx), .band,
    .vhalf(pre_vhalf), .busy(), .done(pre_done),
    .lb_re, .lb_raddr, .lb_rslot, .lb_rdata, .vm_we, .vm_waddr, .vm_wdata
  );

  logic                  vm_re;
  logic [ELEM_W-1:0]     vm_relem;
  logic [VAW-1:0]        vm_raddr;
  logic [TN-1:0][VW-1:0] vm_rdata;

  tile_matrix_buffer #(.TN(TN), .CT_MAX(CT_MAX)) u_vmat (
    .clk, .we(vm_we), .waddr(vm_waddr), .wdata(vm_wdata),
    .re(vm_re), .relem(vm_relem), .raddr(vm_raddr), .rdata(vm_rdata)
  );

  // filters
  logic [TN-1:0][NELEM-1:0][WW-1:0] wt_u;
  filter_transform #(.TN(TN)) u_ftf (.f(wt_data), .u(wt_u));

  logic [NELEM-1:0][TN-1:0][WW-1:0] wb_wdata;
  always_comb
    for (int e = 0; e < NELEM; e++)
      for (int l = 0; l < TN; l++) wb_wdata[e][l] = wt_u[l][e];

  logic                          wb_re;
  logic [ELEM_W-1:0]             wb_relem;
  logic [WAW-1:0]                wb_raddr;
  logic [TM-1:0][TN-1:0][WW-1:0] wb_rdata;

  weight_buffer #(.TM(TM), .TN(TN), .CT_MAX(CT_MAX)) u_wbuf (
    .clk, .we(wb_we), .wmap(wb_wmap), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(wb_re), .relem(wb_relem), .raddr(wb_raddr), .rdata(wb_rdata)
  );

  // engine
  logic                     res_valid;
  logic [TM-1:0][ACC_W-1:0] res;
  res_tag_t                 res_tag;

  accelerating_engine #(.TM(TM), .TN(TN), .CT_MAX(CT_MAX)) u_eng (
    .clk, .rst_n, .cfg(cfg_q), .start(eng_start), .tx(eng_tx), .vhalf(eng_vhalf),
    .ready(eng_ready), .issue_last(eng_issue_last),
    .vm_re, .vm_relem, .vm_raddr, .vm_rdata,
    .wb_re, .wb_relem, .wb_raddr, .wb_rdata,
    .res_valid, .res, .res_tag
  );

  // post-PE and output buffer
  logic                           ob_we;
  logic [OAW-1:0]                 ob_waddr;
  logic [WM*WM-1:0][TM-1:0][DW-1:0] ob_wdata;

  post_pe #(.TM(TM), .MAX_W(MAX_W)) u_post (
    .clk, .rst_n, .cfg(cfg_q), .ohalf, .in_valid(res_valid), .in(res), .in_tag(res_tag),
    .ob_we, .ob_waddr, .ob_wdata
  );

  output_buffer #(.TM(TM), .MAX_W(MAX_W)) u_obuf (
    .clk, .rst_n, .cfg(cfg_q), .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .drain_start, .drain_half(ohalf), .drain_busy,
    .o_valid, .o_ready, .o_data, .o_last
  );

endmodule
