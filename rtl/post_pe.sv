// post_pe: sparse inverse Winograd transform, activation and tile store.
//
// The engine delivers only the non-zero elements of a transformed output tile
// (T_m output maps at once), each tagged with its element index e = (er, ec).
// Instead of forming the full 4x4 tile and computing A^T Y A, the post-PE adds
// each element's contribution A^T[i][er] * A^T[j][ec] * y to the four running
// sums of the 2x2 result, so elements that are structurally zero cost no
// work ("rearrange" + "sparse transform"). On the last element of a kind the
// four sums are shifted right by cfg.out_shift (removing the 4x of the 2G
// filter transform plus any fixed-point scaling), saturated to DW bits,
// passed through ReLU when cfg.relu_en is set, and stored ("store tile").
//
// Placement: kind k = (sy, sx) = (k/2, k%2) for S = 2, the Winograd output
// (i, j) of tile tx becomes the deconv pixel at band row S*i+sy, column
// S*(m*tx+j)+sx. The output buffer is banked by (i, j); this unit writes all
// four banks at address {ohalf, sy, tx, sx} in one cycle.
//
// Timing: one element per cycle; the store happens one cycle after the last
// element of a kind arrives. The sparse accumulation follows the paper's
// sparse inverse transform; ReLU, shift and saturation are this design's
// choices (the paper only shows an activation box).
module post_pe
  import wino_pkg::*;
#(
  parameter int unsigned TM    = 4,
  parameter int unsigned MAX_W = 32,
  localparam int unsigned OAW  = 3 + $clog2(MAX_W / WM)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  layer_cfg_t                         cfg,
  input  logic                               ohalf,
  input  logic                               in_valid,
  input  logic [TM-1:0][ACC_W-1:0]           in,
  input  res_tag_t                           in_tag,
  output logic                               ob_we,
  output logic [OAW-1:0]                     ob_waddr,
  output logic [WM*WM-1:0][TM-1:0][DW-1:0]   ob_wdata
);

  localparam int unsigned TXW = $clog2(MAX_W / WM);

  logic signed [YW-1:0] y_q  [TM][WM][WM];
  logic signed [YW-1:0] y_nx [TM][WM][WM];

  always_comb
    for (int t = 0; t < TM; t++)
      for (int i = 0; i < WM; i++)
        for (int j = 0; j < WM; j++) begin
          int c;
          c = at_coef(i, int'(in_tag.elem) / WN) * at_coef(j, int'(in_tag.elem) % WN);
          y_nx[t][i][j] = (in_tag.first_e ? YW'(0) : y_q[t][i][j])
                        + YW'(c) * YW'($signed(in[t]));
        end

  function automatic logic [DW-1:0] finish(input logic signed [YW-1:0] y,
                                           input logic [5:0] sh, input logic relu);
    logic signed [YW-1:0] v;
    v = y >>> sh;
    if (relu && v < 0) v = '0;
    if (v > YW'((1 << (DW-1)) - 1)) return DW'((1 << (DW-1)) - 1);
    if (v < -YW'(1 << (DW-1)))      return DW'(-(1 << (DW-1)));
    return v[DW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int t = 0; t < TM; t++)
        for (int i = 0; i < WM; i++)
          for (int j = 0; j < WM; j++) y_q[t][i][j] <= y_nx[t][i][j];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ob_we <= 1'b0;
    end else begin
      ob_we <= in_valid && in_tag.last_e;
    end
    if (in_valid && in_tag.last_e) begin
      logic sy, sx;
      sy = (cfg.s == 2'd2) && in_tag.kind[1];
      sx = (cfg.s == 2'd2) && in_tag.kind[0];
      ob_waddr <= {ohalf, sy, in_tag.tx[TXW-1:0], sx};
      for (int i = 0; i < WM; i++)
        for (int j = 0; j < WM; j++)
          for (int t = 0; t < TM; t++)
            ob_wdata[i*WM+j][t] <= finish(y_nx[t][i][j], cfg.out_shift, cfg.relu_en);
    end
  end

endmodule
