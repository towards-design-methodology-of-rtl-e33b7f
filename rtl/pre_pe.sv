// pre_pe: window selection, tile load, Winograd input transform and
// rearrangement for one output tile.
//
// For tile (band, tx) the 4x4 input window starts at image row m*band-1 and
// column m*tx-1, i.e. one zero pixel of padding around the image: the TDC
// filters (both K_C = 3 and the K_C = 2 filters placed in the lower-right of
// the 3x3 frame) are aligned to that window. Pixels outside the image are
// replaced by zero ("select window"). The window is fetched one column per
// cycle, the four rows coming from four line-buffer slots in parallel
// ("load tile"); after the fourth column the T_n windows are transformed,
// V = B^T Z B ("transform"), and the 16 elements are written as one column
// block of the n^2 x N tile matrix ("rearrange").
//
// Interface: pulse start with tx/band/vhalf stable; the unit is busy until
// done pulses. Timing: 4 read cycles per channel tile, issued back to back,
// plus one cycle of read latency: done comes 4*ct+1 cycles after start.
// The tile is re-read and re-transformed for each map group and each tile;
// the overlap between neighbouring windows is not kept in registers.
//
// Paper vs. own choices: the four steps (select window, load tile,
// transform, rearrange) and B^T Z B are the paper's (Fig. 7, eq. (4)); the
// one-pixel padding convention, the column-serial fetch and the tile-matrix
// addressing are this design's choices.
module pre_pe
  import wino_pkg::*;
#(
  parameter int unsigned TN     = 128,
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned CT_MAX = 8,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = $clog2(LINES),
  localparam int unsigned VAW   = $clog2(CT_MAX) + 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  layer_cfg_t                       cfg,
  input  logic                             start,
  input  logic [DIM_W-1:0]                 tx,
  input  logic [DIM_W-1:0]                 band,
  input  logic                             vhalf,
  output logic                             busy,
  output logic                             done,
  // input line buffer read
  output logic                             lb_re,
  output logic [AW-1:0]                    lb_raddr,
  output logic [WN-1:0][SW-1:0]            lb_rslot,
  input  logic [WN-1:0][TN-1:0][DW-1:0]    lb_rdata,
  // tile matrix write
  output logic                             vm_we,
  output logic [VAW-1:0]                   vm_waddr,
  output logic [NELEM-1:0][TN-1:0][VW-1:0] vm_wdata
);

  // B^T of F(2x2,3x3), eq. (3)
  function automatic int bt(input int i, input int r);
    case (i)
      0:       return (r == 0) ? 1 : ((r == 2) ? -1 : 0);
      1:       return (r == 1 || r == 2) ? 1 : 0;
      2:       return (r == 1) ? -1 : ((r == 2) ? 1 : 0);
      default: return (r == 1) ? 1 : ((r == 3) ? -1 : 0);
    endcase
  endfunction

  // ---- issue stage -------------------------------------------------------
  logic [1:0]               col_q;
  logic [3:0]               ci_q;
  logic signed [DIM_W+1:0]  x0_q, y0_q;
  logic                     vhalf_q;
  logic [WN-1:0]            row_ok_q;

  logic signed [DIM_W+1:0]  x_cur;
  logic                     x_ok;
  assign x_cur = x0_q + (DIM_W+2)'(col_q);
  assign x_ok  = (x_cur >= 0) && (x_cur < $signed({2'b00, cfg.w_i}));

  assign lb_re    = busy;
  assign lb_raddr = AW'(ci_q * cfg.w_i) + (x_ok ? AW'(unsigned'(x_cur)) : AW'(0));
  always_comb
    for (int r = 0; r < WN; r++) begin
      logic signed [DIM_W+1:0] y;
      y = y0_q + (DIM_W+2)'(r);
      lb_rslot[r] = row_ok_q[r] ? SW'(unsigned'(y) % LINES) : '0;
    end

  // ---- data stage (one cycle behind) -------------------------------------
  logic          d_valid, d_xok, d_last_col, d_last;
  logic [3:0]    d_ci;
  logic          d_half;
  logic signed [DW-1:0] wins [TN][WN][WN-1]; // columns 0..2 of the window
  logic signed [DW-1:0] z    [TN][WN][WN];   // full window, column 3 = read data

  always_comb
    for (int l = 0; l < TN; l++)
      for (int r = 0; r < WN; r++) begin
        for (int c = 0; c < WN-1; c++) z[l][r][c] = wins[l][r][c];
        z[l][r][WN-1] = (d_xok && row_ok_q[r]) ? $signed(lb_rdata[r][l]) : '0;
      end

  always_ff @(posedge clk)
    if (d_valid)
      for (int l = 0; l < TN; l++)
        for (int r = 0; r < WN; r++)
          for (int c = 0; c < WN-1; c++)
            wins[l][r][c] <= z[l][r][c+1];

  always_comb
    for (int l = 0; l < TN; l++)
      for (int i = 0; i < WN; i++)
        for (int j = 0; j < WN; j++) begin
          logic signed [VW-1:0] acc;
          acc = '0;
          for (int r = 0; r < WN; r++)
            for (int c = 0; c < WN; c++)
              acc = acc + VW'(bt(i, r) * bt(j, c)) * VW'(z[l][r][c]);
          vm_wdata[i*WN+j][l] = acc;
        end

  assign vm_we    = d_valid && d_last_col;
  assign vm_waddr = VAW'({d_half, d_ci[VAW-2:0]});

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; d_valid <= 1'b0; done <= 1'b0;
      col_q <= '0; ci_q <= '0; x0_q <= '0; y0_q <= '0; vhalf_q <= 1'b0; row_ok_q <= '0;
      d_xok <= 1'b0; d_last_col <= 1'b0; d_last <= 1'b0; d_ci <= '0; d_half <= 1'b0;
    end else begin
      done <= d_valid && d_last;
      // data stage register
      d_valid    <= busy;
      d_xok      <= x_ok;
      d_last_col <= (col_q == 2'd3);
      d_last     <= (col_q == 2'd3) && (ci_q == cfg.ct - 4'd1);
      d_ci       <= ci_q;
      d_half     <= vhalf_q;
      if (start && !busy) begin
        busy    <= 1'b1;
        col_q   <= '0;
        ci_q    <= '0;
        x0_q    <= $signed({1'b0, tx, 1'b0}) - (DIM_W+2)'(1);   // m*tx - 1
        y0_q    <= $signed({1'b0, band, 1'b0}) - (DIM_W+2)'(1); // m*band - 1
        vhalf_q <= vhalf;
        for (int r = 0; r < WN; r++) begin
          logic signed [DIM_W+1:0] y;
          y = $signed({1'b0, band, 1'b0}) + (DIM_W+2)'(r - 1);
          row_ok_q[r] <= (y >= 0) && (y < $signed({2'b00, cfg.h_i}));
        end
      end else if (busy) begin
        col_q <= col_q + 2'd1;
        if (col_q == 2'd3) begin
          ci_q <= ci_q + 4'd1;
          if (ci_q == cfg.ct - 4'd1) busy <= 1'b0;
        end
      end
    end
  end

endmodule
