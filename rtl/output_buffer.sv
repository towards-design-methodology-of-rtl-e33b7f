// output_buffer: 2 x mS output rows of T_m output feature maps, ping-pong.
//
// One half (mS rows: 4 for S = 2, 2 for S = 1) is filled by the post-PE while
// the other is streamed out. Storage is m x m banks, bank (i, j) holding the
// pixels that come from position (i, j) of a 2x2 Winograd output tile, so a
// whole tile of one kind is written in one cycle. Bank address =
// {half, sy, tx, sx}.
//
// Drain: drain_start with drain_half starts a raster scan of that half:
// rows 0..S*m-1, columns 0..S*W_I-1; each beat o_data carries one pixel of
// the T_m maps (map t in o_data[t]). valid/ready handshake, one beat per cycle
// when o_ready stays high; o_last marks the last beat of the half. The read
// side is asynchronous (LUT-RAM style) so the stream needs no skid buffer.
// The 2 x mS row organisation is the paper's; banking, scan order and the
// stream handshake are this design's choices.
module output_buffer
  import wino_pkg::*;
#(
  parameter int unsigned TM    = 4,
  parameter int unsigned MAX_W = 32,
  localparam int unsigned OAW  = 3 + $clog2(MAX_W / WM)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  layer_cfg_t                       cfg,
  // write side (post-PE)
  input  logic                             we,
  input  logic [OAW-1:0]                   waddr,
  input  logic [WM*WM-1:0][TM-1:0][DW-1:0] wdata,
  // drain side
  input  logic                             drain_start,
  input  logic                             drain_half,
  output logic                             drain_busy,
  output logic                             o_valid,
  input  logic                             o_ready,
  output logic [TM-1:0][DW-1:0]            o_data,
  output logic                             o_last
);

  localparam int unsigned TXW   = $clog2(MAX_W / WM);
  localparam int unsigned DEPTH = 1 << OAW;

  logic [TM-1:0][DW-1:0] mem [WM*WM][DEPTH];

  for (genvar b = 0; b < WM*WM; b++) begin : g_bank
    always_ff @(posedge clk)
      if (we) mem[b][waddr] <= wdata[b];
  end

  logic             half_q;
  logic [2:0]       row_q;          // 0 .. S*m-1
  logic [DIM_W:0]   col_q;          // 0 .. S*W_I-1
  logic [2:0]       row_last;
  logic [DIM_W:0]   col_last;

  assign row_last = (cfg.s == 2'd2) ? 3'd3 : 3'd1;
  assign col_last = (cfg.s == 2'd2) ? {cfg.w_i, 1'b0} - 1'b1 : {1'b0, cfg.w_i} - 1'b1;

  logic               i_b, sy, sx, j_b;
  logic [DIM_W:0]     q;
  logic [TXW-1:0]     txa;
  always_comb begin
    if (cfg.s == 2'd2) begin
      i_b = row_q[1]; sy = row_q[0];
      q   = col_q >> 1; sx = col_q[0];
    end else begin
      i_b = row_q[0]; sy = 1'b0;
      q   = col_q;      sx = 1'b0;
    end
    j_b = q[0];
    txa = TXW'(q >> 1);
  end

  assign o_valid = drain_busy;
  assign o_data  = mem[{i_b, j_b}][{half_q, sy, txa, sx}];
  assign o_last  = drain_busy && row_q == row_last && col_q == col_last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      drain_busy <= 1'b0; half_q <= 1'b0; row_q <= '0; col_q <= '0;
    end else if (!drain_busy) begin
      if (drain_start) begin
        drain_busy <= 1'b1; half_q <= drain_half; row_q <= '0; col_q <= '0;
      end
    end else if (o_ready) begin
      if (col_q != col_last) col_q <= col_q + 1'b1;
      else begin
        col_q <= '0;
        if (row_q != row_last) row_q <= row_q + 3'd1;
        else drain_busy <= 1'b0;
      end
    end
  end

endmodule
