// tile_matrix_buffer: the rearranged transformed input tile, an n^2 x N
// matrix (row = Winograd element, column = input channel), double-buffered.
//
// The pre-PE writes all 16 element rows of one channel tile in one cycle (one
// memory bank per element); the accelerating engine reads one element row of
// one channel tile per cycle, T_n values wide, with one cycle of latency.
// Address = {half, channel tile}; the half bit gives the ping-pong between the
// pre-PE filling the next tile and the engine consuming the current one.
// The matrix shape follows the paper's dataflow; banking by element and the
// ping-pong addressing are this design's choices.
module tile_matrix_buffer
  import wino_pkg::*;
#(
  parameter int unsigned TN     = 128,
  parameter int unsigned CT_MAX = 8,
  localparam int unsigned AW    = $clog2(CT_MAX) + 1
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [AW-1:0]                    waddr,
  input  logic [NELEM-1:0][TN-1:0][VW-1:0] wdata,
  input  logic                             re,
  input  logic [ELEM_W-1:0]                relem,
  input  logic [AW-1:0]                    raddr,
  output logic [TN-1:0][VW-1:0]            rdata
);

  localparam int unsigned DEPTH = 2 * CT_MAX;

  logic [TN-1:0][VW-1:0] mem [NELEM][DEPTH];
  logic [TN-1:0][VW-1:0] q   [NELEM];
  logic [ELEM_W-1:0]     relem_q;

  for (genvar e = 0; e < NELEM; e++) begin : g_bank
    always_ff @(posedge clk) begin
      if (we) mem[e][waddr] <= wdata[e];
      if (re && relem == ELEM_W'(e)) q[e] <= mem[e][raddr];
    end
  end

  always_ff @(posedge clk)
    if (re) relem_q <= relem;

  assign rdata = q[relem_q];

endmodule
