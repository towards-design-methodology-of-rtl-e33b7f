// input_line_buffer: the accelerator's input buffer, (n+m) = 6 image rows of
// T_n input feature maps.
//
// Each of the LINES rows lives in its own simple dual-port memory (one write
// port, one synchronous read port). A word holds the same pixel of T_n
// channels; within a row the word address is ci*W_I + x, so all channel tiles
// of a row share one memory. The controller keeps image row y in slot
// y mod LINES: while the pre-PE reads the n rows of the current tile band,
// the m spare rows take the next rows from the input stream.
//
// Read side: one address, four slot selects (the four rows of the Winograd
// window column); data appear one cycle after the request. Write side: one
// word per cycle. The six-row rotation follows the paper's (n+m)-line input
// buffer; the slot mapping and word layout are this design's choices.
module input_line_buffer
  import wino_pkg::*;
#(
  parameter int unsigned TN    = 128,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned SW   = $clog2(LINES)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [SW-1:0]             wslot,
  input  logic [AW-1:0]             waddr,
  input  logic [TN-1:0][DW-1:0]     wdata,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  input  logic [WN-1:0][SW-1:0]     rslot,
  output logic [WN-1:0][TN-1:0][DW-1:0] rdata
);

  logic [TN-1:0][DW-1:0] mem [LINES][DEPTH];
  logic [TN-1:0][DW-1:0] q   [LINES];
  logic [WN-1:0][SW-1:0] rslot_q;

  for (genvar l = 0; l < LINES; l++) begin : g_line
    always_ff @(posedge clk) begin
      if (we && wslot == SW'(l)) mem[l][waddr] <= wdata;
      if (re) q[l] <= mem[l][raddr];
    end
  end

  always_ff @(posedge clk)
    if (re) rslot_q <= rslot;

  always_comb
    for (int r = 0; r < WN; r++) rdata[r] = q[rslot_q[r]];

endmodule
