// weight_buffer: on-chip store of the Winograd-domain filters of one output
// map group (T_m output maps, every filter kind, every input channel tile).
//
// Organised as T_m x n^2 banks: bank (t, e) holds element e of the
// transformed filters of output map t, one word = T_n input channels.
// Address inside a bank = {kind, channel tile}. The loader writes the 16
// elements of one (map, kind, channel tile) in one cycle as they leave the
// filter transform; the engine reads element e of all T_m maps at once, one
// cycle latency. Zero elements are stored like any other; the engine simply
// never reads them. Bank layout is this design's choice; the paper only
// says the transformed weights are kept on chip.
module weight_buffer
  import wino_pkg::*;
#(
  parameter int unsigned TM     = 4,
  parameter int unsigned TN     = 128,
  parameter int unsigned CT_MAX = 8,
  localparam int unsigned AW    = 2 + $clog2(CT_MAX),
  localparam int unsigned MW    = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [MW-1:0]                    wmap,
  input  logic [AW-1:0]                    waddr,
  input  logic [NELEM-1:0][TN-1:0][WW-1:0] wdata,
  input  logic                             re,
  input  logic [ELEM_W-1:0]                relem,
  input  logic [AW-1:0]                    raddr,
  output logic [TM-1:0][TN-1:0][WW-1:0]    rdata
);

  localparam int unsigned DEPTH = 4 * CT_MAX;

  logic [TN-1:0][WW-1:0] mem [TM][NELEM][DEPTH];
  logic [TN-1:0][WW-1:0] q   [TM][NELEM];
  logic [ELEM_W-1:0]     relem_q;

  for (genvar t = 0; t < TM; t++) begin : g_map
    for (genvar e = 0; e < NELEM; e++) begin : g_elem
      always_ff @(posedge clk) begin
        if (we && wmap == MW'(t)) mem[t][e][waddr] <= wdata[e];
        if (re && relem == ELEM_W'(e)) q[t][e] <= mem[t][e][raddr];
      end
    end
  end

  always_ff @(posedge clk)
    if (re) relem_q <= relem;

  always_comb
    for (int t = 0; t < TM; t++) rdata[t] = q[t][relem_q];

endmodule
