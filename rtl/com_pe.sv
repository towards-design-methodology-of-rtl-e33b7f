// com_pe: one computing PE of the accelerating engine.
//
// T_n multipliers take one row of the rearranged transformed input matrix
// (T_n channels of one Winograd element) and the matching row of one
// reordered filter matrix; an adder tree reduces the T_n products and an
// accumulator sums the partial results of successive channel tiles. When the
// last channel tile of an element arrives (in_last) the total leaves on
// out_valid together with its tag, which carries the output index (Winograd
// element) and tile bookkeeping.
//
// Timing: three register stages (products, tree sum, accumulator): an
// operand row presented in cycle c contributes to the result valid in cycle
// c+3. One operand row per cycle, no stalls. The multiplier / adder-tree /
// accumulator / output-index structure follows the paper's engine figure;
// integer arithmetic and the stage split are this design's choices.
module com_pe
  import wino_pkg::*;
#(
  parameter int unsigned TN    = 128,
  parameter int unsigned TAG_W = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_first,  // first channel tile: restart
  input  logic                         in_last,   // last channel tile: emit
  input  logic [TAG_W-1:0]             in_tag,
  input  logic [TN-1:0][VW-1:0]        v,
  input  logic [TN-1:0][WW-1:0]        w,
  output logic                         out_valid,
  output logic signed [ACC_W-1:0]      out,
  output logic [TAG_W-1:0]             out_tag
);

  localparam int unsigned PW = VW + WW;

  // stage 1: products
  logic signed [PW-1:0] prod_q [TN];
  logic                 v1, f1, l1;
  logic [TAG_W-1:0]     tag1;
  always_ff @(posedge clk) begin
    for (int l = 0; l < TN; l++)
      prod_q[l] <= PW'($signed(v[l])) * PW'($signed(w[l]));
    f1   <= in_first;
    l1   <= in_last;
    tag1 <= in_tag;
  end

  // stage 2: adder tree (written as a sum; synthesis builds the tree)
  logic signed [ACC_W-1:0] tree;
  always_comb begin
    tree = '0;
    for (int l = 0; l < TN; l++) tree = tree + ACC_W'(prod_q[l]);
  end

  logic signed [ACC_W-1:0] sum_q;
  logic                    v2, f2, l2;
  logic [TAG_W-1:0]        tag2;
  always_ff @(posedge clk) begin
    sum_q <= tree;
    f2    <= f1;
    l2    <= l1;
    tag2  <= tag1;
  end

  // stage 3: accumulator over channel tiles
  logic signed [ACC_W-1:0] acc_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0; acc_q <= '0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2 && l2;
      if (v2) acc_q <= (f2 ? ACC_W'(0) : acc_q) + sum_q;
    end
  end

  always_ff @(posedge clk)
    if (v2) out_tag <= tag2;

  assign out = acc_q;

endmodule
