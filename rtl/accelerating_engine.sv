// accelerating_engine: T_m com-PEs and the sparse row sequencer.
//
// For one tile the engine walks every filter kind k (S^2 of them), every
// Winograd element e that is non-zero in the transformed filters of that kind
// (kind_mask: Case 1 dense, Case 2 one zero row or column of the 4x4, Case 3
// both), and every channel tile ci. Each cycle it reads element row e of
// channel tile ci from the tile matrix and the same row of the filter matrices
// of the T_m output maps from the weight buffer; com-PE t multiplies and sums
// the T_n pairs and accumulates over ci. Zero rows are never issued, so a tile
// costs sum_k popcount(mask_k) * ct cycles: 36*ct for S=2, K_C=2 (4 x 9),
// 49*ct for S=2, K_C=3 (16+12+12+9), 16*ct for S=1, K_C=3.
//
// Interface: ready is high when the sequencer is idle; a start pulse latches
// tx and the tile-matrix half. Results leave on res_valid, T_m sums at once,
// with a res_tag_t naming kind, element and tile. Latency from issue to
// result: 1 (memory) + 3 (com-PE) cycles. No back-pressure: the post-PE
// accepts one result per cycle. All T_m com-PEs work on output maps of the
// same kind so that they share one row-skip pattern.
//
// Paper vs. own choices: the T_m com-PEs of T_n lanes, the n^2 x N
// rearranged matrices and the skipping of zero element rows (Cases 1-3, Fig. 6)
// are the paper's; the exact per-kind masks, the loop order kind / element /
// channel tile and the fixed pipeline latency are this design's choices.
module accelerating_engine
  import wino_pkg::*;
#(
  parameter int unsigned TM     = 4,
  parameter int unsigned TN     = 128,
  parameter int unsigned CT_MAX = 8,
  localparam int unsigned VAW   = $clog2(CT_MAX) + 1,
  localparam int unsigned WAW   = 2 + $clog2(CT_MAX)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  layer_cfg_t                    cfg,
  input  logic                          start,
  input  logic [DIM_W-1:0]              tx,
  input  logic                          vhalf,
  output logic                          ready,
  output logic                          issue_last, // last row of the tile issued
  // tile matrix read
  output logic                          vm_re,
  output logic [ELEM_W-1:0]             vm_relem,
  output logic [VAW-1:0]                vm_raddr,
  input  logic [TN-1:0][VW-1:0]         vm_rdata,
  // weight buffer read
  output logic                          wb_re,
  output logic [ELEM_W-1:0]             wb_relem,
  output logic [WAW-1:0]                wb_raddr,
  input  logic [TM-1:0][TN-1:0][WW-1:0] wb_rdata,
  // results
  output logic                          res_valid,
  output logic [TM-1:0][ACC_W-1:0]      res,
  output res_tag_t                      res_tag
);

  localparam int unsigned CW = $clog2(CT_MAX);

  logic                 busy;
  logic [1:0]           k_q;
  logic [ELEM_W-1:0]    e_q;
  logic [3:0]           ci_q;
  logic [DIM_W-1:0]     tx_q;
  logic                 half_q;

  logic [NELEM-1:0]     mask_cur, mask_nxt;
  logic [ELEM_W-1:0]    e_next, e_first_nxt, e_first0;
  logic                 e_has_next, e_is_first;
  logic [1:0]           nk_last;

  assign nk_last  = (cfg.s == 2'd2) ? 2'd3 : 2'd0;
  assign mask_cur = kind_mask(cfg.kc, cfg.s, k_q);
  assign mask_nxt = kind_mask(cfg.kc, cfg.s, k_q + 2'd1);

  // next non-zero element after e_q, first non-zero of the next kind,
  // and first non-zero of kind 0
  always_comb begin
    logic [NELEM-1:0] m0;
    e_next = '0; e_has_next = 1'b0;
    for (int e = NELEM-1; e >= 0; e--)
      if (e > int'(e_q) && mask_cur[e]) begin e_next = ELEM_W'(e); e_has_next = 1'b1; end
    e_first_nxt = '0;
    for (int e = NELEM-1; e >= 0; e--)
      if (mask_nxt[e]) e_first_nxt = ELEM_W'(e);
    m0 = kind_mask(cfg.kc, cfg.s, 2'd0);
    e_first0 = '0;
    for (int e = NELEM-1; e >= 0; e--)
      if (m0[e]) e_first0 = ELEM_W'(e);
    e_is_first = 1'b1;
    for (int e = 0; e < NELEM; e++)
      if (e < int'(e_q) && mask_cur[e]) e_is_first = 1'b0;
  end

  logic last_ci;
  assign last_ci    = (ci_q == cfg.ct - 4'd1);
  assign issue_last = busy && last_ci && !e_has_next && (k_q == nk_last);
  assign ready      = !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; k_q <= '0; e_q <= '0; ci_q <= '0; tx_q <= '0; half_q <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; k_q <= '0; e_q <= e_first0; ci_q <= '0; tx_q <= tx; half_q <= vhalf;
      end
    end else begin
      if (!last_ci) begin
        ci_q <= ci_q + 4'd1;
      end else begin
        ci_q <= '0;
        if (e_has_next) e_q <= e_next;
        else if (k_q != nk_last) begin k_q <= k_q + 2'd1; e_q <= e_first_nxt; end
        else busy <= 1'b0;
      end
    end
  end

  assign vm_re    = busy;
  assign vm_relem = e_q;
  assign vm_raddr = VAW'({half_q, ci_q[CW-1:0]});
  assign wb_re    = busy;
  assign wb_relem = e_q;
  assign wb_raddr = WAW'({k_q, ci_q[CW-1:0]});

  // operands arrive one cycle after issue
  logic     p_valid, p_first, p_last;
  res_tag_t p_tag;
  always_ff @(posedge clk) begin
    if (!rst_n) p_valid <= 1'b0;
    else        p_valid <= busy;
    p_first <= (ci_q == '0);
    p_last  <= last_ci;
    p_tag   <= '{kind: k_q, elem: e_q, tx: tx_q, first_e: e_is_first,
                 last_e: !e_has_next};
  end

  logic [TM-1:0]    pe_valid;
  res_tag_t         pe_tag [TM];
  for (genvar t = 0; t < TM; t++) begin : g_pe
    com_pe #(.TN(TN), .TAG_W($bits(res_tag_t))) u_pe (
      .clk, .rst_n,
      .in_valid (p_valid), .in_first(p_first), .in_last(p_last), .in_tag(p_tag),
      .v        (vm_rdata), .w(wb_rdata[t]),
      .out_valid(pe_valid[t]), .out(res[t]), .out_tag(pe_tag[t])
    );
  end

  assign res_valid = pe_valid[0];
  assign res_tag   = pe_tag[0];

endmodule
