// controller: sequences one DeConv layer through the accelerator.
//
// Loop nest (outer to inner): output-map group (T_m maps) -> band of m input
// rows -> tile column tx -> [engine: kind -> element -> channel tile].
//  * WLOAD: the S^2 * ct filter beats of each of the T_m maps of the group
//    are accepted from the filter stream (order: map, kind, channel tile),
//    passed through the filter transform and written to the weight buffer.
//  * Input rows are accepted from the input stream concurrently, in image
//    order (per row: channel tile, then x). Row y goes to line slot y mod 6;
//    it may be written only when no band still to run needs the row six
//    above it (the m spare rows of the (n+m)-row buffer), so loading runs
//    ahead of computation by up to two rows.
//  * BAND_WAIT: a band starts when its four window rows have arrived
//    (input stall otherwise).
//  * TILES: the pre-PE fills one half of the tile matrix while the engine
//    consumes the other; each half has a full flag, set by the pre-PE's done
//    and cleared when the engine has issued its last read of that half.
//  * FLUSH: waits for the last results to pass the com-PEs and the post-PE.
//  * BAND_END: waits until the previous output half has been streamed out
//    (output stall otherwise), then starts streaming the half just written
//    and swaps halves.
// The input stream is re-sent for every map group. done pulses once the
// last half has been streamed. stall_in / stall_out are high in the cycles
// a band waits for input rows / for the output stream.
// The ping-pong and row-rotation principle is the paper's; the loop order,
// handshakes and stall rules are this design's choices.
module controller
  import wino_pkg::*;
#(
  parameter int unsigned TM     = 4,
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned CT_MAX = 8,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = $clog2(LINES),
  localparam int unsigned MW    = (TM > 1) ? $clog2(TM) : 1,
  localparam int unsigned WAW   = 2 + $clog2(CT_MAX)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg_in,
  output layer_cfg_t         cfg,
  output logic               busy,
  output logic               done,
  // input stream -> line buffer
  input  logic               in_valid,
  output logic               in_ready,
  output logic               lb_we,
  output logic [SW-1:0]      lb_wslot,
  output logic [AW-1:0]      lb_waddr,
  // filter stream -> weight buffer
  input  logic               wt_valid,
  output logic               wt_ready,
  output logic               wb_we,
  output logic [MW-1:0]      wb_wmap,
  output logic [WAW-1:0]     wb_waddr,
  // pre-PE
  output logic               pre_start,
  output logic [DIM_W-1:0]   pre_tx,
  output logic [DIM_W-1:0]   band,
  output logic               pre_vhalf,
  input  logic               pre_done,
  // engine
  output logic               eng_start,
  output logic [DIM_W-1:0]   eng_tx,
  output logic               eng_vhalf,
  input  logic               eng_ready,
  input  logic               eng_issue_last,
  // output buffer
  output logic               ohalf,
  output logic               drain_start,
  input  logic               drain_busy,
  // status
  output logic               stall_in,
  output logic               stall_out
);

  localparam int unsigned CW = $clog2(CT_MAX);

  typedef enum logic [2:0] {S_IDLE, S_WLOAD, S_BAND_WAIT, S_TILES, S_FLUSH,
                            S_BAND_END, S_FINISH} state_t;
  state_t state;

  logic [7:0]       mg;
  logic [DIM_W-1:0] ntx, nband;
  logic [1:0]       nk_last;
  assign ntx     = cfg.w_i >> 1;
  assign nband   = cfg.h_i >> 1;
  assign nk_last = (cfg.s == 2'd2) ? 2'd3 : 2'd0;

  // ---------------- filter loading ----------------
  logic [MW-1:0] wl_t;
  logic [1:0]    wl_k;
  logic [3:0]    wl_ci;
  logic          wl_last;
  assign wt_ready = (state == S_WLOAD);
  assign wb_we    = wt_valid && wt_ready;
  assign wb_wmap  = wl_t;
  assign wb_waddr = WAW'({wl_k, wl_ci[CW-1:0]});
  assign wl_last  = (wl_ci == cfg.ct - 4'd1) && (wl_k == nk_last) && (wl_t == MW'(TM - 1));

  // ---------------- input loading ----------------
  logic [DIM_W:0]    ld_row;
  logic [AW:0]       ld_addr;
  logic              ld_active;
  logic [DIM_W+1:0]  need_lo;     // lowest row the current band still reads
  logic [DIM_W+1:0]  rows_need;   // rows that must be present for the band
  always_comb begin
    need_lo   = ({2'b00, band} << 1) == 0 ? '0 : ({2'b00, band} << 1) - 1'b1;
    rows_need = ({2'b00, band} << 1) + 3;
    if (rows_need > {2'b00, cfg.h_i}) rows_need = {2'b00, cfg.h_i};
  end
  assign ld_active = (state == S_WLOAD) || (state == S_BAND_WAIT) || (state == S_TILES)
                  || (state == S_FLUSH) || (state == S_BAND_END);
  assign in_ready  = ld_active && (ld_row < {1'b0, cfg.h_i})
                  && ({1'b0, ld_row} < need_lo + (DIM_W+2)'(LINES));
  assign lb_we     = in_valid && in_ready;
  assign lb_wslot  = SW'(ld_row % LINES);
  assign lb_waddr  = AW'(ld_addr);

  // ---------------- tile ping-pong ----------------
  logic [1:0]       vfull;
  logic             pre_active;
  logic [3:0]       flush_cnt;

  assign pre_start = (state == S_TILES) && !pre_active && (pre_tx < ntx) && !vfull[pre_vhalf];
  assign eng_start = (state == S_TILES) && eng_ready && (eng_tx < ntx) && vfull[eng_vhalf];

  assign stall_in  = (state == S_BAND_WAIT) && ({1'b0, ld_row} < rows_need);
  assign stall_out = (state == S_BAND_END) && drain_busy;
  assign drain_start = (state == S_BAND_END) && !drain_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; cfg <= '0; busy <= 1'b0; done <= 1'b0; mg <= '0;
      wl_t <= '0; wl_k <= '0; wl_ci <= '0;
      ld_row <= '0; ld_addr <= '0;
      band <= '0; pre_tx <= '0; eng_tx <= '0; pre_vhalf <= 1'b0; eng_vhalf <= 1'b0;
      vfull <= '0; pre_active <= 1'b0; flush_cnt <= '0; ohalf <= 1'b0;
    end else begin
      done <= 1'b0;
      // input rows
      if (lb_we) begin
        if (ld_addr == (AW+1)'(cfg.ct * cfg.w_i - 1)) begin
          ld_addr <= '0;
          ld_row  <= ld_row + 1'b1;
        end else ld_addr <= ld_addr + 1'b1;
      end
      // tile-matrix full flags
      if (pre_start) begin pre_active <= 1'b1; pre_tx <= pre_tx + 1'b1; end
      if (pre_done)  begin pre_active <= 1'b0; pre_vhalf <= ~pre_vhalf; end
      if (eng_start) begin eng_tx <= eng_tx + 1'b1; eng_vhalf <= ~eng_vhalf; end
      for (int h = 0; h < 2; h++) begin
        if (pre_done && pre_vhalf == 1'(h)) vfull[h] <= 1'b1;
        // the engine's current half is the one before the toggle
        if (eng_issue_last && eng_vhalf != 1'(h)) vfull[h] <= 1'b0;
      end

      case (state)
        S_IDLE:
          if (start) begin
            cfg <= cfg_in; busy <= 1'b1; mg <= '0; state <= S_WLOAD;
            wl_t <= '0; wl_k <= '0; wl_ci <= '0; ld_row <= '0; ld_addr <= '0;
            band <= '0; ohalf <= 1'b0; vfull <= '0; pre_vhalf <= 1'b0; eng_vhalf <= 1'b0;
          end
        S_WLOAD:
          if (wb_we) begin
            if (wl_ci != cfg.ct - 4'd1) wl_ci <= wl_ci + 4'd1;
            else begin
              wl_ci <= '0;
              if (wl_k != nk_last) wl_k <= wl_k + 2'd1;
              else begin wl_k <= '0; wl_t <= wl_t + 1'b1; end
            end
            if (wl_last) begin wl_t <= '0; state <= S_BAND_WAIT; end
          end
        S_BAND_WAIT:
          if (!stall_in) begin
            state <= S_TILES; pre_tx <= '0; eng_tx <= '0;
          end
        S_TILES:
          if (eng_tx == ntx && eng_ready) begin state <= S_FLUSH; flush_cnt <= '0; end
        S_FLUSH: begin
          flush_cnt <= flush_cnt + 4'd1;
          if (flush_cnt == 4'd7) state <= S_BAND_END;
        end
        S_BAND_END:
          if (!drain_busy) begin
            ohalf <= ~ohalf;
            if (band != nband - 1'b1) begin
              band <= band + 1'b1; state <= S_BAND_WAIT;
            end else begin
              band <= '0;
              if (mg != cfg.mgroups - 8'd1) begin
                mg <= mg + 8'd1; state <= S_WLOAD; ld_row <= '0; ld_addr <= '0;
              end else state <= S_FINISH;
            end
          end
        S_FINISH:
          if (!drain_busy && !drain_start) begin busy <= 1'b0; done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
