// tb_controller: runs the layer sequencer against simple models of the units
// it drives (pre-PE: done 3 cycles after start; engine: busy 6 cycles with
// issue_last in the last; output drain: busy for a random 5..60 cycles) and
// random gaps on the filter and input streams. It checks the order of filter
// writes (map, kind, channel tile), the line slot (row mod 6) and address
// (ci*W+x) of every input beat, that no input row overwrites a row the
// current band still reads, that a band's tiles start only after its four
// rows arrived, that the engine only starts on a filled tile-matrix half,
// the number of tiles, bands and drains, the done pulse, and that both the
// input stall and the output stall occur.
//
// The loop order and stall reporting checked here are this design's own; the
// paper gives only the buffer sizes ((n+m) input lines, 2 x mS output lines).
module tb_controller;
  import wino_pkg::*;
  localparam int unsigned TM = 2, DEPTH = 16, CT_MAX = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, in_valid, in_ready, lb_we, wt_valid, wt_ready, wb_we;
  layer_cfg_t cfg_in, cfg;
  logic [2:0] lb_wslot;
  logic [3:0] lb_waddr;
  logic [0:0] wb_wmap;
  logic [2:0] wb_waddr;
  logic pre_start, pre_vhalf, pre_done, eng_start, eng_vhalf, eng_ready, eng_issue_last;
  logic [DIM_W-1:0] pre_tx, band, eng_tx;
  logic ohalf, drain_start, drain_busy, stall_in, stall_out;

  controller #(.TM(TM), .DEPTH(DEPTH), .CT_MAX(CT_MAX)) dut (.*);

  // ---- unit models ----
  int pre_cnt = 0, eng_cnt = 0, drain_cnt = 0;
  int eng_left = 0, drain_left = 0;
  logic [2:0] pre_pipe;
  always @(posedge clk) begin
    if (!rst_n) begin pre_pipe <= 0; eng_left <= 0; drain_left <= 0; end
    else begin
      pre_pipe <= {pre_pipe[1:0], pre_start};
      if (eng_start) eng_left <= 6; else if (eng_left > 0) eng_left <= eng_left - 1;
      if (drain_start) drain_left <= $urandom_range(5, 60); else if (drain_left > 0) drain_left <= drain_left - 1;
    end
  end
  assign pre_done       = pre_pipe[2];
  assign eng_ready      = (eng_left == 0);
  assign eng_issue_last = (eng_left == 1);
  assign drain_busy     = (drain_left != 0);

  // ---- checks on every cycle ----
  int H, W, CT, MG, S;
  int w_beats = 0, in_beats = 0, rows_in = 0, n_stall_in = 0, n_stall_out = 0, filled = 0, cur_mg = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (stall_in) n_stall_in++;
      if (stall_out) n_stall_out++;
      if (wb_we) begin
        int per_mg, b, t, k, ci;
        per_mg = TM * S * S * CT;
        b = w_beats % per_mg;
        t = b / (S * S * CT); k = (b / CT) % (S * S); ci = b % CT;
        checks++;
        if (int'(wb_wmap) != t || int'(wb_waddr) != k * 2 + ci) begin
          failures++; $display("filter beat %0d: map %0d addr %0d", w_beats, wb_wmap, wb_waddr);
        end
        w_beats++;
      end
      if (lb_we) begin
        int b, y, ci, x;
        b = in_beats % (H * CT * W);
        if (b == 0) rows_in = 0;
        y = b / (CT * W); ci = (b / W) % CT; x = b % W;
        checks++;
        if (int'(lb_wslot) != y % 6 || int'(lb_waddr) != ci * W + x) begin
          failures++; $display("input beat row %0d: slot %0d addr %0d", y, lb_wslot, lb_waddr);
        end
        checks++;
        if (y >= 6 && y - 6 >= 2 * int'(band) - 1) begin
          failures++; $display("row %0d overwrites row %0d still used by band %0d", y, y - 6, band);
        end
        in_beats++;
        if (x == W - 1 && ci == CT - 1) rows_in = y + 1;
      end
      if (pre_start) begin
        int need;
        need = 2 * int'(band) + 3; if (need > H) need = H;
        checks++;
        if (rows_in < need) begin failures++; $display("band %0d started with %0d rows", band, rows_in); end
        pre_cnt++;
      end
      if (pre_done) filled++;
      if (eng_start) begin
        checks++;
        if (filled <= eng_cnt) begin failures++; $display("engine started on an empty half"); end
        eng_cnt++;
      end
      if (drain_start) begin
        checks++;
        if (drain_busy) begin failures++; $display("drain restarted while busy"); end
        drain_cnt++;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int h, int w, int ct, int mg, int s, int gap);
    int p0, e0, d0;
    H = h; W = w; CT = ct; MG = mg; S = s;
    w_beats = 0; in_beats = 0; p0 = pre_cnt; e0 = eng_cnt; d0 = drain_cnt;
    cfg_in = '0; cfg_in.h_i = DIM_W'(h); cfg_in.w_i = DIM_W'(w); cfg_in.ct = 4'(ct);
    cfg_in.mgroups = 8'(mg); cfg_in.s = 2'(s); cfg_in.kc = 3;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    fork
      for (int n = 0; n < mg * TM * s * s * ct; n++) begin
        while ($urandom_range(0, 99) < gap) begin wt_valid = 0; @(negedge clk); end
        wt_valid = 1;
        do @(negedge clk); while (w_beats == n);   // until the beat was taken
      end
      for (int n = 0; n < mg * h * ct * w; n++) begin
        while ($urandom_range(0, 99) < gap) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        do @(negedge clk); while (in_beats == n);
      end
    join_none
    while (!done) @(posedge clk);
    disable fork;
    @(negedge clk); wt_valid = 0; in_valid = 0;
    checks++;
    if (w_beats != mg * TM * s * s * ct || in_beats != mg * h * ct * w) begin
      failures++; $display("beats: filters %0d inputs %0d", w_beats, in_beats);
    end
    checks++;
    if (pre_cnt - p0 != mg * (h / 2) * (w / 2) || eng_cnt - e0 != pre_cnt - p0 || drain_cnt - d0 != mg * (h / 2)) begin
      failures++; $display("tiles %0d engine %0d drains %0d", pre_cnt - p0, eng_cnt - e0, drain_cnt - d0);
    end
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0; wt_valid = 0; cfg_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(6, 4, 2, 2, 2, 60);
    run(8, 8, 2, 1, 2, 0);
    run(4, 6, 1, 2, 1, 30);
    checks++;
    if (n_stall_in == 0 || n_stall_out == 0) begin
      failures++; $display("stalls: input %0d output %0d", n_stall_in, n_stall_out);
    end
    $display("stall_in=%0d stall_out=%0d", n_stall_in, n_stall_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
