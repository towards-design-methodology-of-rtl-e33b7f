// tb_output_buffer: writes random 2x2 tiles for every (sy, tx, sx) address of
// one half, then drains that half under random o_ready while the other half
// is being written, and checks that the stream is the raster scan of the
// deconvolution band: pixel (row, col) must come from the tile written for
// kind (row%S, col%S), tile col/(2S), position (row/S, (col/S)%2). Runs with
// S = 2 and S = 1 and checks o_last and one beat per cycle when ready is high.
//
// The 2 x mS-line ping-pong size is the paper's; the address layout and raster
// order are this design's choices.
module tb_output_buffer;
  import wino_pkg::*;
  localparam int unsigned TM = 2, MAX_W = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, we, drain_start, drain_half, drain_busy, o_valid, o_ready, o_last;
  layer_cfg_t cfg;
  logic [4:0] waddr;
  logic [3:0][TM-1:0][DW-1:0] wdata;
  logic [TM-1:0][DW-1:0] o_data;

  output_buffer #(.TM(TM), .MAX_W(MAX_W)) dut (.*);

  logic [TM-1:0][DW-1:0] pix [2][4][16];   // half, row, column

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fill(int half, int s, int w);
    for (int sy = 0; sy < s; sy++)
      for (int t_x = 0; t_x < w / 2; t_x++)
        for (int sx = 0; sx < s; sx++) begin
          logic [3:0][TM-1:0][DW-1:0] d;
          for (int b = 0; b < 4; b++) for (int t = 0; t < TM; t++) d[b][t] = DW'($urandom);
          @(negedge clk);
          we = 1; waddr = {1'(half), 1'(sy), 2'(t_x), 1'(sx)}; wdata = d;
          for (int i = 0; i < 2; i++)
            for (int j = 0; j < 2; j++)
              pix[half][s*i+sy][s*(2*t_x+j)+sx] = d[i*2+j];
        end
    @(negedge clk); we = 0;
  endtask

  task automatic drain(int half, int s, int w, int busy_pct);
    int beats, cycles;
    @(negedge clk); drain_start = 1; drain_half = 1'(half);
    @(negedge clk); drain_start = 0;
    beats = 0; cycles = 0;
    for (int r = 0; r < 2 * s; r++)
      for (int c = 0; c < s * w; c++) begin
        o_ready = ($urandom_range(0, 99) >= busy_pct);
        @(posedge clk);
        cycles++;
        while (!(o_valid && o_ready)) begin
          #1; o_ready = ($urandom_range(0, 99) >= busy_pct); @(posedge clk); cycles++;
        end
        checks++;
        if (o_data !== pix[half][r][c]) begin failures++; $display("s=%0d pixel (%0d,%0d) wrong", s, r, c); end
        checks++;
        if (o_last !== (r == 2*s-1 && c == s*w-1)) begin failures++; $display("o_last wrong"); end
        #1;
      end
    o_ready = 0;
    @(negedge clk);
    checks++;
    if (drain_busy) begin failures++; $display("still busy after last beat"); end
    if (busy_pct == 0) begin
      checks++;
      if (cycles != 2 * s * s * w) begin failures++; $display("%0d cycles for %0d beats", cycles, 2*s*s*w); end
    end
  endtask

  initial begin
    rst_n = 0; we = 0; drain_start = 0; drain_half = 0; o_ready = 0; waddr = 0; wdata = '0;
    cfg = '0; cfg.w_i = 8; cfg.s = 2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fill(0, 2, 8); fill(1, 2, 8);
    drain(0, 2, 8, 0);
    drain(1, 2, 8, 40);
    cfg.s = 1; cfg.w_i = 6;
    fill(1, 1, 6);
    drain(1, 1, 6, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
