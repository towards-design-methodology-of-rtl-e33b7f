// tb_pre_pe: loads a 6x6 image of 2 channel tiles x 2 lanes into an input line
// buffer (row y in slot y mod 6), then asks the pre-PE for every tile of every
// band. Each tile-matrix write is compared with V = B^T Z B computed here from
// the zero-padded window starting at (2*band-1, 2*tx-1), with B^T written out;
// the address must be {half, channel tile} and done must follow start by
// exactly 4*ct + 2 clock edges.
//
// The reference computes B^T Z B with the paper's B (eq. (4)) on windows cut
// from the image with one pixel of zero padding (this design's convention).
module tb_pre_pe;
  import wino_pkg::*;
  localparam int unsigned TN = 2, DEPTH = 16, CT_MAX = 2;
  localparam int H = 6, W = 6, CT = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int BT [4][4] = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};

  logic rst_n, start, busy, done, vhalf;
  layer_cfg_t cfg;
  logic [DIM_W-1:0] tx, band;
  logic lb_we, lb_re;
  logic [2:0] lb_wslot;
  logic [3:0] lb_waddr, lb_raddr;
  logic [TN-1:0][DW-1:0] lb_wdata;
  logic [WN-1:0][2:0] lb_rslot;
  logic [WN-1:0][TN-1:0][DW-1:0] lb_rdata;
  logic vm_we;
  logic [1:0] vm_waddr;
  logic [NELEM-1:0][TN-1:0][VW-1:0] vm_wdata;

  int img [CT*TN][H][W];

  input_line_buffer #(.TN(TN), .DEPTH(DEPTH)) u_lb (
    .clk, .we(lb_we), .wslot(lb_wslot), .waddr(lb_waddr), .wdata(lb_wdata),
    .re(lb_re), .raddr(lb_raddr), .rslot(lb_rslot), .rdata(lb_rdata));
  pre_pe #(.TN(TN), .DEPTH(DEPTH), .CT_MAX(CT_MAX)) dut (.*);

  int writes = 0, cur_band, cur_tx, cur_half;
  always @(posedge clk) begin
    #1;
    if (vm_we) begin
      int ci;
      ci = int'(vm_waddr[0]);
      checks++;
      if (int'(vm_waddr[1]) != cur_half) begin failures++; $display("wrong half"); end
      for (int l = 0; l < TN; l++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) begin
            int acc;
            acc = 0;
            for (int r = 0; r < 4; r++)
              for (int c = 0; c < 4; c++) begin
                int y, x, z;
                y = 2 * cur_band - 1 + r; x = 2 * cur_tx - 1 + c;
                z = (y >= 0 && y < H && x >= 0 && x < W) ? img[ci*TN+l][y][x] : 0;
                acc += BT[i][r] * BT[j][c] * z;
              end
            checks++;
            if (int'($signed(vm_wdata[i*4+j][l])) != acc) begin
              failures++;
              if (failures < 10) $display("band %0d tx %0d ci %0d lane %0d V[%0d][%0d]=%0d exp %0d",
                cur_band, cur_tx, ci, l, i, j, $signed(vm_wdata[i*4+j][l]), acc);
            end
          end
      writes++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; start = 0; tx = 0; band = 0; vhalf = 0; lb_we = 0; lb_wslot = 0; lb_waddr = 0; lb_wdata = '0;
    cfg = '0; cfg.h_i = H; cfg.w_i = W; cfg.ct = CT; cfg.s = 2; cfg.kc = 3;
    for (int c = 0; c < CT*TN; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[c][y][x] = int'($urandom_range(0, 65535)) - 32768;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int ci = 0; ci < CT; ci++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          lb_we = 1; lb_wslot = 3'(y % 6); lb_waddr = 4'(ci * W + x);
          for (int l = 0; l < TN; l++) lb_wdata[l] = DW'(img[ci*TN+l][y][x]);
        end
    @(negedge clk); lb_we = 0;
    for (int b = 0; b < H / 2; b++)
      for (int t = 0; t < W / 2; t++) begin
        int n, w0;
        cur_band = b; cur_tx = t; cur_half = $urandom_range(0, 1); w0 = writes;
        @(negedge clk);
        start = 1; band = DIM_W'(b); tx = DIM_W'(t); vhalf = 1'(cur_half);
        n = 0;
        do begin @(posedge clk); n++; #1; start = 0; end while (!done && n < 100);
        checks++;
        if (n != 4 * CT + 2) begin failures++; $display("done after %0d edges, expected %0d", n, 4*CT+2); end
        checks++;
        if (writes - w0 != CT) begin failures++; $display("%0d writes, expected %0d", writes - w0, CT); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
