// tb_post_pe: feeds random transformed-output tiles element by element, only
// the elements that are non-zero for the kind, as the engine does, and checks
// the stored 2x2 tile of every map against the dense inverse transform
// A^T Y A (zeros filled in, A^T written out here), shifted by out_shift,
// saturated to 16 bits and passed through ReLU when enabled. The store
// address must be {half, sy, tx, sx} of the kind and come one cycle after the
// last element.
//
// The reference is the dense A^T Y A of eq. (1) with the paper's A; shift,
// saturation and ReLU are this design's choices.
module tb_post_pe;
  import wino_pkg::*;
  localparam int unsigned TM = 2, MAX_W = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int AT [2][4] = '{'{1, 1, 1, 0}, '{0, 1, -1, -1}};

  logic rst_n, ohalf, in_valid, ob_we;
  layer_cfg_t cfg;
  logic [TM-1:0][ACC_W-1:0] in;
  res_tag_t in_tag;
  logic [4:0] ob_waddr;
  logic [3:0][TM-1:0][DW-1:0] ob_wdata;

  post_pe #(.TM(TM), .MAX_W(MAX_W)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_relu = 0, n_sat = 0;

  task automatic one_tile(int kc, int s, int k, int t_x, int half, int sh, bit relu, int big);
    longint y [TM][16];
    bit nz [16];
    int first_e, last_e;
    first_e = -1;
    for (int e = 0; e < 16; e++) begin
      bit zr, zc;
      zr = (kc == 2) || (s == 2 && k >= 2);
      zc = (kc == 2) || (s == 2 && (k % 2) == 1);
      nz[e] = !((zr && e / 4 == 0) || (zc && e % 4 == 0));
      if (nz[e]) begin if (first_e < 0) first_e = e; last_e = e; end
      for (int t = 0; t < TM; t++)
        y[t][e] = nz[e] ? (longint'($urandom_range(0, 2 * big)) - big) : 0;
    end
    cfg = '0; cfg.s = 2'(s); cfg.kc = 2'(kc); cfg.out_shift = 6'(sh); cfg.relu_en = relu;
    ohalf = 1'(half);
    for (int e = 0; e < 16; e++)
      if (nz[e]) begin
        @(negedge clk);
        in_valid = 1;
        in_tag = '{kind: 2'(k), elem: ELEM_W'(e), tx: DIM_W'(t_x), first_e: (e == first_e), last_e: (e == last_e)};
        for (int t = 0; t < TM; t++) in[t] = ACC_W'(y[t][e]);
      end
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!ob_we) begin failures++; $display("no store"); end
    else begin
      int sy, sx;
      sy = (s == 2) ? k / 2 : 0; sx = (s == 2) ? k % 2 : 0;
      checks++;
      if (ob_waddr != {1'(half), 1'(sy), 2'(t_x), 1'(sx)}) begin failures++; $display("address %b", ob_waddr); end
      for (int t = 0; t < TM; t++)
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++) begin
            longint acc;
            acc = 0;
            for (int a = 0; a < 4; a++)
              for (int b = 0; b < 4; b++) acc += AT[i][a] * y[t][a*4+b] * AT[j][b];
            acc = acc >>> sh;
            if (relu && acc < 0) begin acc = 0; n_relu++; end
            if (acc > 32767) begin acc = 32767; n_sat++; end
            if (acc < -32768) begin acc = -32768; n_sat++; end
            checks++;
            if (int'($signed(ob_wdata[i*2+j][t])) != int'(acc)) begin
              failures++;
              if (failures < 10) $display("kc%0d s%0d k%0d map %0d (%0d,%0d): %0d exp %0d", kc, s, k, t, i, j,
                                          $signed(ob_wdata[i*2+j][t]), acc);
            end
          end
    end
    @(posedge clk); #1;
    checks++;
    if (ob_we) begin failures++; $display("store held"); end
  endtask

  initial begin
    rst_n = 0; in_valid = 0; ohalf = 0; cfg = '0; in = '0; in_tag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      int kc, s;
      kc = (n % 3 == 1) ? 2 : 3;
      s  = (n % 3 == 2) ? 1 : 2;
      one_tile(kc, s, (s == 2) ? n % 4 : 0, $urandom_range(0, 3), n % 2, 2 + (n % 4),
               (n % 5) < 2, (n % 7 == 0) ? 4000000 : 20000);
    end
    checks++;
    if (n_relu == 0 || n_sat == 0) begin failures++; $display("relu %0d sat %0d", n_relu, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
