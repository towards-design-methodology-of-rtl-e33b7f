// tb_accelerating_engine: the tile matrix and weight buffer are modelled here
// as arrays with one-cycle read latency. For the three layer types of the
// target GANs (K_C = 3 with S = 2, K_C = 2 with S = 2, K_C = 3 with S = 1) the
// engine runs back-to-back tiles; every result must arrive in kind / element
// order, only for the elements that are non-zero for its kind (the zero
// pattern is derived here from the TDC geometry), with the right first/last
// flags, tile tag and value (sum over channels of V * U). The number of issue
// cycles per tile must equal sum_k nz(k) * ct, i.e. 64*ct, 49*ct and 16*ct.
//
// The expected cycle counts per tile come from eq. (5) of the paper (36 or
// 49 products per output block of K_C = 2 or 3); the test data are random.
module tb_accelerating_engine;
  import wino_pkg::*;
  localparam int unsigned TM = 2, TN = 4, CT_MAX = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, vhalf, ready, issue_last;
  layer_cfg_t cfg;
  logic [DIM_W-1:0] tx;
  logic vm_re, wb_re;
  logic [ELEM_W-1:0] vm_relem, wb_relem;
  logic [1:0] vm_raddr;
  logic [2:0] wb_raddr;
  logic [TN-1:0][VW-1:0] vm_rdata;
  logic [TM-1:0][TN-1:0][WW-1:0] wb_rdata;
  logic res_valid;
  logic [TM-1:0][ACC_W-1:0] res;
  res_tag_t res_tag;

  accelerating_engine #(.TM(TM), .TN(TN), .CT_MAX(CT_MAX)) dut (.*);

  int V [2][2][16][TN];        // half, ci, elem, lane
  int U [TM][4][2][16][TN];    // map, kind, ci, elem, lane

  always @(posedge clk) begin
    if (vm_re) for (int l = 0; l < TN; l++) vm_rdata[l] <= VW'(V[vm_raddr[1]][vm_raddr[0]][vm_relem][l]);
    if (wb_re)
      for (int t = 0; t < TM; t++)
        for (int l = 0; l < TN; l++) wb_rdata[t][l] <= WW'(U[t][wb_raddr[2:1]][wb_raddr[0]][wb_relem][l]);
  end

  // expected result stream
  typedef struct { int kind; int elem; int tx; bit first; bit last; longint v [TM]; } exp_t;
  exp_t exq [$];
  int issue_cnt = 0;
  always @(posedge clk) if (vm_re) issue_cnt++;

  function automatic bit nonzero(int kc, int s, int k, int e);
    bit zr, zc;
    zr = (kc == 2) || (s == 2 && k >= 2);
    zc = (kc == 2) || (s == 2 && (k % 2) == 1);
    return !((zr && e / 4 == 0) || (zc && e % 4 == 0));
  endfunction

  task automatic expect_tile(int kc, int s, int ct, int t_x, int h);
    for (int k = 0; k < s * s; k++) begin
      int first_e, last_e;
      first_e = -1; last_e = -1;
      for (int e = 0; e < 16; e++) if (nonzero(kc, s, k, e)) begin if (first_e < 0) first_e = e; last_e = e; end
      for (int e = 0; e < 16; e++)
        if (nonzero(kc, s, k, e)) begin
          exp_t x;
          x.kind = k; x.elem = e; x.tx = t_x; x.first = (e == first_e); x.last = (e == last_e);
          for (int t = 0; t < TM; t++) begin
            x.v[t] = 0;
            for (int ci = 0; ci < ct; ci++)
              for (int l = 0; l < TN; l++) x.v[t] += longint'(V[h][ci][e][l]) * longint'(U[t][k][ci][e][l]);
          end
          exq.push_back(x);
        end
    end
  endtask

  always @(posedge clk) begin
    #1;
    if (res_valid) begin
      exp_t x;
      checks++;
      if (exq.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        x = exq.pop_front();
        if (int'(res_tag.kind) != x.kind || int'(res_tag.elem) != x.elem || int'(res_tag.tx) != x.tx ||
            res_tag.first_e != x.first || res_tag.last_e != x.last) begin
          failures++;
          $display("tag kind %0d elem %0d tx %0d f%0d l%0d, expected %0d %0d %0d %0d %0d", res_tag.kind,
                   res_tag.elem, res_tag.tx, res_tag.first_e, res_tag.last_e, x.kind, x.elem, x.tx, x.first, x.last);
        end
        for (int t = 0; t < TM; t++)
          if (longint'($signed(res[t])) != x.v[t]) begin failures++; $display("value map %0d", t); end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_cfg(int kc, int s, int ct, int ntiles, int exp_cycles);
    int c0;
    cfg = '0; cfg.kc = 2'(kc); cfg.s = 2'(s); cfg.ct = 4'(ct); cfg.h_i = 8; cfg.w_i = 8; cfg.mgroups = 1;
    for (int h = 0; h < 2; h++) for (int ci = 0; ci < 2; ci++) for (int e = 0; e < 16; e++) for (int l = 0; l < TN; l++)
      V[h][ci][e][l] = int'($urandom_range(0, (1 << VW) - 1)) - (1 << (VW-1));
    for (int t = 0; t < TM; t++) for (int k = 0; k < 4; k++) for (int ci = 0; ci < 2; ci++) for (int e = 0; e < 16; e++)
      for (int l = 0; l < TN; l++) U[t][k][ci][e][l] = int'($urandom_range(0, (1 << WW) - 1)) - (1 << (WW-1));
    for (int n = 0; n < ntiles; n++) begin
      @(negedge clk);
      while (!ready) @(negedge clk);
      c0 = issue_cnt;
      start = 1; tx = DIM_W'(n + 3); vhalf = 1'(n % 2);
      expect_tile(kc, s, ct, n + 3, n % 2);
      @(negedge clk); start = 0;
      while (!ready) @(negedge clk);
      checks++;
      if (issue_cnt - c0 != exp_cycles) begin
        failures++; $display("kc=%0d s=%0d: %0d issue cycles, expected %0d", kc, s, issue_cnt - c0, exp_cycles);
      end
    end
    repeat (8) @(negedge clk);
    checks++;
    if (exq.size() != 0) begin failures++; $display("%0d results missing", exq.size()); exq.delete(); end
  endtask

  initial begin
    rst_n = 0; start = 0; vhalf = 0; tx = 0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_cfg(3, 2, 2, 3, 49 * 2);
    run_cfg(2, 2, 1, 3, 36 * 1);
    run_cfg(2, 2, 2, 2, 36 * 2);
    run_cfg(3, 1, 2, 3, 16 * 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
