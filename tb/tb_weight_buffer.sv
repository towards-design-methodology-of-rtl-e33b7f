// tb_weight_buffer: loads every (map, kind, channel tile) address with random
// 16-element filter words, then reads random (element, address) pairs and
// checks that all T_m maps return their own words one cycle later.
//
// The M matrices of n^2 x N per kind are the paper's; the bank layout is this
// design's choice.
module tb_weight_buffer;
  import wino_pkg::*;
  localparam int unsigned TM = 2, TN = 4, CT_MAX = 2, AW = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [0:0] wmap;
  logic [AW-1:0] waddr, raddr;
  logic [NELEM-1:0][TN-1:0][WW-1:0] wdata;
  logic [ELEM_W-1:0] relem;
  logic [TM-1:0][TN-1:0][WW-1:0] rdata;
  logic [NELEM-1:0][TN-1:0][WW-1:0] model [TM][8];

  weight_buffer #(.TM(TM), .TN(TN), .CT_MAX(CT_MAX)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; wmap = 0; waddr = 0; raddr = 0; relem = 0; wdata = '0;
    for (int t = 0; t < TM; t++)
      for (int a = 0; a < 8; a++) begin
        logic [NELEM-1:0][TN-1:0][WW-1:0] d;
        for (int e = 0; e < NELEM; e++)
          for (int l = 0; l < TN; l++) d[e][l] = WW'($urandom);
        @(negedge clk); we = 1; wmap = 1'(t); waddr = AW'(a); wdata = d; model[t][a] = d;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int a, e;
      a = $urandom_range(0, 7); e = $urandom_range(0, NELEM-1);
      re = 1; raddr = AW'(a); relem = ELEM_W'(e);
      @(posedge clk); #1; re = 0;
      for (int t = 0; t < TM; t++) begin
        checks++;
        if (rdata[t] !== model[t][a][e]) begin failures++; $display("mismatch t=%0d a=%0d e=%0d", t, a, e); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
