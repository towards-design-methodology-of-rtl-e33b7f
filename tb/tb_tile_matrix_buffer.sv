// tb_tile_matrix_buffer: writes random 16-element column blocks to every
// address (both ping-pong halves), then reads every (element, address) pair
// in random order and compares with a reference copy, one cycle of latency.
//
// The n^2 x N rearranged matrix is the paper's; the ping-pong halves are this
// design's choice.
module tb_tile_matrix_buffer;
  import wino_pkg::*;
  localparam int unsigned TN = 4, CT_MAX = 2, AW = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [NELEM-1:0][TN-1:0][VW-1:0] wdata;
  logic [ELEM_W-1:0] relem;
  logic [TN-1:0][VW-1:0] rdata;
  logic [NELEM-1:0][TN-1:0][VW-1:0] model [4];

  tile_matrix_buffer #(.TN(TN), .CT_MAX(CT_MAX)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; relem = 0; wdata = '0;
    for (int a = 0; a < 4; a++) begin
      logic [NELEM-1:0][TN-1:0][VW-1:0] d;
      for (int e = 0; e < NELEM; e++)
        for (int l = 0; l < TN; l++) d[e][l] = VW'($urandom);
      @(negedge clk); we = 1; waddr = AW'(a); wdata = d; model[a] = d;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int a, e;
      a = $urandom_range(0, 3); e = $urandom_range(0, NELEM-1);
      re = 1; raddr = AW'(a); relem = ELEM_W'(e);
      @(posedge clk); #1; re = 0;
      checks++;
      if (rdata !== model[a][e]) begin failures++; $display("mismatch a=%0d e=%0d", a, e); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
