// tb_input_line_buffer: fills every slot and address of a small input line
// buffer with random words (kept in a reference array), then reads random
// addresses with four random slot selects and checks each window row one
// cycle later; also checks that a write to one slot leaves the others alone.
//
// The (n+m)-line organisation is the paper's; slot = row mod 6 is this
// design's choice.
module tb_input_line_buffer;
  import wino_pkg::*;
  localparam int unsigned TN = 4, DEPTH = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [2:0] wslot;
  logic [2:0] waddr, raddr;
  logic [TN-1:0][DW-1:0] wdata;
  logic [WN-1:0][2:0] rslot;
  logic [WN-1:0][TN-1:0][DW-1:0] rdata;
  logic [TN-1:0][DW-1:0] model [LINES][DEPTH];

  input_line_buffer #(.TN(TN), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; wslot = 0; waddr = 0; raddr = 0; wdata = '0; rslot = '0;
    for (int l = 0; l < LINES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        logic [TN-1:0][DW-1:0] d;
        for (int k = 0; k < TN; k++) d[k] = DW'($urandom);
        @(negedge clk); we = 1; wslot = 3'(l); waddr = 3'(a); wdata = d; model[l][a] = d;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      logic [WN-1:0][2:0] sl;
      logic [2:0] a;
      a = 3'($urandom_range(0, DEPTH-1));
      for (int r = 0; r < WN; r++) sl[r] = 3'($urandom_range(0, LINES-1));
      // occasionally overwrite a word in the same cycle as the read
      we = (n % 3 == 0);
      wslot = 3'($urandom_range(0, LINES-1)); waddr = 3'($urandom_range(0, DEPTH-1));
      for (int k = 0; k < TN; k++) wdata[k] = DW'($urandom);
      re = 1; raddr = a; rslot = sl;
      @(posedge clk); #1;
      if (we) model[wslot][waddr] = wdata;
      re = 0; we = 0;
      for (int r = 0; r < WN; r++) begin
        checks++;
        if (rdata[r] !== model[sl[r]][a] && !(n % 3 == 0 && wslot == sl[r] && waddr == a)) begin
          failures++; $display("read mismatch n=%0d row=%0d slot=%0d", n, r, sl[r]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
