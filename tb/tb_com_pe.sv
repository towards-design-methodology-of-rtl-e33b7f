// tb_com_pe: streams random operand rows into one com-PE in groups of 1 to 4
// channel tiles (first/last flags), with idle cycles between some rows, and
// checks each emitted sum against a dot product computed here, its tag, and
// that it appears exactly 3 cycles after the last row of its group.
//
// The reference is a plain dot product; the group sizes and random data are
// this test's own choices.
module tb_com_pe;
  import wino_pkg::*;
  localparam int unsigned TN = 8, TAG_W = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, in_first, in_last, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [TN-1:0][VW-1:0] v;
  logic [TN-1:0][WW-1:0] w;
  logic signed [ACC_W-1:0] out;

  com_pe #(.TN(TN), .TAG_W(TAG_W)) dut (.*);

  longint exp_q [$];
  int     exp_t [$];
  int     exp_c [$];
  int     cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker
  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        longint e; int t, c;
        e = exp_q.pop_front(); t = exp_t.pop_front(); c = exp_c.pop_front();
        if (longint'(out) != e || int'(out_tag) != t || cyc != c + 3) begin
          failures++;
          $display("result %0d tag %0d at %0d, expected %0d tag %0d at %0d", out, out_tag, cyc, e, t, c + 3);
        end
      end
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; in_last = 0; in_tag = 0; v = '0; w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      int nt; longint acc;
      nt = $urandom_range(1, 4); acc = 0;
      for (int ci = 0; ci < nt; ci++) begin
        @(negedge clk);
        for (int l = 0; l < TN; l++) begin
          int a, b;
          a = (g == 0) ? -(1 << (VW-1)) : int'($urandom_range(0, (1 << VW) - 1)) - (1 << (VW-1));
          b = (g == 0) ? -(1 << (WW-1)) : int'($urandom_range(0, (1 << WW) - 1)) - (1 << (WW-1));
          v[l] = VW'(a); w[l] = WW'(b);
          acc += longint'(a) * longint'(b);
        end
        in_valid = 1; in_first = (ci == 0); in_last = (ci == nt - 1); in_tag = TAG_W'(g);
        if (ci == nt - 1) begin exp_q.push_back(acc); exp_t.push_back(g % 256); exp_c.push_back(cyc); end
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
