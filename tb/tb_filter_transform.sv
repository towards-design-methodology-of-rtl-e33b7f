// tb_filter_transform: random 3x3 filters (and the all-extremes corner case)
// are transformed and compared with U = G' f G'^T computed here with the
// matrix written out, G' = 2G = [2 0 0; 1 1 1; 1 -1 1; 0 0 2]. Also checks the
// zero pattern the row-skip relies on: a filter with a zero first row gives a
// zero first row of U.
//
// The reference multiplies out G f G^T with the paper's G (eq. (2)) scaled
// by 2, as the design does.
module tb_filter_transform;
  import wino_pkg::*;
  localparam int unsigned TN = 2;
  int checks = 0, failures = 0;
  logic [TN-1:0][8:0][DW-1:0]     f;
  logic [TN-1:0][NELEM-1:0][WW-1:0] u;
  int G [4][3] = '{'{2, 0, 0}, '{1, 1, 1}, '{1, -1, 1}, '{0, 0, 2}};

  filter_transform #(.TN(TN)) dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      int fv [TN][3][3];
      for (int l = 0; l < TN; l++)
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < 3; b++) begin
            fv[l][a][b] = (n == 0) ? ((a + b) % 2 ? -32768 : 32767)
                                   : int'($urandom_range(0, 65535)) - 32768;
            if (n % 4 == 1 && a == 0) fv[l][a][b] = 0;   // zero first row
            f[l][a*3+b] = DW'(fv[l][a][b]);
          end
      #1;
      for (int l = 0; l < TN; l++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) begin
            int acc;
            acc = 0;
            for (int a = 0; a < 3; a++)
              for (int b = 0; b < 3; b++) acc += G[i][a] * fv[l][a][b] * G[j][b];
            checks++;
            if (int'($signed(u[l][i*4+j])) != acc) begin
              failures++; $display("n=%0d lane=%0d U[%0d][%0d]=%0d exp %0d", n, l, i, j, $signed(u[l][i*4+j]), acc);
            end
            if (n % 4 == 1 && i == 0) begin
              checks++;
              if (u[l][j] != '0) begin failures++; $display("zero row not zero"); end
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
