// filter_transform: moves T_n spatial 3x3 convolution filters into the
// Winograd domain, U = G' f G'^T, as they are loaded.
//
// G' = 2G = [2 0 0; 1 1 1; 1 -1 1; 0 0 2] is the paper's F(2,3) filter
// transform scaled by two so that the result is an exact integer; U is
// therefore 4x the paper's value and the post-PE divides it back out.
// Input tap f[u][v] is f[u*3+v]; output element e = i*4+j is U[i][j].
// Purely combinational, T_n filters in parallel (one load beat per cycle).
module filter_transform
  import wino_pkg::*;
#(
  parameter int unsigned TN = 128
) (
  input  logic [TN-1:0][WR*WR-1:0][DW-1:0] f,
  output logic [TN-1:0][NELEM-1:0][WW-1:0] u
);

  // g'(i,k) for the 4x3 matrix 2G
  function automatic int g2(input int i, input int k);
    case (i)
      0:       return (k == 0) ? 2 : 0;
      1:       return 1;
      2:       return (k == 1) ? -1 : 1;
      default: return (k == 2) ? 2 : 0;
    endcase
  endfunction

  always_comb begin
    for (int l = 0; l < TN; l++) begin
      logic signed [WW-1:0] t [WN][WR];   // t = G' f  (4x3)
      for (int i = 0; i < WN; i++)
        for (int v = 0; v < WR; v++) begin
          t[i][v] = '0;
          for (int k = 0; k < WR; k++)
            t[i][v] = t[i][v] + WW'(g2(i, k)) * WW'($signed(f[l][k*WR+v]));
        end
      for (int i = 0; i < WN; i++)
        for (int j = 0; j < WN; j++) begin
          logic signed [WW-1:0] acc;
          acc = '0;
          for (int v = 0; v < WR; v++)
            acc = acc + t[i][v] * WW'(g2(j, v));
          u[l][i*WN+j] = acc;
        end
    end
  end

endmodule
