// tb_winograd_deconv_top: end-to-end test of the accelerator at reduced size
// (T_m = 2, T_n = 4). Runs a DCGAN-style layer (K_D = 5, S = 2, K_C = 3: kinds
// of Case 1, 2 and 3), an ArtGAN/DiscoGAN/GP-GAN style layer (K_D = 4, S = 2,
// K_C = 2: all kinds Case 3, ReLU on), and the ArtGAN stride-1 layer
// (K_D = 3, S = 1), with several map groups and channel tiles, random gaps on
// the input stream and back-pressure on the output stream. Every output pixel
// is compared with a direct transposed convolution; input and output stalls
// must both occur.
//
// The reference is a direct transposed convolution, independent of TDC and
// Winograd, so it checks the paper's method as a whole; the parameters are
// reduced so that many layer shapes run quickly.
module tb_winograd_deconv_top;
  import wino_pkg::*;

  localparam int unsigned TM = 2, TN = 4, MAX_W = 8, DEPTH = 16, CT_MAX = 2;
  localparam int unsigned NMAX_C = TN * CT_MAX, MMAX = 3 * TM, HMAX = 8;

  logic clk = 1'b0;
  logic rst_n, start, busy, done, in_valid, in_ready, wt_valid, wt_ready;
  logic o_valid, o_ready, o_last, stall_in, stall_out;
  layer_cfg_t cfg;
  logic [TN-1:0][DW-1:0]       in_data;
  logic [TN-1:0][8:0][DW-1:0]  wt_data;
  logic [TM-1:0][DW-1:0]       o_data;

  winograd_deconv_top #(.TM(TM), .TN(TN), .MAX_W(MAX_W), .DEPTH(DEPTH), .CT_MAX(CT_MAX)) dut (.*);

  `include "deconv_tb_body.svh"

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; in_valid = 1'b0; wt_valid = 1'b0; o_ready = 1'b0;
    cfg = '0; in_data = '0; wt_data = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_layer(5, 2, 4, 6, 2, 2, 1'b0, 10, 10);   // DCGAN-like
    run_layer(4, 2, 6, 4, 1, 3, 1'b1, 70, 5);    // K_D = 4, slow input
    run_layer(3, 1, 4, 8, 2, 1, 1'b1, 0, 85);    // stride 1, slow output
    run_layer(4, 2, 8, 8, 2, 1, 1'b0, 0, 60);    // widest: ct*W = DEPTH
    run_layer(4, 2, 4, 8, 1, 1, 1'b0, 0, 95);    // output-bound
    report_mechanisms();
    if (n_stall_in == 0)  begin failures++; $display("input stall never happened"); end
    if (n_stall_out == 0) begin failures++; $display("output stall never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
