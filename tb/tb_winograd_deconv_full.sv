// tb_winograd_deconv_full: one complete layer through winograd_deconv_top at
// its default size (T_m = 4, T_n = 128, 32-column lines, 8 channel tiles).
// The layer is a DCGAN-style 5x5 stride-2 DeConv (K_C = 3, kinds of Case 1,
// 2 and 3) with 256 input channels (two channel tiles), 8 output maps (two map
// groups) on an 4x6 input, followed by a 4x4 stride-2 layer with ReLU; every
// output pixel is compared with a direct transposed convolution.
//
// T_m = 4 and T_n = 128 are the paper's (Sec. IV-C); the layer sizes are
// chosen to keep the simulation short.
module tb_winograd_deconv_full;
  import wino_pkg::*;

  localparam int unsigned TM = 4, TN = 128;
  localparam int unsigned NMAX_C = 2 * TN, MMAX = 2 * TM, HMAX = 8;

  logic clk = 1'b0;
  logic rst_n, start, busy, done, in_valid, in_ready, wt_valid, wt_ready;
  logic o_valid, o_ready, o_last, stall_in, stall_out;
  layer_cfg_t cfg;
  logic [TN-1:0][DW-1:0]       in_data;
  logic [TN-1:0][8:0][DW-1:0]  wt_data;
  logic [TM-1:0][DW-1:0]       o_data;

  winograd_deconv_top dut (.*);

  `include "deconv_tb_body.svh"

  initial begin
    repeat (100000) @(posedge clk);
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
    run_layer(5, 2, 4, 6, 2, 2, 1'b0, 20, 20);
    run_layer(4, 2, 4, 4, 1, 1, 1'b1, 0, 0);
    $display("layers done: stall_in=%0d stall_out=%0d", n_stall_in, n_stall_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
