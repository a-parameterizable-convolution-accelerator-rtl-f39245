// tb_conv_accel_workloads -- layers of the four evaluated CNNs through the
// accelerator at its default parameters (ICP = 32, OCP = 16, 16 values per
// transfer, full-size OCMs).
//
// Each layer keeps the real channel counts, filter, stride, padding and
// pooling of a layer of the network. Only the feature map is cropped to a
// few pixels so that the software reference stays fast. The OCM sizes a
// layer needs are set by its channel counts, not by its height, so the
// memory-bound cases are exercised at full size:
//   VGG-16 conv5_x, one secondary convolution: 3x3, C_i = 512, C_o = 112
//     (a 512-channel layer split into five such runs; 112 * 4608 weights
//     fill the Weights OCM to 516096 of 524288 bytes), ReLU, 2x2 max-pool
//   SqueezeNet v1.1 conv10: 1x1, C_i = 512, C_o = 1008 (1000 padded to a
//     multiple of 16), ReLU, no pool: 63 channel groups, 1008 biases
//   PeleeNet stem: 3x3 stride 2 padding 1, C_i = 32 (3 reshaped/padded),
//     C_o = 32, ReLU, 2x2 max-pool
//   ZynqNet-style downsampling: 3x3 stride 2 padding 1, C_i = 64,
//     C_o = 128, ReLU, no pool; and SqueezeNet fire expand 3x3 with its
//     3x3 max-pool: C_i = 64 (fire squeeze 16 padded to 64 would also do),
//     C_o = 64
// Every output value is compared with the reference model. The shifts
// (DFP exponents) are picked so that random data gives mostly unsaturated
// outputs. The shared body checks handshakes, the last flag and that no
// layer ends sooner than its MAC cycles allow.
module tb_conv_accel_workloads;
  import accel_pkg::*;
  localparam int APACK = 16, PPACK = 16, ICP = 32, OCP = 16;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg = '0;
  logic s_par_valid = 0, s_par_ready, s_iact_valid = 0, s_iact_ready;
  logic [PPACK-1:0][7:0] s_par_data = '0;
  logic [APACK-1:0][7:0] s_iact_data = '0;
  logic m_oact_valid, m_oact_ready = 0, m_oact_last;
  logic [APACK-1:0][7:0] m_oact_data;

  always #5 clk = !clk;

  conv_accel u_dut (.*);

  `include "tb_accel_body.svh"

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    bp_pct = 20; gap_pct = 5;
    //        h  w  ci   co    f s p relu pool k bsh osh
    $display("VGG-16 conv5_x secondary convolution");
    run_layer(mk(4, 4, 512, 112,  3, 1, 1, 1, 1, 2, 10, 14));
    $display("SqueezeNet v1.1 conv10");
    run_layer(mk(2, 2, 512, 1008, 1, 1, 0, 1, 0, 2, 9, 12));
    $display("PeleeNet stem convolution");
    run_layer(mk(8, 8, 32, 32,    3, 2, 1, 1, 1, 2, 8, 11));
    $display("ZynqNet downsampling convolution");
    run_layer(mk(6, 6, 64, 128,   3, 2, 1, 1, 0, 2, 8, 12));
    $display("SqueezeNet fire expand 3x3 with max-pool");
    run_layer(mk(5, 5, 64, 64,    3, 1, 1, 1, 1, 3, 8, 12));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
