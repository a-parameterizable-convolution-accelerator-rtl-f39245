// tb_conv_accel_full -- end-to-end test of the accelerator with every
// parameter at its default (ICP = 32, OCP = 16, 16 values per transfer,
// full-size OCMs). Runs two small layers through the full-size design, a
// 3x3 convolution with padding, ReLU and 2x2 max-pool, and a 1x1
// convolution with 3x3 max-pool, and compares every output value with the
// reference model.
module tb_conv_accel_full;
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
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    //        h  w  ci  co f s p relu pool k bsh osh
    run_layer(mk(6, 6, 64, 32, 3, 1, 1, 1, 1, 2, 9, 11));
    bp_pct = 40; gap_pct = 10;
    run_layer(mk(7, 5, 32, 48, 1, 1, 0, 0, 1, 3, 7, 9));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
