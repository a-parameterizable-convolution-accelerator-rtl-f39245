// tb_conv_accel -- end-to-end test of the accelerator at reduced size.
//
// ICP = 8, OCP = 4 (two DSP-packed PEs, two LUT PEs), 4 values per
// transfer, smaller OCMs. Runs a sequence of layers covering every layer
// type (1x1, 3x3 with padding 0/1 and stride 1/2, ReLU on/off, 2x2 and 3x3
// max-pool, bypass), with gaps on the input streams and back-pressure on
// the output, and compares every output value with the reference model.
// Counts each mechanism of the design and fails if one never happened.
module tb_conv_accel;
  import accel_pkg::*;
  localparam int APACK = 4, PPACK = 4, ICP = 8, OCP = 4;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg = '0;
  logic s_par_valid = 0, s_par_ready, s_iact_valid = 0, s_iact_ready;
  logic [PPACK-1:0][7:0] s_par_data = '0;
  logic [APACK-1:0][7:0] s_iact_data = '0;
  logic m_oact_valid, m_oact_ready = 0, m_oact_last;
  logic [APACK-1:0][7:0] m_oact_data;

  always #5 clk = !clk;

  conv_accel #(
    .APACK(APACK), .PPACK(PPACK), .ICP(ICP), .OCP(OCP), .PE_DSP(2),
    .FILTER_MAX(3), .WINxCHIN_PAD_MAX(512), .FILTERxFILTERxCHIN_MAX(288),
    .CHOUTxFILTERxFILTERxCHIN_MAX(4608), .CHOUT_MAX(64),
    .PWINxPCH_MAX(512), .PCH_MAX(64), .FIFO_DEPTH(4)
  ) u_dut (.*);

  `include "tb_accel_body.svh"

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    //        h  w  ci co f s p relu pool k bsh osh
    run_layer(mk(6, 6, 16, 8, 3, 1, 1, 1, 1, 2, 8, 9));
    bp_pct = 60; gap_pct = 20;
    run_layer(mk(8, 7, 8, 8, 3, 2, 0, 0, 0, 2, 7, 9));
    run_layer(mk(5, 5, 16, 12, 1, 1, 0, 1, 1, 3, 6, 7));
    bp_pct = 0; gap_pct = 0;
    run_layer(mk(8, 8, 8, 4, 3, 2, 1, 0, 1, 3, 7, 8));
    bp_pct = 85;
    run_layer(mk(4, 6, 8, 16, 1, 1, 0, 0, 0, 2, 6, 6));
    bp_pct = 30; gap_pct = 10;
    run_layer(mk(9, 7, 24, 8, 3, 1, 1, 1, 1, 3, 9, 10));
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
