// tb_conv_compute -- PE sequencing: checks the window-word and weight-word
// addresses and pe_first of every MAC cycle, the channel base and last flag
// of every hand-over, window release, that no MAC happens before the
// parameters are loaded, and the cycle count without stalls:
// per pixel one wait cycle plus (C_o/OCP) * (K + 1) cycles, and done one
// cycle after the last hand-over.
module tb_conv_compute;
  import accel_pkg::*;
  localparam int ICP = 8, OCP = 4;
  logic clk = 0, rst_n = 0, start = 0, params_loaded = 0, done;
  layer_cfg_t cfg = '0;
  logic win_valid = 0, win_release, pe_en, pe_first, pp_valid, pp_ready = 0, pp_last;
  logic [4:0] win_addr;
  logic [6:0] w_addr;
  logic [5:0] pp_base;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  conv_compute #(.ICP(ICP), .OCP(OCP), .FILTERxFILTERxCHIN_MAX(216),
                 .CHOUTxFILTERxFILTERxCHIN_MAX(4096), .CHOUT_MAX(64)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic run(input int h, input int w, input int ci, input int co, input int f,
                     input bit stalls);
    int kw, ng, npix, k, g, pix, cyc, ldelay;
    bit fin;
    kw = f * f * ci / ICP; ng = co / OCP; npix = h * w;
    ldelay = stalls ? 30 : 0;
    @(negedge clk);
    cfg = '0;
    cfg.in_h = 16'(h); cfg.in_w = 16'(w); cfg.in_c = 16'(ci); cfg.out_c = 16'(co);
    cfg.fsize = 2'(f); cfg.stride = 2'd1; cfg.pad = (f == 3);
    params_loaded = !stalls;
    win_valid = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    k = 0; g = 0; pix = 0; cyc = 0; fin = 0;
    while (!fin) begin
      if (stalls) begin
        pp_ready  = ($urandom_range(2) != 0);
        win_valid = ($urandom_range(3) != 0) || win_valid;
      end else pp_ready = 1;
      if (cyc == ldelay) params_loaded = 1;
      @(posedge clk);
      cyc++;
      if (pe_en) begin
        chk(params_loaded && win_valid, "MAC without parameters or window");
        chk(win_addr == 5'(k) && w_addr == 7'(g * kw + k) && pe_first == (k == 0),
            $sformatf("MAC address pix %0d g %0d k %0d", pix, g, k));
        k++;
      end
      if (pp_valid && pp_ready) begin
        chk(k == kw, "hand-over after K words");
        chk(pp_base == 6'(g * OCP) && pp_last == (g == ng - 1), "hand-over base/last");
        chk(win_release == (g == ng - 1), "window release");
        k = 0; g++;
        if (g == ng) begin g = 0; pix++; if (stalls) win_valid = 0; end
      end
      if (done) fin = 1;
      @(negedge clk);
    end
    chk(pix == npix, "pixel count");
    if (!stalls) chk(cyc == npix * (1 + ng * (kw + 1)) + 1,
                     $sformatf("cycles %0d expected %0d", cyc, npix * (1 + ng * (kw + 1)) + 1));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3, 4, 16, 8, 3, 0);
    run(2, 3, 8, 16, 1, 0);
    run(3, 3, 16, 12, 3, 1);
    run(4, 2, 24, 4, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
