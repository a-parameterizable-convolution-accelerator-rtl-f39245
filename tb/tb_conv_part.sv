// tb_conv_part -- CONV-PART alone: random layers (1x1 and 3x3, padding,
// stride 2, ReLU on/off) streamed with gaps and back-pressure; every output
// value is compared with the reference convolution + post-processing, and
// the copy of the next window must overlap the MACs of the current one
// (double buffering).
module tb_conv_part;
  import accel_pkg::*;
  localparam int APACK = 4, PPACK = 4, ICP = 8, OCP = 4;
  logic clk = 0, rst_n = 0, start = 0, done;
  layer_cfg_t cfg = '0;
  logic s_iact_valid = 0, s_iact_ready, s_par_valid = 0, s_par_ready, m_valid, m_ready = 0;
  logic [APACK-1:0][7:0] s_iact_data = 0, m_data;
  logic [PPACK-1:0][7:0] s_par_data = 0;
  int checks = 0, failures = 0, n_overlap = 0, n_done = 0;

  always #5 clk = !clk;

  conv_part #(.APACK(APACK), .PPACK(PPACK), .ICP(ICP), .OCP(OCP), .PE_DSP(2),
              .FILTER_MAX(3), .WINxCHIN_PAD_MAX(256), .FILTERxFILTERxCHIN_MAX(216),
              .CHOUTxFILTERxFILTERxCHIN_MAX(4096), .CHOUT_MAX(32)) u_dut (.*);

  always @(posedge clk) begin
    if (u_dut.win_wen && u_dut.pe_en) n_overlap++;
    if (done) n_done++;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int h, input int w, input int ci, input int co, input int f,
                     input int s, input int p, input bit relu, input int bsh, input int osh);
    layer_cfg_t c;
    tb_ref_pkg::bytes_t ia, wt, b, pb, e;
    int oh, ow, n;
    c = '0;
    c.in_h = 16'(h); c.in_w = 16'(w); c.in_c = 16'(ci); c.out_c = 16'(co);
    c.fsize = 2'(f); c.stride = 2'(s); c.pad = p[0]; c.relu_en = relu;
    c.bias_shift = 5'(bsh); c.out_shift = 5'(osh);
    ia = new[h * w * ci]; wt = new[co * f * f * ci]; b = new[co];
    foreach (ia[i]) ia[i] = byte'($urandom);
    foreach (wt[i]) wt[i] = byte'($urandom);
    foreach (b[i])  b[i]  = byte'($urandom);
    pb = new[co + wt.size()];
    foreach (b[i])  pb[i] = b[i];
    foreach (wt[i]) pb[co + i] = wt[i];
    tb_ref_pkg::ref_layer(c, ia, wt, b, e, oh, ow);
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    n = 0;
    fork
      for (int i = 0; i < pb.size() / PPACK; i++) begin
        while ($urandom_range(3) == 0) begin s_par_valid = 0; @(negedge clk); end
        for (int j = 0; j < PPACK; j++) s_par_data[j] = pb[i * PPACK + j];
        s_par_valid = 1;
        @(posedge clk);
        while (!s_par_ready) @(posedge clk);
        @(negedge clk);
        s_par_valid = 0;
      end
      for (int i = 0; i < ia.size() / APACK; i++) begin
        while ($urandom_range(3) == 0) begin s_iact_valid = 0; @(negedge clk); end
        for (int j = 0; j < APACK; j++) s_iact_data[j] = ia[i * APACK + j];
        s_iact_valid = 1;
        @(posedge clk);
        while (!s_iact_ready) @(posedge clk);
        @(negedge clk);
        s_iact_valid = 0;
      end
      while (n < e.size()) begin
        m_ready = ($urandom_range(2) != 0);
        @(posedge clk);
        if (m_valid && m_ready)
          for (int j = 0; j < APACK; j++) begin
            checks++;
            if ($signed(m_data[j]) != e[n]) begin
              failures++;
              if (failures < 10) $display("FAIL value %0d got %0d exp %0d", n, $signed(m_data[j]), e[n]);
            end
            n++;
          end
        @(negedge clk);
      end
    join
    m_ready = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5, 5, 16, 8, 3, 1, 1, 1, 8, 9);
    run(7, 6, 8, 12, 3, 2, 0, 0, 7, 9);
    run(4, 3, 24, 8, 1, 1, 0, 1, 6, 8);
    run(6, 6, 8, 4, 3, 2, 1, 0, 4, 8);
    checks += 2;
    if (n_overlap == 0) begin failures++; $display("FAIL no window copy during MAC"); end
    if (n_done != 4) begin failures++; $display("FAIL done pulses %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
