// tb_accel_body.svh -- stimulus, checking and mechanism counters shared by
// the end-to-end accelerator testbenches. The including module declares the
// localparams APACK, PPACK, ICP, OCP, the DUT signals and the DUT u_dut.
// run_layer() makes random IA/W/B for a layer, streams PARAMS and IACT with
// random gaps, takes OACT with random back-pressure, and compares every
// output value with tb_ref_pkg::ref_layer.

  int checks = 0, failures = 0;
  int bp_pct = 0;          // OACT back-pressure probability in percent
  int gap_pct = 0;         // input stream gap probability in percent

  // mechanism counters
  int n_win_overlap = 0, n_opix_overlap = 0, n_pad_words = 0, n_sat = 0;
  int n_relu = 0, n_oact_stall = 0, n_fifo_full = 0, n_pe_wait = 0;
  int n_pool_row = 0, n_bypass = 0, n_rows_dropped = 0;
  int n_l_3x3 = 0, n_l_1x1 = 0, n_l_s2 = 0, n_l_pool2 = 0, n_l_pool3 = 0;

  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_conv.u_fetch.win_en && u_dut.u_conv.u_comp.pe_en) n_win_overlap++;
    if (u_dut.u_conv.u_opix.m_valid && u_dut.u_conv.u_opix.m_ready &&
        u_dut.u_conv.u_post.wr_valid && u_dut.u_conv.u_post.wr_ready) n_opix_overlap++;
    if (u_dut.u_conv.u_fetch.win_en && !u_dut.u_conv.u_fetch.in_win) n_pad_words++;
    if (u_dut.u_conv.u_post.wr_valid && u_dut.u_conv.u_post.wr_ready) begin
      if (u_dut.u_conv.u_post.v_shift > 127 || u_dut.u_conv.u_post.v_shift < -128) n_sat++;
      if (u_dut.u_conv.u_post.relu_en && u_dut.u_conv.u_post.v_shift < 0) n_relu++;
    end
    if (m_oact_valid && !m_oact_ready) n_oact_stall++;
    if (u_dut.u_fifo.s_valid && !u_dut.u_fifo.s_ready) n_fifo_full++;
    if (u_dut.u_conv.u_comp.pp_valid && !u_dut.u_conv.u_comp.pp_ready) n_pe_wait++;
    if (u_dut.u_pool.u_row.m_valid && u_dut.u_pool.u_row.m_ready) n_pool_row++;
    if (!u_dut.u_pool.pool_en && m_oact_valid && m_oact_ready) n_bypass++;
    if (u_dut.u_conv.u_fetch.state == 3 &&
        u_dut.u_conv.u_fetch.sfire && u_dut.u_conv.u_fetch.row_end) n_rows_dropped++;
  end

  // Per-layer time limit: a layer that hangs fails at once instead of at the
  // watchdog. The limit is generous against every stall the tests inject.
  int layer_cycles = 0, layer_limit = 0;
  always @(posedge clk) if (layer_limit > 0) begin
    layer_cycles++;
    if (layer_cycles > layer_limit) begin
      failures++;
      $display("FAIL: layer did not finish within %0d cycles", layer_limit);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_layer(input layer_cfg_t c);
    tb_ref_pkg::bytes_t ia, w, b, expv, got, pb;
    int oh, ow, nb_par, nb_iact, nb_out, F, t0, t1, kw, npix, got_n;
    F = c.fsize;
    ia = new[c.in_h * c.in_w * c.in_c];
    w  = new[c.out_c * F * F * c.in_c];
    b  = new[c.out_c];
    foreach (ia[i]) ia[i] = byte'($urandom);
    foreach (w[i])  w[i]  = byte'($urandom);
    foreach (b[i])  b[i]  = byte'($urandom);
    tb_ref_pkg::ref_layer(c, ia, w, b, expv, oh, ow);
    pb = new[b.size() + w.size()];
    foreach (b[i]) pb[i] = b[i];
    foreach (w[i]) pb[b.size() + i] = w[i];
    nb_par  = (c.out_c + c.out_c * F * F * c.in_c) / PPACK;
    nb_iact = c.in_h * c.in_w * c.in_c / APACK;
    nb_out  = expv.size() / APACK;
    got     = new[expv.size()];
    got_n   = 0;
    kw      = F * F * c.in_c / ICP;
    npix    = ((c.in_h + 2 * c.pad - F) / c.stride + 1) * ((c.in_w + 2 * c.pad - F) / c.stride + 1);
    if (F == 3) n_l_3x3++; else n_l_1x1++;
    if (c.stride == 2) n_l_s2++;
    if (c.pool_en && c.pool_k == 2) n_l_pool2++;
    if (c.pool_en && c.pool_k == 3) n_l_pool3++;

    layer_cycles = 0;
    layer_limit  = 20 * (npix * (c.out_c / OCP) * (kw + 1 + OCP) + nb_par + nb_iact + nb_out) + 5000;
    @(negedge clk);
    cfg = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = $time;
    fork
      begin : drv_par
        for (int i = 0; i < nb_par; i++) begin
          while ($urandom_range(99) < gap_pct) begin s_par_valid = 0; @(negedge clk); end
          for (int j = 0; j < PPACK; j++) s_par_data[j] = pb[i * PPACK + j];
          s_par_valid = 1'b1;
          @(posedge clk);
          while (!s_par_ready) @(posedge clk);
          @(negedge clk);
        end
        s_par_valid = 1'b0;
      end
      begin : drv_iact
        for (int i = 0; i < nb_iact; i++) begin
          while ($urandom_range(99) < gap_pct) begin s_iact_valid = 0; @(negedge clk); end
          for (int j = 0; j < APACK; j++) s_iact_data[j] = ia[i * APACK + j];
          s_iact_valid = 1'b1;
          @(posedge clk);
          while (!s_iact_ready) @(posedge clk);
          @(negedge clk);
        end
        s_iact_valid = 1'b0;
      end
      begin : rcv
        while (got_n < nb_out) begin
          m_oact_ready = ($urandom_range(99) >= bp_pct);
          @(posedge clk);
          if (m_oact_valid && m_oact_ready) begin
            for (int j = 0; j < APACK; j++) got[got_n * APACK + j] = m_oact_data[j];
            check(m_oact_last == (got_n == nb_out - 1), "m_oact_last position");
            got_n++;
          end
          @(negedge clk);
        end
        m_oact_ready = 1'b0;
      end
    join
    while (busy) @(posedge clk);
    t1 = $time;
    layer_limit = 0;
    check(!m_oact_valid, "no OACT beat after the layer");
    foreach (expv[i]) begin
      checks++;
      if (got[i] !== expv[i]) begin
        failures++;
        if (failures < 20)
          $display("FAIL: layer %0dx%0dx%0d->%0d F%0d S%0d P%0d pool%0d%0d: value %0d got %0d exp %0d",
                   c.in_h, c.in_w, c.in_c, c.out_c, F, c.stride, c.pad, c.pool_en, c.pool_k,
                   i, got[i], expv[i]);
      end
    end
    // The PEs need K cycles per group of OCP channels per output pixel.
    check((t1 - t0) / 10 >= npix * (c.out_c / OCP) * kw,
          "layer faster than the PE array allows");
    $display("layer %0dx%0dx%0d -> %0dx%0dx%0d: %0d cycles, %0d MAC cycles",
             c.in_h, c.in_w, c.in_c, oh, ow, c.out_c, (t1 - t0) / 10,
             npix * (c.out_c / OCP) * kw);
  endtask

  function automatic layer_cfg_t mk(int h, int w, int ci, int co, int f, int s, int p,
                                    bit relu, bit pool, int pk, int bsh, int osh);
    layer_cfg_t c;
    c = '0;
    c.in_h = 16'(h); c.in_w = 16'(w); c.in_c = 16'(ci); c.out_c = 16'(co);
    c.fsize = 2'(f); c.stride = 2'(s); c.pad = p[0]; c.relu_en = relu;
    c.pool_en = pool; c.pool_k = 2'(pk); c.bias_shift = 5'(bsh); c.out_shift = 5'(osh);
    return c;
  endfunction

  task automatic require(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end else $display("mechanism %-28s %0d", what, n);
  endtask

  task automatic report_mechanisms();
    require(n_win_overlap,  "window copy during MAC");
    require(n_opix_overlap, "OUT-PIXEL drain during write");
    require(n_pad_words,    "zero padding words");
    require(n_sat,          "over/under-flow saturation");
    require(n_relu,         "ReLU clamp");
    require(n_oact_stall,   "OACT back-pressure");
    require(n_fifo_full,    "stream FIFO full");
    require(n_pe_wait,      "PEs wait for post-processing");
    require(n_pool_row,     "row max-pool outputs");
    require(n_bypass,       "bypass MUX beats");
    require(n_rows_dropped, "unused input rows dropped");
    require(n_l_3x3,        "3x3 layers");
    require(n_l_1x1,        "1x1 layers");
    require(n_l_s2,         "stride-2 layers");
    require(n_l_pool2,      "2x2 max-pool layers");
    require(n_l_pool3,      "3x3 max-pool layers");
  endtask
