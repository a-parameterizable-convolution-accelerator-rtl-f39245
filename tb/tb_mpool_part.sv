// tb_mpool_part -- MPOOL-PART: streams random CONV-PART output maps
// (H x W x C) through 2x2 and 3x3 max-pooling with stride 2 and through the
// bypass, with gaps and back-pressure, and compares every output value with
// a 2-D max-pool computed here (or the input, for the bypass).
module tb_mpool_part;
  import accel_pkg::*;
  localparam int APACK = 4;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg = '0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [APACK-1:0][7:0] s_data = 0, m_data;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  mpool_part #(.APACK(APACK), .PWINxPCH_MAX(256), .PCH_MAX(32)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int h, input int w, input int c, input bit pool, input int kk);
    byte d[];
    byte e[$];
    d = new[h * w * c];
    foreach (d[i]) d[i] = byte'($urandom);
    if (!pool) foreach (d[i]) e.push_back(d[i]);
    else
      for (int py = 0; py < (h - kk) / 2 + 1; py++)
        for (int px = 0; px < (w - kk) / 2 + 1; px++)
          for (int ch = 0; ch < c; ch++) begin
            byte m;
            m = -128;
            for (int i = 0; i < kk; i++)
              for (int j = 0; j < kk; j++)
                if (d[((2 * py + i) * w + 2 * px + j) * c + ch] > m)
                  m = d[((2 * py + i) * w + 2 * px + j) * c + ch];
            e.push_back(m);
          end
    @(negedge clk);
    cfg = '0;
    cfg.in_h = 16'(h); cfg.in_w = 16'(w); cfg.in_c = 16'(8); cfg.out_c = 16'(c);
    cfg.fsize = 2'd1; cfg.stride = 2'd1; cfg.pool_en = pool; cfg.pool_k = 2'(kk);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      for (int i = 0; i < h * w * c / APACK; i++) begin
        while ($urandom_range(3) == 0) begin s_valid = 0; @(negedge clk); end
        for (int a = 0; a < APACK; a++) s_data[a] = d[i * APACK + a];
        s_valid = 1;
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        @(negedge clk);
        s_valid = 0;
      end
      while (e.size() != 0) begin
        m_ready = ($urandom_range(2) != 0);
        @(posedge clk);
        if (m_valid && m_ready)
          for (int a = 0; a < APACK; a++) begin
            checks++;
            if ($signed(m_data[a]) != e.pop_front()) begin
              failures++;
              if (failures < 10) $display("FAIL %0dx%0dx%0d pool %0d k %0d", h, w, c, pool, kk);
            end
          end
        @(negedge clk);
      end
    join
    m_ready = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(7, 7, 8, 1, 3);
    run(6, 8, 12, 1, 2);
    run(5, 4, 8, 0, 2);
    run(9, 6, 4, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
