// tb_pool_stage -- one max-pool dimension: window sizes 2 and 3, stride 2,
// lines with even and odd unit counts (floor mode drops the tail), several
// lines per start, random gaps and back-pressure. Every output beat is
// compared with a 1-D max-pool of signed values computed here.
module tb_pool_stage;
  import accel_pkg::*;
  localparam int APACK = 2;
  logic clk = 0, rst_n = 0, start = 0;
  logic [DIM_W-1:0] ubeats = 1, nunits = 1;
  logic [1:0] k = 2;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [APACK-1:0][7:0] s_data = 0, m_data;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  pool_stage #(.APACK(APACK), .DEPTH(8)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int ub, input int nu, input int kk, input int lines);
    byte d[];
    byte e[$];
    int nout, nin;
    d = new[lines * nu * ub * APACK];
    foreach (d[i]) d[i] = byte'($urandom);
    nout = (nu - kk) / 2 + 1;
    for (int l = 0; l < lines; l++)
      for (int j = 0; j < nout; j++)
        for (int b = 0; b < ub; b++)
          for (int a = 0; a < APACK; a++) begin
            byte m;
            m = -128;
            for (int u = 2 * j; u < 2 * j + kk; u++)
              if (d[((l * nu + u) * ub + b) * APACK + a] > m) m = d[((l * nu + u) * ub + b) * APACK + a];
            e.push_back(m);
          end
    @(negedge clk);
    ubeats = 16'(ub); nunits = 16'(nu); k = 2'(kk); start = 1;
    @(negedge clk);
    start = 0;
    nin = lines * nu * ub;
    fork
      for (int i = 0; i < nin; i++) begin
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
              if (failures < 10) $display("FAIL ub %0d nu %0d k %0d", ub, nu, kk);
            end
          end
        @(negedge clk);
      end
    join
    m_ready = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (m_valid) begin failures++; $display("FAIL extra output"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3, 7, 3, 2);
    run(3, 8, 3, 2);
    run(2, 6, 2, 3);
    run(4, 7, 2, 2);
    run(1, 5, 3, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
