// tb_stream_fifo -- random pushes and pops against a queue model; checks
// data order, that the FIFO fills (s_ready low) and empties (m_valid low).
module tb_stream_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0, s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [W-1:0] s_data = 0, m_data;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0, n_pop = 0;

  always #5 clk = !clk;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int phase;
      phase = (t / 200) % 2;
      if (!s_valid || s_ready) begin
        s_valid = ($urandom_range(9) < (phase ? 8 : 3));
        s_data  = W'($urandom);
      end
      m_ready = ($urandom_range(9) < (phase ? 3 : 8));
      @(posedge clk);
      if (!s_ready) n_full++;
      if (!m_valid) n_empty++;
      if (m_valid && m_ready) begin
        checks++;
        n_pop++;
        if (q.size() == 0 || m_data != q.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL pop %0d", n_pop);
        end
      end
      if (s_valid && s_ready) q.push_back(s_data);
      @(negedge clk);
    end
    checks += 2;
    if (n_full == 0)  begin failures++; $display("FAIL never full"); end
    if (n_empty == 0) begin failures++; $display("FAIL never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
