// tb_out_pixel_buf -- OUT-PIXEL ping-pong: pixels of C_o = 24 channels are
// written one value at a time in random order, read as 4-channel beats with
// random back-pressure. Checks data and order, and that the writer is held
// off while both OCMs are full.
module tb_out_pixel_buf;
  import accel_pkg::*;
  localparam int APACK = 4, CHOUT_MAX = 32, CO = 24;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, wr_last = 0;
  logic [4:0] wr_idx = 0;
  act_t wr_data = 0;
  logic m_valid, m_ready = 0;
  logic [APACK-1:0][7:0] m_data;
  logic [DIM_W-1:0] out_c = CO;
  int checks = 0, failures = 0, n_full = 0;
  byte q[$];

  always #5 clk = !clk;

  out_pixel_buf #(.APACK(APACK), .CHOUT_MAX(CHOUT_MAX)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader
  int nread = 0;
  initial begin
    forever begin
      @(negedge clk);
      m_ready = (nread < 100) ? ($urandom_range(9) < 2) : 1'b1;
      @(posedge clk);
      if (!wr_ready) n_full++;
      if (m_valid && m_ready) begin
        for (int j = 0; j < APACK; j++) begin
          checks++;
          if (q.size() == 0 || m_data[j] != q.pop_front()) begin
            failures++;
            if (failures < 10) $display("FAIL beat %0d lane %0d", nread, j);
          end
        end
        nread++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int px = 0; px < 20; px++) begin
      byte v [CO];
      int order [CO];
      foreach (v[i]) begin v[i] = byte'($urandom); order[i] = i; end
      order.shuffle();
      foreach (v[i]) q.push_back(v[i]);
      foreach (order[i]) begin
        wr_valid = 1; wr_idx = 5'(order[i]); wr_data = v[order[i]]; wr_last = (i == CO - 1);
        @(posedge clk);
        while (!wr_ready) @(posedge clk);
        @(negedge clk);
        wr_valid = 0;
      end
    end
    while (q.size() != 0) @(negedge clk);
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL both OCMs never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
