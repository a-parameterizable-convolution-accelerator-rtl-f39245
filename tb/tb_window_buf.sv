// tb_window_buf -- Window ping-pong: a writer fills windows of random
// length while a reader with random delays reads and releases them. Checks
// every word, the order of windows, and that the writer waits while both
// OCMs are full and the reader while both are empty.
module tb_window_buf;
  localparam int ICP = 4, FFC = 64, KMAX = 16;
  logic clk = 0, rst_n = 0;
  logic wr_ready, wr_en = 0, wr_commit = 0, rd_valid, rd_release = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  logic [ICP-1:0][7:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0, n_wwait = 0, n_rwait = 0;
  logic [ICP*8-1:0] words [$];
  int lens [$];
  localparam int NW = 30;

  always #5 clk = !clk;

  window_buf #(.ICP(ICP), .FILTERxFILTERxCHIN_MAX(FFC)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NW; n++) begin
      int len;
      len = $urandom_range(1, KMAX);
      if (n >= 10) repeat ($urandom_range(0, 20)) @(negedge clk);
      while (!wr_ready) begin n_wwait++; @(negedge clk); end
      for (int k = 0; k < len; k++) begin
        wr_en = 1; wr_addr = 4'(k); wr_data = {$urandom};
        words.push_back(wr_data);
        wr_commit = (k == len - 1);
        if (wr_commit) lens.push_back(len);
        @(negedge clk);
      end
      wr_en = 0; wr_commit = 0;
    end
  end

  // reader
  initial begin
    repeat (2) @(negedge clk);
    for (int n = 0; n < NW; n++) begin
      int len;
      repeat ((n < 10) ? 12 : 0) @(negedge clk);
      while (!rd_valid) begin n_rwait++; @(negedge clk); end
      len = lens.pop_front();
      for (int k = 0; k < len; k++) begin
        rd_addr = 4'(k);
        #1;
        checks++;
        if (rd_data != words.pop_front()) begin
          failures++;
          $display("FAIL window %0d word %0d", n, k);
        end
        if (k == len - 1) rd_release = 1;
        @(negedge clk);
        rd_release = 0;
      end
    end
    checks += 2;
    if (n_wwait == 0) begin failures++; $display("FAIL writer never waited"); end
    if (n_rwait == 0) begin failures++; $display("FAIL reader never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
