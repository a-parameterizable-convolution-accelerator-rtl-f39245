// tb_param_buf -- Weights & Biases OCMs: loads two layers of different
// shapes through the PARAMS stream (with gaps) and reads back every weight
// word of every bank and every bias, checking the bank/word layout
// (channel co in bank co % OCP, word (co / OCP) * K + k) and the loaded flag.
module tb_param_buf;
  import accel_pkg::*;
  localparam int PPACK = 4, ICP = 8, OCP = 4, WMAX = 2304, CMAX = 32;
  logic clk = 0, rst_n = 0, load = 0, loaded;
  logic [DIM_W-1:0] out_c = 0, in_c = 0;
  logic [1:0] fsize = 0;
  logic s_valid = 0, s_ready;
  logic [PPACK-1:0][7:0] s_data = 0;
  logic [5:0] w_addr = 0;
  logic [OCP-1:0][ICP-1:0][7:0] w_data;
  logic [4:0] b_addr = 0;
  act_t b_data;
  int checks = 0, failures = 0;

  always #5 clk = !clk;

  param_buf #(.PPACK(PPACK), .ICP(ICP), .OCP(OCP), .CHOUTxFILTERxFILTERxCHIN_MAX(WMAX),
              .CHOUT_MAX(CMAX)) u_dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int co, input int ci, input int f);
    byte b[], w[];
    int kw;
    b = new[co];
    w = new[co * f * f * ci];
    foreach (b[i]) b[i] = byte'($urandom);
    foreach (w[i]) w[i] = byte'($urandom);
    kw = f * f * ci / ICP;
    @(negedge clk);
    load = 1; out_c = 16'(co); in_c = 16'(ci); fsize = 2'(f);
    @(negedge clk);
    load = 0;
    checks++;
    if (loaded) begin failures++; $display("FAIL loaded before the stream"); end
    for (int i = 0; i < (co + w.size()) / PPACK; i++) begin
      while ($urandom_range(3) == 0) begin s_valid = 0; @(negedge clk); end
      for (int j = 0; j < PPACK; j++)
        s_data[j] = (i * PPACK + j < co) ? b[i * PPACK + j] : w[i * PPACK + j - co];
      s_valid = 1;
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    @(negedge clk);
    checks++;
    if (!loaded) begin failures++; $display("FAIL loaded low after the stream"); end
    for (int c = 0; c < co; c++) begin
      b_addr = 5'(c);
      #1;
      checks++;
      if (b_data != b[c]) begin failures++; $display("FAIL bias %0d", c); end
      for (int k = 0; k < kw; k++) begin
        w_addr = 6'((c / OCP) * kw + k);
        #1;
        for (int i = 0; i < ICP; i++) begin
          checks++;
          if (w_data[c % OCP][i] != w[(c * kw + k) * ICP + i]) begin
            failures++;
            if (failures < 10) $display("FAIL weight co %0d k %0d i %0d", c, k, i);
          end
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8, 16, 3);
    run(24, 8, 1);
    run(4, 8, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
